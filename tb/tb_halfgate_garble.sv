// tb_halfgate_garble: checks the Garbler Half-Gate unit against the reference garbling
// (output 0-label and both table rows) for random gates, and checks that the
// reference Evaluator, given the unit's table, recovers the right output label for all
// four input combinations. Also checks the 21-cycle latency.
module tb_halfgate_garble;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, en = 1, in_valid = 0, out_valid;
  logic [31:0] gate_id;
  logic [127:0] wa0, wb0, r, wc0;
  logic [255:0] tbl;
  logic [7:0] meta_in, meta_out;
  int checks = 0, failures = 0;
  logic [127:0] c0_q [$];
  logic [255:0] t_q  [$];
  logic [127:0] a0_q [$];
  logic [127:0] b0_q [$];
  logic [31:0]  g_q  [$];
  logic [7:0]   m_q  [$];

  halfgate_garble #(.META_W(8)) dut (.clk, .rst_n, .en, .in_valid, .gate_id, .wa0, .wb0, .r,
    .meta_in, .out_valid, .wc0, .tbl, .meta_out);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && en && out_valid) begin
    logic [127:0] c0, a0, b0, lbl;
    logic [255:0] t;
    logic [31:0] g;
    logic [7:0] m;
    c0 = c0_q.pop_front(); t = t_q.pop_front(); m = m_q.pop_front();
    a0 = a0_q.pop_front(); b0 = b0_q.pop_front(); g = g_q.pop_front();
    checks++;
    if (wc0 !== c0 || tbl !== t || meta_out !== m) begin
      failures++;
      $display("mismatch: c0 %h expected %h", wc0, c0);
    end
    for (int a = 0; a < 2; a++)
      for (int b = 0; b < 2; b++) begin
        lbl = eval_and(a != 0 ? a0 ^ r : a0, b != 0 ? b0 ^ r : b0, tbl, g);
        checks++;
        if (lbl !== ((a != 0 && b != 0) ? wc0 ^ r : wc0)) begin
          failures++;
          $display("evaluation of garbled table fails for a=%0d b=%0d", a, b);
        end
      end
  end

  task automatic make_gate();
    logic [255:0] t;
    logic [127:0] c0;
    wa0 = rand128(); wb0 = rand128();
    gate_id = $urandom;
    garble_and(wa0, wb0, r, gate_id, t, c0);
    meta_in = 8'($urandom);
    c0_q.push_back(c0); t_q.push_back(t); m_q.push_back(meta_in);
    a0_q.push_back(wa0); b0_q.push_back(wb0); g_q.push_back(gate_id);
  endtask

  initial begin
    int lat;
    r = rand128(); r[0] = 1'b1;
    wa0 = '0; wb0 = '0; gate_id = '0; meta_in = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    make_gate();
    in_valid = 1;
    @(negedge clk);
    in_valid = 0;
    lat = 1;
    while (!out_valid) begin @(negedge clk); lat++; end
    checks++;
    if (lat != 21) begin failures++; $display("latency %0d, expected 21", lat); end
    @(negedge clk);
    for (int i = 0; i < 100; i++) begin
      en = ($urandom % 4) != 0;
      if (en) begin
        in_valid = ($urandom % 4) != 0;
        if (in_valid) make_gate();
      end
      @(negedge clk);
    end
    in_valid = 0; en = 1;
    repeat (30) @(negedge clk);
    checks++;
    if (c0_q.size() != 0) begin failures++; $display("%0d results missing", c0_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
