// tb_halfgate: checks the Evaluator Half-Gate unit. Random AND gates are garbled with
// the reference model; the unit evaluates them from the active input labels and its
// output must equal C0 ^ (a&b)*R for the plaintext inputs a, b. Also checks the
// 18-cycle latency and that gates flow correctly through a random enable pattern.
module tb_halfgate;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, en = 1, in_valid = 0, out_valid;
  logic [31:0] gate_id;
  logic [127:0] wa, wb, wc;
  logic [255:0] tbl;
  logic [7:0] meta_in, meta_out;
  int checks = 0, failures = 0;
  logic [127:0] exp_q [$];
  logic [7:0] meta_q [$];

  halfgate_eval #(.META_W(8)) dut (.clk, .rst_n, .en, .in_valid, .gate_id, .wa, .wb, .tbl,
    .meta_in, .out_valid, .wc, .meta_out);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && en && out_valid) begin
    logic [127:0] e;
    logic [7:0] m;
    e = exp_q.pop_front();
    m = meta_q.pop_front();
    checks++;
    if (wc !== e || meta_out !== m) begin
      failures++;
      $display("mismatch: %h expected %h", wc, e);
    end
  end

  task automatic make_gate();
    logic [127:0] r, a0, b0, c0;
    logic [255:0] t;
    bit a, b;
    r  = rand128(); r[0] = 1'b1;
    a0 = rand128(); b0 = rand128();
    a  = 1'($urandom); b = 1'($urandom);
    gate_id = $urandom;
    garble_and(a0, b0, r, gate_id, t, c0);
    wa  = a ? a0 ^ r : a0;
    wb  = b ? b0 ^ r : b0;
    tbl = t;
    meta_in = 8'($urandom);
    exp_q.push_back((a & b) ? c0 ^ r : c0);
    meta_q.push_back(meta_in);
  endtask

  initial begin
    int lat;
    wa = '0; wb = '0; tbl = '0; gate_id = '0; meta_in = '0;
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
    if (lat != 18) begin failures++; $display("latency %0d, expected 18", lat); end
    @(negedge clk);
    for (int i = 0; i < 150; i++) begin
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
    if (exp_q.size() != 0) begin failures++; $display("%0d results missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
