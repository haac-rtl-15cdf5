// tb_aes_rekey_pipe: checks the re-keyed AES pipeline (two blocks per key) against the
// FIPS-197 AES-128 example vector and against an independent AES model for random
// keys and data, with a random enable pattern; also checks the 11-cycle latency.
module tb_aes_rekey_pipe;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, en = 1, in_valid = 0, out_valid;
  logic [127:0] key;
  logic [127:0] pt [2];
  logic [127:0] ct [2];
  int checks = 0, failures = 0;
  logic [127:0] exp_q [$];
  int issued = 0, got = 0;

  aes_rekey_pipe #(.NBLK(2)) dut (.clk, .rst_n, .en, .in_valid, .key, .pt, .out_valid, .ct);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && en && out_valid) begin
    logic [127:0] e0, e1;
    e0 = exp_q.pop_front();
    e1 = exp_q.pop_front();
    checks += 2;
    if (ct[0] !== e0 || ct[1] !== e1) begin
      failures++;
      $display("mismatch: %h/%h expected %h/%h", ct[0], ct[1], e0, e1);
    end
    got++;
  end

  initial begin
    int lat;
    key = '0; pt[0] = '0; pt[1] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // FIPS-197 appendix C.1 example, latency measurement
    @(negedge clk);
    key = 128'h000102030405060708090a0b0c0d0e0f;
    pt[0] = 128'h00112233445566778899aabbccddeeff;
    pt[1] = 128'h00112233445566778899aabbccddeeff;
    exp_q.push_back(128'h69c4e0d86a7b0430d8cdb78070b4c55a);
    exp_q.push_back(128'h69c4e0d86a7b0430d8cdb78070b4c55a);
    in_valid = 1;
    @(negedge clk);
    in_valid = 0;
    lat = 1;
    while (!out_valid) begin @(negedge clk); lat++; end
    checks++;
    if (lat != 11) begin failures++; $display("latency %0d, expected 11", lat); end
    @(negedge clk);
    // random stream with random stalls
    for (int i = 0; i < 200; i++) begin
      en = ($urandom % 4) != 0;
      if (en) begin
        key = rand128(); pt[0] = rand128(); pt[1] = rand128();
        in_valid = ($urandom % 3) != 0;
        if (in_valid) begin
          exp_q.push_back(aes128(key, pt[0]));
          exp_q.push_back(aes128(key, pt[1]));
        end
      end
      @(negedge clk);
    end
    in_valid = 0; en = 1;
    repeat (20) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d results missing", exp_q.size()/2); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
