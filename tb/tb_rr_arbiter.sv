// tb_rr_arbiter: checks that the round-robin arbiter grants one requester at a time and
// only one that asks, and that with all inputs requesting every input is served within
// N grants.
module tb_rr_arbiter;
  localparam int N = 5;
  logic clk = 0, rst_n = 0, accept;
  logic [N-1:0] req, gnt;
  logic [2:0] gnt_idx;
  int checks = 0, failures = 0;
  int wait_cnt [N];

  rr_arbiter #(.N(N)) dut (.clk, .rst_n, .req, .accept, .gnt, .gnt_idx);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req = '0; accept = 1;
    for (int i = 0; i < N; i++) wait_cnt[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      req = (i < 1000) ? N'($urandom) : '1;
      accept = (i < 1000) ? ($urandom % 4 != 0) : 1'b1;
      #1;
      checks++;
      if ((req != 0) && ($countones(gnt) != 1 || (gnt & req) == 0 || gnt[gnt_idx] != 1'b1)) begin
        failures++; $display("bad grant req=%b gnt=%b", req, gnt);
      end
      if (req == 0 && gnt != 0) begin failures++; $display("grant without request"); end
      if (i >= 1000) begin
        for (int k = 0; k < N; k++) begin
          if (gnt[k]) wait_cnt[k] = 0; else wait_cnt[k]++;
          checks++;
          if (wait_cnt[k] >= N) begin failures++; $display("input %0d starved", k); end
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
