// tb_haac_fifo: checks the streaming queue against a queue model under random pushes,
// single pops and double pops, including the full and empty conditions and the
// second-entry look-ahead output.
module tb_haac_fifo;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, pop = 0, pop2 = 0;
  logic [15:0] in_data, out_data0, out_data1;
  logic [4:0] count;
  int checks = 0, failures = 0;
  logic [15:0] model [$];
  int fulls = 0;

  haac_fifo #(.W(16), .DEPTH(16)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_data,
    .out_data0, .out_data1, .count, .pop, .pop2);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      checks++;
      if (int'(count) != model.size() || in_ready != (model.size() < 16)) begin
        failures++; $display("count %0d model %0d", count, model.size());
      end
      if (model.size() >= 1) begin
        checks++;
        if (out_data0 !== model[0]) begin failures++; $display("head mismatch"); end
      end
      if (model.size() >= 2) begin
        checks++;
        if (out_data1 !== model[1]) begin failures++; $display("second mismatch"); end
      end
      if (model.size() == 16) fulls++;
      in_valid = ($urandom % 8) < (((i / 500) % 2) != 0 ? 6 : 3);
      in_data  = 16'($urandom);
      pop = 0; pop2 = 0;
      if (model.size() >= 2 && ($urandom % 4) == 0) pop2 = 1;
      else if (model.size() >= 1) pop = ($urandom % 8) < (((i / 500) % 2) != 0 ? 2 : 5);
      if (in_valid && in_ready) model.push_back(in_data);
      if (pop2) begin void'(model.pop_front()); void'(model.pop_front()); end
      else if (pop) void'(model.pop_front());
    end
    checks++;
    if (fulls == 0) begin failures++; $display("queue never filled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
