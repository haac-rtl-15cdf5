// tb_oorw_fetch: checks the out-of-range wire fetcher against a DRAM model whose wires
// become valid only at random times. Every address must come back as its label, in
// order, and a response with the valid bit clear must cause a repeated read (counted
// through the retry output, which must fire at least once).
module tb_oorw_fetch;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic addr_valid = 0, addr_ready, mem_req_valid, mem_req_ready, mem_resp_valid,
        mem_resp_vbit, q_valid, q_ready, retry;
  logic [31:0] addr, mem_req_addr;
  logic [127:0] mem_resp_data, q_data;
  int checks = 0, failures = 0, retries = 0, reqs = 0;
  logic [127:0] dram [64];
  int valid_at [64];
  int cycle = 0;
  logic [31:0] sent [$];
  int pend_addr = -1, pend_due = 0;

  oorw_fetch dut (.clk, .rst_n, .addr_valid, .addr_ready, .addr, .mem_req_valid,
    .mem_req_ready, .mem_req_addr, .mem_resp_valid, .mem_resp_vbit, .mem_resp_data,
    .q_valid, .q_ready, .q_data, .retry);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // DRAM model: one request at a time, answered 2..9 cycles later
  always @(posedge clk) if (rst_n) begin
    cycle <= cycle + 1;
    if (retry) retries++;
    if (mem_req_valid && mem_req_ready) begin
      reqs++;
      pend_addr <= int'(mem_req_addr);
      pend_due  <= cycle + 2 + int'($urandom % 8);
    end
    mem_resp_valid <= 0;
    if (pend_addr >= 0 && cycle >= pend_due) begin
      mem_resp_valid <= 1;
      mem_resp_vbit  <= cycle >= valid_at[pend_addr];
      mem_resp_data  <= dram[pend_addr];
      pend_addr      <= -1;
    end
    mem_req_ready <= 1'($urandom);
    q_ready       <= ($urandom % 4) != 0;
    if (q_valid && q_ready) begin
      logic [31:0] a;
      a = sent.pop_front();
      checks++;
      if (q_data !== dram[a]) begin failures++; $display("label mismatch for %0d", a); end
      checks++;
      if (cycle < valid_at[a]) begin failures++; $display("wire %0d used before valid", a); end
    end
  end

  initial begin
    mem_resp_valid = 0; mem_resp_vbit = 0; mem_resp_data = '0; mem_req_ready = 0;
    q_ready = 0; addr = '0;
    for (int i = 0; i < 64; i++) begin
      dram[i] = rand128();
      valid_at[i] = 0;
      if (i % 2 == 1) valid_at[i] = int'($urandom % 3000);
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 150; n++) begin
      @(negedge clk);
      addr_valid = 1;
      addr = 32'($urandom % 64);
      @(posedge clk);
      while (!addr_ready) @(posedge clk);
      sent.push_back(addr);
      @(negedge clk);
      addr_valid = 0;
    end
    while (sent.size() != 0) @(negedge clk);
    checks++;
    if (retries == 0) begin failures++; $display("no retry happened"); end
    $display("retries=%0d requests=%0d", retries, reqs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
