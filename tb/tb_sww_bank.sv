// tb_sww_bank: checks one SWW bank against a model under random traffic on both ports:
// reads return the stored label and its valid bit one cycle later, writes set the
// valid bit, and a clear resets it (a clear wins over a write to the same entry in the
// same cycle).
module tb_sww_bank;
  import tb_ref_pkg::*;
  localparam int DEPTH = 32;
  logic clk = 0, rst_n = 0;
  logic [1:0] en, we, rvalid;
  logic [4:0] idx [2];
  logic [127:0] wdata [2], rdata [2];
  logic clr_en;
  logic [4:0] clr_idx;
  int checks = 0, failures = 0, vreads = 0, ireads = 0;
  logic [127:0] mmem [DEPTH];
  bit mvld [DEPTH];

  sww_bank #(.DEPTH(DEPTH)) dut (.clk, .rst_n, .en, .we, .idx, .wdata, .rdata, .rvalid,
    .clr_en, .clr_idx);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit rd [2];
    logic [127:0] ed [2];
    bit ev [2];
    en = '0; we = '0; clr_en = 0; clr_idx = '0;
    for (int p = 0; p < 2; p++) begin idx[p] = '0; wdata[p] = '0; end
    for (int i = 0; i < DEPTH; i++) begin mvld[i] = 0; mmem[i] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      for (int p = 0; p < 2; p++) begin
        en[p] = 1'($urandom);
        we[p] = ($urandom % 3) == 0;
        idx[p] = 5'($urandom);
        wdata[p] = rand128();
      end
      if (en[0] && we[0] && en[1] && we[1] && idx[0] == idx[1]) we[1] = 0;
      clr_en = ($urandom % 4) == 0;
      clr_idx = 5'($urandom);
      for (int p = 0; p < 2; p++) begin
        rd[p] = en[p] && !we[p];
        ed[p] = mmem[idx[p]];
        ev[p] = mvld[idx[p]];
      end
      @(negedge clk);
      for (int p = 0; p < 2; p++) if (rd[p]) begin
        checks++;
        if (rvalid[p] !== ev[p] || (ev[p] && rdata[p] !== ed[p])) begin
          failures++; $display("port %0d read mismatch", p);
        end
        if (ev[p]) vreads++; else ireads++;
      end
      for (int p = 0; p < 2; p++)
        if (en[p] && we[p]) begin mmem[idx[p]] = wdata[p]; mvld[idx[p]] = 1; end
      if (clr_en) mvld[clr_idx] = 0;
    end
    checks++;
    if (vreads == 0 || ireads == 0) begin failures++; $display("valid bits not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
