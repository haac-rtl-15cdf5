// tb_sww_crossbar: checks the crossbar together with its banks. Random reads, writes and
// valid-bit clears from several requesters are checked against a memory model: no bank
// grants more than two accesses in a cycle, writes are preferred over reads, a granted
// write lands, a granted read returns the entry's label and valid bit exactly two cycles
// later, and refused requests (bank conflicts) actually occur.
module tb_sww_crossbar;
  import tb_ref_pkg::*;
  localparam int NR = 4, NW = 3, NC = 2, NB = 4, AW = 6;
  localparam int BW = 2;
  logic clk = 0, rst_n = 0;
  logic [NR-1:0] rd_req, rd_gnt, rd_ret_valid, rd_ret_vbit;
  logic [AW-1:0] rd_addr [NR];
  logic [127:0]  rd_ret_data [NR];
  logic [NW-1:0] wr_req, wr_gnt;
  logic [AW-1:0] wr_addr [NW];
  logic [127:0]  wr_data [NW];
  logic [NC-1:0] clr_req;
  logic [AW-1:0] clr_addr [NC];
  logic [1:0]    b_en [NB], b_we [NB], b_rvalid [NB];
  logic [AW-BW-1:0] b_idx [NB][2];
  logic [127:0]  b_wdata [NB][2], b_rdata [NB][2];
  logic [NB-1:0] b_clr_en;
  logic [AW-BW-1:0] b_clr_idx [NB];
  int checks = 0, failures = 0, conflicts = 0, vreads = 0;
  logic [127:0] mmem [1 << AW];
  bit mvld [1 << AW];
  logic [127:0] exp_d [2][NR];
  bit exp_v [2][NR];
  bit exp_on [2][NR];

  sww_crossbar #(.NR(NR), .NW(NW), .NC(NC), .NB(NB), .AW(AW)) dut (.clk, .rst_n,
    .rd_req, .rd_addr, .rd_gnt, .rd_ret_valid, .rd_ret_data, .rd_ret_vbit,
    .wr_req, .wr_addr, .wr_data, .wr_gnt, .clr_req, .clr_addr,
    .b_en, .b_we, .b_idx, .b_wdata, .b_rdata, .b_rvalid, .b_clr_en, .b_clr_idx);

  for (genvar b = 0; b < NB; b++) begin : g_bank
    sww_bank #(.DEPTH(1 << (AW - BW))) u_bank (.clk, .rst_n, .en(b_en[b]), .we(b_we[b]),
      .idx(b_idx[b]), .wdata(b_wdata[b]), .rdata(b_rdata[b]), .rvalid(b_rvalid[b]),
      .clr_en(b_clr_en[b]), .clr_idx(b_clr_idx[b]));
  end

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int bank_use [NB];
    bit bank_rd [NB];
    rd_req = '0; wr_req = '0; clr_req = '0;
    for (int i = 0; i < NR; i++) rd_addr[i] = '0;
    for (int i = 0; i < NW; i++) begin wr_addr[i] = '0; wr_data[i] = '0; end
    for (int i = 0; i < NC; i++) clr_addr[i] = '0;
    for (int i = 0; i < (1 << AW); i++) begin mvld[i] = 0; mmem[i] = '0; end
    for (int k = 0; k < 2; k++) for (int i = 0; i < NR; i++) exp_on[k][i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      for (int i = 0; i < NR; i++) begin
        rd_req[i] = ($urandom % 3) != 0;
        rd_addr[i] = AW'($urandom);
      end
      for (int i = 0; i < NW; i++) begin
        wr_req[i] = ($urandom % 3) == 0;
        wr_addr[i] = AW'($urandom);
        wr_data[i] = rand128();
        for (int j = 0; j < i; j++)
          if (wr_req[j] && wr_addr[j] == wr_addr[i]) wr_req[i] = 0;
      end
      clr_req = NC'($urandom);
      clr_addr[0] = AW'($urandom);
      clr_addr[1] = {AW'($urandom)} ;
      if (clr_addr[1][BW-1:0] == clr_addr[0][BW-1:0]) clr_req[1] = 0;
      #1;
      // grant rules
      for (int b = 0; b < NB; b++) begin bank_use[b] = 0; bank_rd[b] = 0; end
      for (int i = 0; i < NW; i++)
        if (wr_gnt[i]) begin
          checks++;
          if (!wr_req[i] || bank_rd[wr_addr[i][BW-1:0]]) begin failures++; $display("bad write grant"); end
          bank_use[wr_addr[i][BW-1:0]]++;
        end
      for (int i = 0; i < NR; i++)
        if (rd_gnt[i]) begin
          checks++;
          if (!rd_req[i]) begin failures++; $display("read grant without request"); end
          bank_use[rd_addr[i][BW-1:0]]++;
        end
      for (int i = 0; i < NW; i++) if (wr_req[i] && !wr_gnt[i]) begin
        checks++;
        if (bank_use[wr_addr[i][BW-1:0]] < 2) begin failures++; $display("write refused with a free port"); end
      end
      for (int i = 0; i < NR; i++) if (rd_req[i] && !rd_gnt[i]) begin
        conflicts++;
        checks++;
        if (bank_use[rd_addr[i][BW-1:0]] < 2) begin failures++; $display("read refused with a free port"); end
      end
      for (int b = 0; b < NB; b++) begin
        checks++;
        if (bank_use[b] > 2) begin failures++; $display("bank %0d over-subscribed", b); end
      end
      // returns of reads granted two cycles ago
      for (int i = 0; i < NR; i++) begin
        checks++;
        if (rd_ret_valid[i] !== exp_on[1][i] ||
            (exp_on[1][i] && (rd_ret_vbit[i] !== exp_v[1][i] ||
                              (exp_v[1][i] && rd_ret_data[i] !== exp_d[1][i])))) begin
          failures++; $display("read return %0d mismatch", i);
        end
        if (exp_on[1][i] && exp_v[1][i]) vreads++;
        exp_on[1][i] = exp_on[0][i]; exp_v[1][i] = exp_v[0][i]; exp_d[1][i] = exp_d[0][i];
        exp_on[0][i] = rd_gnt[i];
        exp_v[0][i]  = mvld[rd_addr[i]];
        exp_d[0][i]  = mmem[rd_addr[i]];
      end
      @(negedge clk);
      for (int i = 0; i < NW; i++)
        if (wr_gnt[i]) begin mmem[wr_addr[i]] = wr_data[i]; mvld[wr_addr[i]] = 1; end
      for (int c = 0; c < NC; c++) if (clr_req[c]) mvld[clr_addr[c]] = 0;
    end
    checks++;
    if (conflicts == 0 || vreads == 0) begin failures++; $display("conflicts or valid reads not exercised"); end
    $display("conflicts=%0d", conflicts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
