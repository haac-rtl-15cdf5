// haac_top: the HAAC garbled-circuit accelerator.
//
// NUM_GE gate engines execute a garbled-circuit program as per-engine instruction
// streams. They share the sliding wire window (SWW), a NWIRES-entry scratchpad of
// 128-bit wire labels split into NUM_BANKS banks behind a crossbar, and a wire
// forwarding network. Everything an engine needs arrives through queues that the
// compiler fills in advance: instructions, garbled tables (Evaluator) and the labels of
// out-of-range (OoR) wires. For the OoR wires this block contains the fetch side: each
// engine's stream of 32-bit OoR wire addresses goes to an oorw_fetch controller, and
// all controllers share one DRAM read port through a round-robin arbiter. Live output
// wires leave through one DRAM write port, also round-robin arbitrated. Instruction and
// table streams, and the Garbler's table output, are brought out as per-engine
// valid/ready ports; the DRAM-side controllers that feed them are not part of this block.
//
// Defaults are the paper's main configuration: 16 engines, a 2 MB SWW (131072 labels,
// 17-bit addresses) in 64 banks (4 per engine), Evaluator role (GARBLER=0).
// Queue depths are this design's choice, sized so the three queues of all 16 engines
// hold about 64 KB as in the paper.
//
// Use: hold the engines idle, write the program's input wires into the SWW through the
// preload port (`pl_*`), pulse `start` with cfg_wire_base / cfg_phys_base set to the
// global wire number and SWW entry of the first output slot (and cfg_r, the FreeXOR
// offset, for a Garbler), then stream the queues. Final outputs leave as live wires on
// the DRAM write port (address = global wire number). `perf` counts the pipeline
// events. DRAM read responses return the request's `mrd_id` and may come in any order
// across ids; there is at most one request outstanding per id.
module haac_top
  import haac_pkg::*;
#(
  parameter int NUM_GE    = 16,
  parameter int NWIRES    = 131072,
  parameter int NUM_BANKS = 64,
  parameter bit GARBLER   = 1'b0,
  parameter int IQ_DEPTH  = 128,
  parameter int TQ_DEPTH  = 64,
  parameter int OQ_DEPTH  = 64,
  parameter int LQ_DEPTH  = 8
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [31:0]               cfg_wire_base,
  input  logic [$clog2(NWIRES)-1:0] cfg_phys_base,
  input  label_t                    cfg_r,
  // SWW preload (program input wires)
  input  logic                      pl_valid,
  output logic                      pl_ready,
  input  logic [$clog2(NWIRES)-1:0] pl_addr,
  input  label_t                    pl_data,
  // per-engine streams
  input  logic   [NUM_GE-1:0]       iq_valid,
  output logic   [NUM_GE-1:0]       iq_ready,
  input  instr_t                    iq_data [NUM_GE],
  input  logic   [NUM_GE-1:0]       tq_valid,
  output logic   [NUM_GE-1:0]       tq_ready,
  input  table_t                    tq_data [NUM_GE],
  input  logic   [NUM_GE-1:0]       oa_valid,
  output logic   [NUM_GE-1:0]       oa_ready,
  input  daddr_t                    oa_addr [NUM_GE],
  output logic   [NUM_GE-1:0]       tout_valid,
  input  logic   [NUM_GE-1:0]       tout_ready,
  output table_t                    tout_data [NUM_GE],
  // DRAM read port (OoR wires)
  output logic                      mrd_valid,
  input  logic                      mrd_ready,
  output daddr_t                    mrd_addr,
  output logic [$clog2(NUM_GE)-1:0] mrd_id,
  input  logic                      mrd_resp_valid,
  input  logic [$clog2(NUM_GE)-1:0] mrd_resp_id,
  input  logic                      mrd_resp_vbit,
  input  label_t                    mrd_resp_data,
  // DRAM write port (live wires)
  output logic                      mwr_valid,
  input  logic                      mwr_ready,
  output daddr_t                    mwr_addr,
  output label_t                    mwr_data,
  // status
  output logic                      busy,
  output perf_t                     perf
);
  localparam int G   = NUM_GE;
  localparam int AW  = $clog2(NWIRES);
  localparam int BW  = $clog2(NUM_BANKS);
  localparam int NR  = 2*G;
  localparam int NW  = 2*G + 1;
  localparam int IDW = $clog2(NUM_GE);

  // ---------------- engine-side nets ----------------
  logic [G-1:0]   fd_ready, fe_hold, ge_busy;
  logic           issue, advance;
  logic [NR-1:0]  rd_req, rd_gnt, rd_ret_valid, rd_ret_vbit;
  logic [AW-1:0]  rd_addr [NR];
  label_t         rd_ret_data [NR];
  logic [NW-1:0]  wr_req, wr_gnt;
  logic [AW-1:0]  wr_addr [NW];
  label_t         wr_data [NW];
  logic [G-1:0]   clr_req;
  logic [AW-1:0]  clr_addr [G];
  logic [AW-1:0]  fq_addr [6*G];
  logic [6*G-1:0] fq_hit;
  label_t         fq_data [6*G];
  logic [2*G-1:0] live_valid, live_ready;
  daddr_t         live_addr [2*G];
  label_t         live_data [2*G];
  logic [G-1:0]   oq_valid, oq_ready;
  label_t         oq_data [G];

  logic [G-1:0]   ev_issue, ev_rd_conflict, ev_fwd_wait, ev_be_stall, ev_and, ev_xor;
  logic [2:0]     ev_fwd [G];
  logic [1:0]     ev_oor [G];
  logic [G-1:0]   ev_retry;

  assign advance = !(|fe_hold);
  assign issue   = advance && (&fd_ready);

  for (genvar g = 0; g < G; g++) begin : g_ge
    logic [1:0]    l_rd_req, l_wr_req, l_live_valid;
    logic [AW-1:0] l_rd_addr [2];
    logic [AW-1:0] l_wr_addr [2];
    label_t        l_wr_data [2];
    label_t        l_rd_ret_data [2];
    logic [AW-1:0] l_fq_addr [6];
    label_t        l_fq_data [6];
    daddr_t        l_live_addr [2];
    label_t        l_live_data [2];

    gate_engine #(
      .GE_ID(g), .NUM_GE(G), .NWIRES(NWIRES), .GARBLER(GARBLER),
      .IQ_DEPTH(IQ_DEPTH), .TQ_DEPTH(TQ_DEPTH), .OQ_DEPTH(OQ_DEPTH), .LQ_DEPTH(LQ_DEPTH)
    ) u_ge (
      .clk, .rst_n, .start, .cfg_wire_base, .cfg_phys_base, .cfg_r,
      .iq_in_valid(iq_valid[g]), .iq_in_ready(iq_ready[g]), .iq_in_data(iq_data[g]),
      .tq_in_valid(tq_valid[g]), .tq_in_ready(tq_ready[g]), .tq_in_data(tq_data[g]),
      .oq_in_valid(oq_valid[g]), .oq_in_ready(oq_ready[g]), .oq_in_data(oq_data[g]),
      .tout_valid(tout_valid[g]), .tout_ready(tout_ready[g]), .tout_data(tout_data[g]),
      .fd_ready(fd_ready[g]), .issue, .fe_hold(fe_hold[g]), .advance,
      .rd_req(l_rd_req), .rd_addr(l_rd_addr), .rd_gnt(rd_gnt[2*g +: 2]),
      .rd_ret_valid(rd_ret_valid[2*g +: 2]), .rd_ret_data(l_rd_ret_data),
      .rd_ret_vbit(rd_ret_vbit[2*g +: 2]),
      .wr_req(l_wr_req), .wr_addr(l_wr_addr), .wr_data(l_wr_data),
      .wr_gnt(wr_gnt[1 + 2*g +: 2]),
      .clr_req(clr_req[g]), .clr_addr(clr_addr[g]),
      .fq_addr(l_fq_addr), .fq_hit(fq_hit[6*g +: 6]), .fq_data(l_fq_data),
      .live_valid(l_live_valid), .live_ready(live_ready[2*g +: 2]),
      .live_addr(l_live_addr), .live_data(l_live_data),
      .ev_issue(ev_issue[g]), .ev_fwd(ev_fwd[g]), .ev_oor(ev_oor[g]),
      .ev_rd_conflict(ev_rd_conflict[g]), .ev_fwd_wait(ev_fwd_wait[g]),
      .ev_be_stall(ev_be_stall[g]), .ev_and(ev_and[g]), .ev_xor(ev_xor[g]),
      .busy(ge_busy[g]));

    assign rd_req[2*g +: 2]     = l_rd_req;
    assign wr_req[1 + 2*g +: 2] = l_wr_req;
    assign live_valid[2*g +: 2] = l_live_valid;
    for (genvar k = 0; k < 2; k++) begin : g_port
      assign rd_addr[2*g+k]   = l_rd_addr[k];
      assign l_rd_ret_data[k] = rd_ret_data[2*g+k];
      assign wr_addr[1+2*g+k] = l_wr_addr[k];
      assign wr_data[1+2*g+k] = l_wr_data[k];
      assign live_addr[2*g+k] = l_live_addr[k];
      assign live_data[2*g+k] = l_live_data[k];
    end
    for (genvar q = 0; q < 6; q++) begin : g_fq
      assign fq_addr[6*g+q] = l_fq_addr[q];
      assign l_fq_data[q]   = fq_data[6*g+q];
    end
  end

  // preload is write requester 0 (highest priority)
  assign wr_req[0]  = pl_valid;
  assign wr_addr[0] = pl_addr;
  assign wr_data[0] = pl_data;
  assign pl_ready   = wr_gnt[0];

  // ---------------- SWW: crossbar and banks ----------------
  logic [1:0]           b_en    [NUM_BANKS];
  logic [1:0]           b_we    [NUM_BANKS];
  logic [AW-BW-1:0]     b_idx   [NUM_BANKS][2];
  label_t               b_wdata [NUM_BANKS][2];
  label_t               b_rdata [NUM_BANKS][2];
  logic [1:0]           b_rvalid[NUM_BANKS];
  logic [NUM_BANKS-1:0] b_clr_en;
  logic [AW-BW-1:0]     b_clr_idx [NUM_BANKS];

  sww_crossbar #(.NR(NR), .NW(NW), .NC(G), .NB(NUM_BANKS), .AW(AW)) u_xbar (
    .clk, .rst_n,
    .rd_req, .rd_addr, .rd_gnt, .rd_ret_valid, .rd_ret_data, .rd_ret_vbit,
    .wr_req, .wr_addr, .wr_data, .wr_gnt,
    .clr_req, .clr_addr,
    .b_en, .b_we, .b_idx, .b_wdata, .b_rdata, .b_rvalid, .b_clr_en, .b_clr_idx);

  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_bank
    sww_bank #(.DEPTH(NWIRES / NUM_BANKS)) u_bank (
      .clk, .rst_n, .en(b_en[b]), .we(b_we[b]), .idx(b_idx[b]), .wdata(b_wdata[b]),
      .rdata(b_rdata[b]), .rvalid(b_rvalid[b]),
      .clr_en(b_clr_en[b]), .clr_idx(b_clr_idx[b]));
  end

  // ---------------- forwarding network ----------------
  logic [2*G-1:0] bc_valid;
  logic [AW-1:0]  bc_addr [2*G];
  label_t         bc_data [2*G];
  for (genvar i = 0; i < 2*G; i++) begin : g_bc
    assign bc_valid[i] = wr_req[1+i] && wr_gnt[1+i];
    assign bc_addr[i]  = wr_addr[1+i];
    assign bc_data[i]  = wr_data[1+i];
  end

  fwd_network #(.NS(2*G), .NQ(6*G), .AW(AW)) u_fwd (
    .bc_valid, .bc_addr, .bc_data, .q_addr(fq_addr), .q_hit(fq_hit), .q_data(fq_data));

  // ---------------- OoR wire fetch ----------------
  logic [G-1:0]   f_req_valid, f_req_ready, f_resp_valid, rd_arb_gnt;
  daddr_t         f_req_addr [G];
  logic [IDW-1:0] rd_arb_idx;

  for (genvar g = 0; g < G; g++) begin : g_oor
    oorw_fetch u_fetch (
      .clk, .rst_n,
      .addr_valid(oa_valid[g]), .addr_ready(oa_ready[g]), .addr(oa_addr[g]),
      .mem_req_valid(f_req_valid[g]), .mem_req_ready(f_req_ready[g]),
      .mem_req_addr(f_req_addr[g]),
      .mem_resp_valid(f_resp_valid[g]), .mem_resp_vbit(mrd_resp_vbit),
      .mem_resp_data(mrd_resp_data),
      .q_valid(oq_valid[g]), .q_ready(oq_ready[g]), .q_data(oq_data[g]),
      .retry(ev_retry[g]));
    assign f_req_ready[g]  = rd_arb_gnt[g] && mrd_ready;
    assign f_resp_valid[g] = mrd_resp_valid && (int'(mrd_resp_id) == g);
  end

  rr_arbiter #(.N(G)) u_rd_arb (
    .clk, .rst_n, .req(f_req_valid), .accept(mrd_ready), .gnt(rd_arb_gnt),
    .gnt_idx(rd_arb_idx));

  assign mrd_valid = |f_req_valid;
  assign mrd_addr  = f_req_addr[rd_arb_idx];
  assign mrd_id    = rd_arb_idx;

  // ---------------- live wire write-back ----------------
  logic [2*G-1:0]         wr_arb_gnt;
  logic [$clog2(2*G)-1:0] wr_arb_idx;

  rr_arbiter #(.N(2*G)) u_wr_arb (
    .clk, .rst_n, .req(live_valid), .accept(mwr_ready), .gnt(wr_arb_gnt),
    .gnt_idx(wr_arb_idx));

  assign mwr_valid  = |live_valid;
  assign mwr_addr   = live_addr[wr_arb_idx];
  assign mwr_data   = live_data[wr_arb_idx];
  assign live_ready = wr_arb_gnt & {(2*G){mwr_ready}};

  // ---------------- status and counters ----------------
  assign busy = |ge_busy;

  logic [31:0] fwd_sum, oor_sum;
  always_comb begin
    fwd_sum = '0;
    oor_sum = '0;
    for (int g = 0; g < G; g++) begin
      fwd_sum = fwd_sum + 32'(ev_fwd[g]);
      oor_sum = oor_sum + 32'(ev_oor[g]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      perf <= '0;
    end else begin
      perf.issue_cycles <= perf.issue_cycles + 32'(issue);
      perf.and_gates    <= perf.and_gates    + 32'($countones(ev_and));
      perf.xor_gates    <= perf.xor_gates    + 32'($countones(ev_xor));
      perf.rd_conflicts <= perf.rd_conflicts + 32'($countones(ev_rd_conflict));
      perf.fwd_waits    <= perf.fwd_waits    + 32'($countones(ev_fwd_wait));
      perf.be_stalls    <= perf.be_stalls    + 32'($countones(ev_be_stall));
      perf.oor_retries  <= perf.oor_retries  + 32'($countones(ev_retry));
      perf.live_writes  <= perf.live_writes  + 32'(mwr_valid && mwr_ready);
      perf.fwd_operands <= perf.fwd_operands + fwd_sum;
      perf.oor_operands <= perf.oor_operands + oor_sum;
    end
  end

endmodule
