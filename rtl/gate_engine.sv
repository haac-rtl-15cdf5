// gate_engine: one HAAC gate engine (GE), an in-order pipeline that executes one
// garbled gate instruction per cycle.
//
// Stages (after the paper's GE figure):
//   Fetch+Decode  the head of the GE-local instruction queue is decoded. Its output wire
//                 needs no address field: the engine counts its own output slots
//                 ("PC + offset"). This design numbers slots in issue order across
//                 engines: in issue cycle c, engine g produces global wire
//                 cfg_wire_base + c*NUM_GE + g, held in SWW entry
//                 1 + ((phys - 1) mod (NWIRES-1)) (entry 0 is never written). The global
//                 wire number is also the gate index that keys the Half-Gate hash and
//                 the DRAM address of a live output. Issuing a gate clears the valid bit
//                 of its output entry.
//   Read wires    three stages R1..R3. An input address of 0 takes the label from the
//   + table       head of the OoRW queue (operand A first when both are 0) at issue.
//                 Other operands are read from the SWW through the crossbar: request in
//                 R1, bank read, return into the GE by R3. An AND pops its table from
//                 the table queue at issue (Evaluator). Every stage watches the
//                 forwarding network, so an operand whose producer is still running (its
//                 SWW valid bit is clear) picks up the label the cycle it is written.
//   Compute       FreeXOR unit (1 cycle) and Half-Gate unit (18 stages Evaluator,
//                 21 Garbler) side by side.
//   Write wires   each unit's result register requests an SWW write through the
//                 crossbar (the write is also the forwarding broadcast). A result with
//                 the live bit set is queued for DRAM at the same time. A Garbler also
//                 queues the AND's two table rows for the host.
//
// Lockstep issue: all engines issue together (`issue`, from the top, when every engine
// reports `fd_ready` and no engine asserts `fe_hold`), and the read stages of all engines
// move together (`advance`). This keeps the output-wire numbering deterministic and makes
// every older gate clear its output entry before a younger one reads it. The compiler
// pads the engines' streams with NOPs to equal length and never places a gate and its
// consumer in the same issue cycle (the gates of one cycle form a VLIW-like bundle).
// The paper maps gates to non-stalled engines in its simulator and replays that order;
// the lockstep bundle is this design's concrete reading of that.
// Back-end stalls (an ungranted SWW write, a full live or table-out queue) freeze only
// the compute units and hold the front end, never the other way round, so an operand
// waiting for forwarding can always be served.
module gate_engine
  import haac_pkg::*;
#(
  parameter int GE_ID    = 0,
  parameter int NUM_GE   = 16,
  parameter int NWIRES   = 131072,
  parameter bit GARBLER  = 1'b0,
  parameter int EVAL_LAT = 18,
  parameter int GARB_LAT = 21,
  parameter int IQ_DEPTH = 128,
  parameter int TQ_DEPTH = 64,
  parameter int OQ_DEPTH = 64,
  parameter int LQ_DEPTH = 8
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // configuration, sampled on start
  input  logic                      start,
  input  logic [31:0]               cfg_wire_base,
  input  logic [$clog2(NWIRES)-1:0] cfg_phys_base,
  input  label_t                    cfg_r,
  // streams from off chip
  input  logic                      iq_in_valid,
  output logic                      iq_in_ready,
  input  instr_t                    iq_in_data,
  input  logic                      tq_in_valid,
  output logic                      tq_in_ready,
  input  table_t                    tq_in_data,
  input  logic                      oq_in_valid,
  output logic                      oq_in_ready,
  input  label_t                    oq_in_data,
  // tables produced by a Garbler
  output logic                      tout_valid,
  input  logic                      tout_ready,
  output table_t                    tout_data,
  // lockstep control
  output logic                      fd_ready,
  input  logic                      issue,
  output logic                      fe_hold,
  input  logic                      advance,
  // SWW reads (one port per operand)
  output logic [1:0]                rd_req,
  output logic [$clog2(NWIRES)-1:0] rd_addr [2],
  input  logic [1:0]                rd_gnt,
  input  logic [1:0]                rd_ret_valid,
  input  label_t                    rd_ret_data [2],
  input  logic [1:0]                rd_ret_vbit,
  // SWW writes (0: FreeXOR, 1: Half-Gate), also the forwarding broadcast
  output logic [1:0]                wr_req,
  output logic [$clog2(NWIRES)-1:0] wr_addr [2],
  output label_t                    wr_data [2],
  input  logic [1:0]                wr_gnt,
  // valid-bit clear of the issued output entry
  output logic                      clr_req,
  output logic [$clog2(NWIRES)-1:0] clr_addr,
  // forwarding queries (stage*2 + operand)
  output logic [$clog2(NWIRES)-1:0] fq_addr [6],
  input  logic [5:0]                fq_hit,
  input  label_t                    fq_data [6],
  // live wires to DRAM (0: FreeXOR, 1: Half-Gate)
  output logic [1:0]                live_valid,
  input  logic [1:0]                live_ready,
  output daddr_t                    live_addr [2],
  output label_t                    live_data [2],
  // event pulses for performance counting
  output logic                      ev_issue,
  output logic [2:0]                ev_fwd,
  output logic [1:0]                ev_oor,
  output logic                      ev_rd_conflict,
  output logic                      ev_fwd_wait,
  output logic                      ev_be_stall,
  output logic                      ev_and,
  output logic                      ev_xor,
  output logic                      busy
);
  localparam int AW     = $clog2(NWIRES);
  localparam int META_W = 1 + AW + 32;

  typedef struct packed {
    logic          v;
    op_e           op;
    logic          live;
    logic [AW-1:0] out_phys;
    logic [31:0]   out_wire;
    table_t        tbl;
    logic [2:0]    tag;
    logic [1:0]    res;      // operand resolved
    logic [1:0]    gnt;      // SWW read granted (result pending or returned invalid)
    logic [AW-1:0] addr0;
    logic [AW-1:0] addr1;
    label_t        dat0;
    label_t        dat1;
  } rstage_t;

  function automatic logic is_gate(input op_e op);
    return (op == OP_XOR) || (op == OP_AND);
  endfunction

  // ---------------- queues ----------------
  instr_t                  iq_head;
  instr_t                  iq_unused;
  logic [$clog2(IQ_DEPTH):0] iq_count;
  table_t                  tq_head, tq_unused;
  logic [$clog2(TQ_DEPTH):0] tq_count;
  label_t                  oq_head0, oq_head1;
  logic [$clog2(OQ_DEPTH):0] oq_count;
  logic                    iq_pop, tq_pop, oq_pop, oq_pop2;

  haac_fifo #(.W($bits(instr_t)), .DEPTH(IQ_DEPTH)) u_instr_q (
    .clk, .rst_n, .in_valid(iq_in_valid), .in_ready(iq_in_ready), .in_data(iq_in_data),
    .out_data0(iq_head), .out_data1(iq_unused), .count(iq_count), .pop(iq_pop), .pop2(1'b0));

  haac_fifo #(.W(TABLE_W), .DEPTH(TQ_DEPTH)) u_table_q (
    .clk, .rst_n, .in_valid(tq_in_valid), .in_ready(tq_in_ready), .in_data(tq_in_data),
    .out_data0(tq_head), .out_data1(tq_unused), .count(tq_count), .pop(tq_pop), .pop2(1'b0));

  haac_fifo #(.W(LABEL_W), .DEPTH(OQ_DEPTH)) u_oorw_q (
    .clk, .rst_n, .in_valid(oq_in_valid), .in_ready(oq_in_ready), .in_data(oq_in_data),
    .out_data0(oq_head0), .out_data1(oq_head1), .count(oq_count), .pop(oq_pop), .pop2(oq_pop2));

  // ---------------- fetch + decode ----------------
  logic [31:0]   out_wire;
  logic [AW-1:0] out_phys;
  logic          fd_gate, fd_and, a_oor, b_oor, need_tbl;
  logic [1:0]    n_oor;
  logic [2:0]    seq;

  always_comb begin
    fd_gate  = is_gate(iq_head.op);
    fd_and   = (iq_head.op == OP_AND);
    a_oor    = fd_gate && (iq_head.wa == '0);
    b_oor    = fd_gate && (iq_head.wb == '0);
    n_oor    = 2'(a_oor) + 2'(b_oor);
    need_tbl = fd_and && !GARBLER;
    fd_ready = (iq_count != '0) && (!need_tbl || tq_count != '0) &&
               (oq_count >= ($clog2(OQ_DEPTH)+1)'(n_oor));
    iq_pop   = issue;
    tq_pop   = issue && need_tbl;
    oq_pop   = issue && (n_oor == 2'd1);
    oq_pop2  = issue && (n_oor == 2'd2);
    clr_req  = issue && fd_gate;
    clr_addr = out_phys;
  end

  function automatic logic [AW-1:0] phys_step(input logic [AW-1:0] p, input int n);
    logic [AW:0] s;
    s = (AW+1)'(p) + (AW+1)'(n);
    if (s > (AW+1)'(NWIRES - 1)) s = s - (AW+1)'(NWIRES - 1);
    return AW'(s);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_wire <= '0;
      out_phys <= AW'(1);
      seq      <= '0;
    end else if (start) begin
      out_wire <= cfg_wire_base + 32'(GE_ID);
      out_phys <= phys_step(cfg_phys_base, GE_ID);
    end else if (issue) begin
      out_wire <= out_wire + 32'(NUM_GE);
      out_phys <= phys_step(out_phys, NUM_GE);
      seq      <= seq + 3'd1;
    end
  end

  // ---------------- read stages ----------------
  rstage_t s   [3];
  rstage_t s_n [3];        // stage contents after this cycle's captures
  logic [2:0] ret_tag_d1 [2];
  logic [2:0] ret_tag_d2 [2];

  always_comb begin
    for (int j = 0; j < 3; j++) begin
      fq_addr[2*j]   = s[j].addr0;
      fq_addr[2*j+1] = s[j].addr1;
    end
  end

  always_comb begin
    ev_fwd = '0;
    for (int j = 0; j < 3; j++) begin
      s_n[j] = s[j];
      // operand 0
      if (s[j].v && !s[j].res[0]) begin
        if (fq_hit[2*j]) begin
          s_n[j].res[0] = 1'b1;
          s_n[j].dat0   = fq_data[2*j];
          ev_fwd        = ev_fwd + 3'd1;
        end else if (s[j].gnt[0] && rd_ret_valid[0] && rd_ret_vbit[0] &&
                     ret_tag_d2[0] == s[j].tag) begin
          s_n[j].res[0] = 1'b1;
          s_n[j].dat0   = rd_ret_data[0];
        end
      end
      // operand 1
      if (s[j].v && !s[j].res[1]) begin
        if (fq_hit[2*j+1]) begin
          s_n[j].res[1] = 1'b1;
          s_n[j].dat1   = fq_data[2*j+1];
          ev_fwd        = ev_fwd + 3'd1;
        end else if (s[j].gnt[1] && rd_ret_valid[1] && rd_ret_vbit[1] &&
                     ret_tag_d2[1] == s[j].tag) begin
          s_n[j].res[1] = 1'b1;
          s_n[j].dat1   = rd_ret_data[1];
        end
      end
    end
    // SWW read requests come from R1 only
    rd_req[0]  = s[0].v && !s_n[0].res[0] && !s[0].gnt[0];
    rd_req[1]  = s[0].v && !s_n[0].res[1] && !s[0].gnt[1];
    rd_addr[0] = s[0].addr0;
    rd_addr[1] = s[0].addr1;
  end

  // R1 read grants of this cycle, kept apart from s_n so requests never depend on grants
  logic [1:0] r1_gnt_n;
  rstage_t    r1_n;
  assign r1_gnt_n = s[0].gnt | (rd_req & rd_gnt);
  always_comb begin
    r1_n     = s_n[0];
    r1_n.gnt = r1_gnt_n;
  end

  logic be_stall;
  logic r1_hold, r3_hold;
  assign r1_hold = s[0].v && ((!s_n[0].res[0] && !r1_gnt_n[0]) ||
                              (!s_n[0].res[1] && !r1_gnt_n[1]));
  assign r3_hold = s[2].v && (s_n[2].res != 2'b11);
  assign fe_hold = r1_hold || r3_hold || be_stall;

  // new R1 entry from the decoder
  rstage_t fd_s;
  always_comb begin
    fd_s          = '0;
    fd_s.v        = 1'b1;
    fd_s.op       = iq_head.op;
    fd_s.live     = iq_head.live;
    fd_s.out_phys = out_phys;
    fd_s.out_wire = out_wire;
    fd_s.tbl      = need_tbl ? tq_head : '0;
    fd_s.tag      = seq;
    fd_s.addr0    = AW'(iq_head.wa);
    fd_s.addr1    = AW'(iq_head.wb);
    fd_s.res[0]   = !fd_gate || a_oor;
    fd_s.res[1]   = !fd_gate || b_oor;
    fd_s.dat0     = a_oor ? oq_head0 : '0;
    fd_s.dat1     = b_oor ? (a_oor ? oq_head1 : oq_head0) : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < 3; j++) s[j] <= '0;
      for (int k = 0; k < 2; k++) begin
        ret_tag_d1[k] <= '0;
        ret_tag_d2[k] <= '0;
      end
    end else begin
      for (int k = 0; k < 2; k++) begin
        ret_tag_d1[k] <= s[0].tag;
        ret_tag_d2[k] <= ret_tag_d1[k];
      end
      if (advance) begin
        s[0] <= issue ? fd_s : '0;
        s[1] <= r1_n;
        s[2] <= s_n[1];
      end else begin
        s[0] <= r1_n;
        s[1] <= s_n[1];
        s[2] <= s_n[2];
      end
    end
  end

  // ---------------- compute ----------------
  logic            ex_in;
  logic [META_W-1:0] ex_meta;
  assign ex_in   = advance && s[2].v && is_gate(s[2].op);
  assign ex_meta = {s[2].live, s[2].out_phys, s[2].out_wire};

  logic              x_v, h_v;
  label_t            x_lbl, h_lbl;
  logic [META_W-1:0] x_meta, h_meta;
  table_t            h_tbl;

  freexor_unit #(.META_W(META_W)) u_freexor (
    .clk, .rst_n, .en(!be_stall), .in_valid(ex_in && s[2].op == OP_XOR),
    .wa(s_n[2].dat0), .wb(s_n[2].dat1), .meta_in(ex_meta),
    .out_valid(x_v), .wc(x_lbl), .meta_out(x_meta));

  if (GARBLER) begin : g_garbler
    halfgate_garble #(.LAT(GARB_LAT), .META_W(META_W)) u_halfgate (
      .clk, .rst_n, .en(!be_stall), .in_valid(ex_in && s[2].op == OP_AND),
      .gate_id(s[2].out_wire), .wa0(s_n[2].dat0), .wb0(s_n[2].dat1), .r(cfg_r),
      .meta_in(ex_meta), .out_valid(h_v), .wc0(h_lbl), .tbl(h_tbl), .meta_out(h_meta));
  end else begin : g_evaluator
    halfgate_eval #(.LAT(EVAL_LAT), .META_W(META_W)) u_halfgate (
      .clk, .rst_n, .en(!be_stall), .in_valid(ex_in && s[2].op == OP_AND),
      .gate_id(s[2].out_wire), .wa(s_n[2].dat0), .wb(s_n[2].dat1), .tbl(s[2].tbl),
      .meta_in(ex_meta), .out_valid(h_v), .wc(h_lbl), .meta_out(h_meta));
    assign h_tbl = '0;
  end

  // ---------------- write wires ----------------
  logic [1:0]    u_v, u_live, wdone, need_w, lq_ready, lq_push;
  logic [AW-1:0] u_phys [2];
  logic [31:0]   u_wire [2];
  label_t        u_lbl  [2];
  logic          tdone, need_t, to_ready;

  assign u_v[0]   = x_v;
  assign u_v[1]   = h_v;
  assign u_lbl[0] = x_lbl;
  assign u_lbl[1] = h_lbl;
  assign {u_live[0], u_phys[0], u_wire[0]} = x_meta;
  assign {u_live[1], u_phys[1], u_wire[1]} = h_meta;

  always_comb begin
    for (int u = 0; u < 2; u++) begin
      need_w[u]  = u_v[u] && !wdone[u];
      wr_req[u]  = need_w[u] && (!u_live[u] || lq_ready[u]);
      wr_addr[u] = u_phys[u];
      wr_data[u] = u_lbl[u];
      lq_push[u] = wr_req[u] && wr_gnt[u] && u_live[u];
    end
    need_t   = GARBLER && h_v && !tdone;
    be_stall = (need_w[0] && !(wr_req[0] && wr_gnt[0])) ||
               (need_w[1] && !(wr_req[1] && wr_gnt[1])) ||
               (need_t && !to_ready);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wdone <= '0;
      tdone <= 1'b0;
    end else if (be_stall) begin
      wdone <= wdone | (wr_req & wr_gnt);
      tdone <= tdone | (need_t && to_ready);
    end else begin
      wdone <= '0;
      tdone <= 1'b0;
    end
  end

  for (genvar u = 0; u < 2; u++) begin : g_live
    label_t live_unused;
    logic [$clog2(LQ_DEPTH):0] lq_count;
    logic [32+LABEL_W-1:0] lq_head, lq_head1;
    haac_fifo #(.W(32 + LABEL_W), .DEPTH(LQ_DEPTH)) u_live_q (
      .clk, .rst_n, .in_valid(lq_push[u]), .in_ready(lq_ready[u]),
      .in_data({u_wire[u], u_lbl[u]}),
      .out_data0(lq_head), .out_data1(lq_head1), .count(lq_count),
      .pop(live_valid[u] && live_ready[u]), .pop2(1'b0));
    assign live_valid[u] = (lq_count != '0);
    assign {live_addr[u], live_data[u]} = lq_head;
  end

  // Garbler table output queue
  table_t to_unused;
  logic [$clog2(TQ_DEPTH):0] to_count;
  haac_fifo #(.W(TABLE_W), .DEPTH(TQ_DEPTH)) u_tout_q (
    .clk, .rst_n, .in_valid(need_t && to_ready), .in_ready(to_ready), .in_data(h_tbl),
    .out_data0(tout_data), .out_data1(to_unused), .count(to_count),
    .pop(tout_valid && tout_ready), .pop2(1'b0));
  assign tout_valid = (to_count != '0);

  // ---------------- events ----------------
  assign ev_issue       = issue;
  assign ev_oor         = issue ? n_oor : 2'd0;
  assign ev_rd_conflict = |(rd_req & ~rd_gnt);
  assign ev_fwd_wait    = r3_hold;
  assign ev_be_stall    = be_stall;
  assign ev_and         = ex_in && s[2].op == OP_AND;
  assign ev_xor         = ex_in && s[2].op == OP_XOR;
  assign busy           = (iq_count != '0) || s[0].v || s[1].v || s[2].v || x_v || h_v ||
                          (g_live[0].lq_count != '0) || (g_live[1].lq_count != '0);

endmodule
