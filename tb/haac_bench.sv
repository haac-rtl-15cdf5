// haac_bench: drives one haac_top through a random garbled-circuit program and checks
// every result against the reference model.
//
// The bench plays the compiler, the host and the DRAM:
//  - It builds a random program of NBUNDLE lockstep bundles of NUM_GE slots (NOP, XOR or
//    AND) over NIN input wires, numbering wires as the engines do: input wires are
//    1..NIN, and slot g of bundle c produces wire NIN+1 + c*NUM_GE + g, stored in SWW
//    entry 1 + ((w-1) mod (NWIRES-1)). Operands come mostly from the last few bundles (so
//    producers are often still in flight and their labels must be forwarded), sometimes
//    from far back. An operand older than the window (its entry has been handed to a
//    newer wire by the time the reader issues) is encoded as address 0 and its global
//    number goes on the reader's OoR address stream; its producer is then marked live
//    so that it reaches DRAM. Some input operands are fetched as OoR wires on purpose.
//  - It garbles the program with the reference model (tb_ref_pkg) using a random R.
//    A Garbler DUT (GARBLER=1) must write the 0-labels of its live wires and emit, per
//    engine, the tables of its AND gates in order. An Evaluator DUT gets those tables
//    and the active input labels for random plaintext inputs; it must write each live
//    wire's active label, 0-label ^ (value ? R : 0).
//  - The DRAM model answers OoR reads after a random 2..12 cycles, out of order across
//    engines, with the valid bit clear for a wire not yet written (the fetcher must
//    retry), and accepts live writes under random back-pressure with long pauses, so the
//    live queues fill and the engines' back ends stall.
// At the end it checks that each live wire was written exactly once, that the gate,
// operand and issue counters match the program, and that every pipeline mechanism
// (forwarding, OoR reads and retries, bank conflicts, forwarding waits, back-end
// stalls, SWW wrap-around, NOPs) happened at least once; REQUIRE_ALL=0 relaxes this to
// the mechanisms a short program on a large SWW can reach.
module haac_bench
  import haac_pkg::*;
  import tb_ref_pkg::*;
#(
  parameter int NUM_GE      = 4,
  parameter int NWIRES      = 64,
  parameter bit GARBLER     = 1'b0,
  parameter int NIN         = 16,
  parameter int NBUNDLE     = 150,
  parameter bit REQUIRE_ALL = 1'b1
) (
  output logic                      clk,
  output logic                      rst_n,
  output logic                      start,
  output logic [31:0]               cfg_wire_base,
  output logic [$clog2(NWIRES)-1:0] cfg_phys_base,
  output label_t                    cfg_r,
  output logic                      pl_valid,
  input  logic                      pl_ready,
  output logic [$clog2(NWIRES)-1:0] pl_addr,
  output label_t                    pl_data,
  output logic   [NUM_GE-1:0]       iq_valid,
  input  logic   [NUM_GE-1:0]       iq_ready,
  output instr_t                    iq_data [NUM_GE],
  output logic   [NUM_GE-1:0]       tq_valid,
  input  logic   [NUM_GE-1:0]       tq_ready,
  output table_t                    tq_data [NUM_GE],
  output logic   [NUM_GE-1:0]       oa_valid,
  input  logic   [NUM_GE-1:0]       oa_ready,
  output daddr_t                    oa_addr [NUM_GE],
  input  logic   [NUM_GE-1:0]       tout_valid,
  output logic   [NUM_GE-1:0]       tout_ready,
  input  table_t                    tout_data [NUM_GE],
  input  logic                      mrd_valid,
  output logic                      mrd_ready,
  input  daddr_t                    mrd_addr,
  input  logic [$clog2(NUM_GE)-1:0] mrd_id,
  output logic                      mrd_resp_valid,
  output logic [$clog2(NUM_GE)-1:0] mrd_resp_id,
  output logic                      mrd_resp_vbit,
  output label_t                    mrd_resp_data,
  input  logic                      mwr_valid,
  output logic                      mwr_ready,
  input  daddr_t                    mwr_addr,
  input  label_t                    mwr_data,
  input  logic                      busy,
  input  perf_t                     perf,
  output logic                      done,
  output int                        checks,
  output int                        failures
);
  localparam int AW   = $clog2(NWIRES);
  localparam int NTOT = NIN + NBUNDLE * NUM_GE;   // wires 1..NTOT

  // ---------------- program and reference ----------------
  op_e    w_op   [NTOT+1];
  bit     w_gate [NTOT+1];     // a gate or an input (not a NOP slot)
  bit     w_live [NTOT+1];
  bit     w_val  [NTOT+1];     // plaintext value (Evaluator)
  label_t w_lbl0 [NTOT+1];
  int     w_a    [NTOT+1];
  int     w_b    [NTOT+1];
  bit     w_aoor [NTOT+1];
  bit     w_boor [NTOT+1];
  table_t w_tbl  [NTOT+1];
  label_t R;
  int n_and = 0, n_xor = 0, n_nop = 0, n_oor = 0, n_live = 0;

  instr_t iqs [NUM_GE][$];
  table_t tqs [NUM_GE][$];
  daddr_t oas [NUM_GE][$];
  table_t touts [NUM_GE][$];

  function automatic int entry_of(int w);
    return 1 + ((w - 1) % (NWIRES - 1));
  endfunction

  function automatic label_t active(int w);
    return GARBLER ? w_lbl0[w] : (w_val[w] ? w_lbl0[w] ^ R : w_lbl0[w]);
  endfunction

  function automatic int pick_operand(int first);
    int u, r;
    do begin
      r = int'($urandom % 8);
      if (r < 5)      u = first - 1 - int'($urandom % (3 * NUM_GE));
      else if (r < 7) u = first - 1 - int'($urandom % (NWIRES - 1));
      else            u = 1 + int'($urandom % (first - 1));
      if (u < 1) u = 1 + int'($urandom % NIN);
    end while (!w_gate[u]);
    return u;
  endfunction

  task automatic build_program();
    R = rand128();
    R[0] = 1'b1;
    for (int w = 1; w <= NIN; w++) begin
      w_gate[w] = 1; w_live[w] = 0; w_op[w] = OP_NOP;
      w_val[w] = 1'($urandom); w_lbl0[w] = rand128();
    end
    for (int c = 0; c < NBUNDLE; c++) begin
      int first, last;
      first = NIN + 1 + c * NUM_GE;
      last  = first + NUM_GE - 1;
      for (int g = 0; g < NUM_GE; g++) begin
        int w, r;
        w = first + g;
        r = int'($urandom % 10);
        w_live[w] = 0; w_aoor[w] = 0; w_boor[w] = 0; w_a[w] = 0; w_b[w] = 0;
        w_lbl0[w] = '0; w_val[w] = 0; w_tbl[w] = '0;
        if (r == 0) begin
          w_op[w] = ($urandom % 2) != 0 ? OP_NOP : OP_NOP2;
          w_gate[w] = 0;
          n_nop++;
          continue;
        end
        w_op[w] = (r < 5) ? OP_XOR : OP_AND;
        w_gate[w] = 1;
        w_a[w] = pick_operand(first);
        w_b[w] = pick_operand(first);
        // out of the window, or an input the compiler chose to read from DRAM
        w_aoor[w] = (w_a[w] + NWIRES - 1 <= last) || (w_a[w] <= NIN && ($urandom % 8) == 0);
        w_boor[w] = (w_b[w] + NWIRES - 1 <= last) || (w_b[w] <= NIN && ($urandom % 8) == 0);
        if (w_aoor[w]) begin w_live[w_a[w]] = 1; n_oor++; end
        if (w_boor[w]) begin w_live[w_b[w]] = 1; n_oor++; end
        if (w_op[w] == OP_XOR) begin
          w_lbl0[w] = w_lbl0[w_a[w]] ^ w_lbl0[w_b[w]];
          w_val[w]  = w_val[w_a[w]] ^ w_val[w_b[w]];
          n_xor++;
        end else begin
          logic [255:0] t;
          logic [127:0] c0;
          garble_and(w_lbl0[w_a[w]], w_lbl0[w_b[w]], R, 32'(w), t, c0);
          w_lbl0[w] = c0;
          w_tbl[w]  = t;
          w_val[w]  = w_val[w_a[w]] & w_val[w_b[w]];
          n_and++;
        end
        if (($urandom % 6) == 0 || c == NBUNDLE - 1) w_live[w] = 1;
      end
    end
    // inputs are in DRAM already; they are not written back
    for (int w = 1; w <= NIN; w++) w_live[w] = 0;
    for (int w = NIN + 1; w <= NTOT; w++) if (w_live[w]) n_live++;
    // per-engine streams
    for (int c = 0; c < NBUNDLE; c++)
      for (int g = 0; g < NUM_GE; g++) begin
        int w;
        instr_t ins;
        w = NIN + 1 + c * NUM_GE + g;
        ins.op   = w_op[w];
        ins.live = w_live[w];
        if (w_gate[w]) begin
          ins.wa = w_aoor[w] ? '0 : WADDR_W'(entry_of(w_a[w]));
          ins.wb = w_boor[w] ? '0 : WADDR_W'(entry_of(w_b[w]));
          if (w_aoor[w]) oas[g].push_back(daddr_t'(w_a[w]));
          if (w_boor[w]) oas[g].push_back(daddr_t'(w_b[w]));
          if (w_op[w] == OP_AND) begin
            if (GARBLER) touts[g].push_back(w_tbl[w]);
            else         tqs[g].push_back(w_tbl[w]);
          end
        end else begin
          ins.wa = WADDR_W'($urandom);
          ins.wb = WADDR_W'($urandom);
        end
        iqs[g].push_back(ins);
      end
  endtask

  // ---------------- clock ----------------
  initial clk = 1'b0;
  always #5 clk = ~clk;

  // ---------------- DRAM model ----------------
  label_t dram [int];
  bit     written [int];
  int     cycle = 0;
  typedef struct { int id; int addr; int due; } pend_t;
  pend_t  pend [$];
  int     live_seen = 0, retries_seen = 0;
  bit     running = 0;
  bit     pause = 0;

  // ---------------- stream pointers ----------------
  int ip [NUM_GE];
  int tp [NUM_GE];
  int ap [NUM_GE];
  int op_ [NUM_GE];

  always @(posedge clk) if (running) begin
    cycle <= cycle + 1;
    // instruction, table and OoR address streams
    for (int g = 0; g < NUM_GE; g++) begin
      if (iq_valid[g] && iq_ready[g]) ip[g]++;
      if (tq_valid[g] && tq_ready[g]) tp[g]++;
      if (oa_valid[g] && oa_ready[g]) ap[g]++;
      iq_valid[g] <= ip[g] < iqs[g].size() && ($urandom % 8) != 0;
      iq_data[g]  <= ip[g] < iqs[g].size() ? iqs[g][ip[g]] : '0;
      tq_valid[g] <= tp[g] < tqs[g].size() && ($urandom % 8) != 0;
      tq_data[g]  <= tp[g] < tqs[g].size() ? tqs[g][tp[g]] : '0;
      oa_valid[g] <= ap[g] < oas[g].size();
      oa_addr[g]  <= ap[g] < oas[g].size() ? oas[g][ap[g]] : '0;
      // Garbler table output
      if (tout_valid[g] && tout_ready[g]) begin
        checks++;
        if (op_[g] >= touts[g].size() || tout_data[g] !== touts[g][op_[g]]) begin
          failures++;
          $display("engine %0d: garbled table %0d wrong", g, op_[g]);
        end
        op_[g]++;
      end
      tout_ready[g] <= ($urandom % 4) != 0;
    end
    // live writes
    if (mwr_valid && mwr_ready) begin
      int w;
      w = int'(mwr_addr);
      live_seen++;
      checks++;
      if (w <= NIN || w > NTOT || !w_live[w] || written.exists(w)) begin
        failures++;
        $display("unexpected live write to wire %0d", w);
      end else if (mwr_data !== active(w)) begin
        failures++;
        $display("wire %0d: label %h, expected %h", w, mwr_data, active(w));
      end
      dram[w] = mwr_data;
      written[w] = 1;
    end
    if (cycle % 200 == 0) pause <= ($urandom % 3) == 0;
    mwr_ready <= !pause && ($urandom % 4) != 0;
    // OoR reads
    if (mrd_valid && mrd_ready) begin
      pend_t p;
      p.id = int'(mrd_id); p.addr = int'(mrd_addr); p.due = cycle + 2 + int'($urandom % 11);
      pend.push_back(p);
    end
    mrd_ready <= ($urandom % 4) != 0;
    mrd_resp_valid <= 1'b0;
    for (int i = 0; i < pend.size(); i++)
      if (pend[i].due <= cycle) begin
        mrd_resp_valid <= 1'b1;
        mrd_resp_id    <= $bits(mrd_resp_id)'(pend[i].id);
        mrd_resp_vbit  <= dram.exists(pend[i].addr);
        mrd_resp_data  <= dram.exists(pend[i].addr) ? dram[pend[i].addr] : rand128();
        if (!dram.exists(pend[i].addr)) retries_seen++;
        pend.delete(i);
        break;
      end
  end

  // ---------------- sequence ----------------
  function automatic void expect_nonzero(string what, longint n);
    checks++;
    if (n == 0) begin
      failures++;
      $display("mechanism never exercised: %s", what);
    end
  endfunction

  function automatic void expect_eq(string what, longint got, longint want);
    checks++;
    if (got != want) begin
      failures++;
      $display("%s: %0d, expected %0d", what, got, want);
    end
  endfunction

  initial begin
    done = 0; checks = 0; failures = 0;
    rst_n = 0; start = 0; cfg_wire_base = '0; cfg_phys_base = '0; cfg_r = '0;
    pl_valid = 0; pl_addr = '0; pl_data = '0;
    iq_valid = '0; tq_valid = '0; oa_valid = '0; tout_ready = '0;
    mrd_ready = 0; mrd_resp_valid = 0; mrd_resp_id = '0; mrd_resp_vbit = 0;
    mrd_resp_data = '0; mwr_ready = 0;
    for (int g = 0; g < NUM_GE; g++) begin
      iq_data[g] = '0; tq_data[g] = '0; oa_addr[g] = '0;
      ip[g] = 0; tp[g] = 0; ap[g] = 0; op_[g] = 0;
    end
    build_program();
    for (int w = 1; w <= NIN; w++) dram[w] = active(w);
    $display("program: %0d bundles of %0d, %0d AND, %0d XOR, %0d NOP, %0d OoR operands, %0d live",
             NBUNDLE, NUM_GE, n_and, n_xor, n_nop, n_oor, n_live);
    repeat (4) @(posedge clk);
    rst_n <= 1;
    // preload the input wires into the SWW
    for (int w = 1; w <= NIN; w++) begin
      @(posedge clk);
      pl_valid <= 1;
      pl_addr  <= AW'(entry_of(w));
      pl_data  <= active(w);
      @(posedge clk);
      while (!pl_ready) @(posedge clk);
      pl_valid <= 0;
    end
    @(posedge clk);
    start         <= 1;
    cfg_wire_base <= 32'(NIN + 1);
    cfg_phys_base <= AW'(entry_of(NIN + 1));
    cfg_r         <= R;
    @(posedge clk);
    start   <= 0;
    running <= 1;
    // run until every live wire is out and the engines are idle
    while (live_seen < n_live || busy) @(posedge clk);
    repeat (50) @(posedge clk);
    for (int g = 0; g < NUM_GE; g++) begin
      expect_eq($sformatf("engine %0d instructions taken", g), ip[g], iqs[g].size());
      if (GARBLER) expect_eq($sformatf("engine %0d tables out", g), op_[g], touts[g].size());
      else         expect_eq($sformatf("engine %0d tables taken", g), tp[g], tqs[g].size());
    end
    expect_eq("live writes", live_seen, n_live);
    expect_eq("perf live writes", perf.live_writes, n_live);
    expect_eq("issue cycles", perf.issue_cycles, NBUNDLE);
    expect_eq("AND gates", perf.and_gates, n_and);
    expect_eq("XOR gates", perf.xor_gates, n_xor);
    expect_eq("OoR operands", perf.oor_operands, n_oor);
    expect_eq("OoR retries", perf.oor_retries, retries_seen);
    $display("cycles=%0d issue=%0d and=%0d xor=%0d fwd=%0d oor=%0d retries=%0d conflicts=%0d fwd_waits=%0d be_stalls=%0d live=%0d",
             cycle, perf.issue_cycles, perf.and_gates, perf.xor_gates, perf.fwd_operands,
             perf.oor_operands, perf.oor_retries, perf.rd_conflicts, perf.fwd_waits,
             perf.be_stalls, perf.live_writes);
    expect_nonzero("AND gates", perf.and_gates);
    expect_nonzero("XOR gates", perf.xor_gates);
    expect_nonzero("NOP slots", n_nop);
    expect_nonzero("forwarding", perf.fwd_operands);
    expect_nonzero("forwarding waits", perf.fwd_waits);
    expect_nonzero("OoR operands", perf.oor_operands);
    expect_nonzero("live writes", perf.live_writes);
    if (REQUIRE_ALL) begin
      expect_nonzero("OoR retries", perf.oor_retries);
      expect_nonzero("SWW bank conflicts", perf.rd_conflicts);
      expect_nonzero("back-end stalls", perf.be_stalls);
      expect_nonzero("SWW wrap-around", NTOT > NWIRES - 1);
    end
    done = 1;
  end
endmodule
