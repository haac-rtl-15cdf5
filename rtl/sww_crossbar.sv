// sww_crossbar: connects the gate engines' wire reads and writes to the SWW banks.
//
// Wires are striped across banks by the low address bits (bank = addr mod NB,
// entry = addr / NB), so the consecutive output wires of one issue cycle land in
// different banks. Each cycle the crossbar gives every bank up to two accesses (the
// bank's two ports, standing in for the paper's double-clocked single-port SRAM).
// Writes are served first, in requester order, then reads in requester order; a request
// that finds its bank full is not granted and must be repeated. The paper does not
// describe the arbitration; this priority order is this design's choice.
//
// Timing, following the paper's three read stages: a read is granted in the cycle its
// address crosses to the bank, the bank reads at the end of that cycle, and the label
// comes back through a return register, so `rd_ret_*` is valid two cycles after
// `rd_gnt`. A granted write is stored at the end of its grant cycle.
// Valid-bit clears (one per output wire issued) go straight to their bank; at most one
// clear per bank per cycle is allowed (asserted), which holds when an issue cycle's
// output wires are consecutive and NB is at least the number of engines.
module sww_crossbar
  import haac_pkg::*;
#(
  parameter int NR    = 4,
  parameter int NW    = 5,
  parameter int NC    = 2,
  parameter int NB    = 8,
  parameter int AW    = 10
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // read requests
  input  logic [NR-1:0]            rd_req,
  input  logic [AW-1:0]            rd_addr [NR],
  output logic [NR-1:0]            rd_gnt,
  output logic [NR-1:0]            rd_ret_valid,
  output label_t                   rd_ret_data [NR],
  output logic [NR-1:0]            rd_ret_vbit,
  // write requests
  input  logic [NW-1:0]            wr_req,
  input  logic [AW-1:0]            wr_addr [NW],
  input  label_t                   wr_data [NW],
  output logic [NW-1:0]            wr_gnt,
  // valid-bit clears
  input  logic [NC-1:0]            clr_req,
  input  logic [AW-1:0]            clr_addr [NC],
  // bank side
  output logic [1:0]               b_en    [NB],
  output logic [1:0]               b_we    [NB],
  output logic [AW-$clog2(NB)-1:0] b_idx   [NB][2],
  output label_t                   b_wdata [NB][2],
  input  label_t                   b_rdata [NB][2],
  input  logic [1:0]               b_rvalid[NB],
  output logic [NB-1:0]            b_clr_en,
  output logic [AW-$clog2(NB)-1:0] b_clr_idx [NB]
);
  localparam int BW = $clog2(NB);

  function automatic int bank_of(input logic [AW-1:0] a);
    return int'(a[BW-1:0]);
  endfunction

  // ---------------- arbitration ----------------
  // Writes are arbitrated first (wused), then reads take the ports left over. The two
  // passes are separate blocks so that write grants never depend on read requests.
  logic [1:0]    wused   [NB];
  logic [1:0]    used    [NB];
  logic [BW-1:0] rd_bank [NR];   // bank and port each read was granted on
  logic          rd_port [NR];
  logic          wp_en   [NB][2];
  logic [AW-BW-1:0] wp_idx [NB][2];
  label_t        wp_dat  [NB][2];
  logic          rp_en   [NB][2];
  logic [AW-BW-1:0] rp_idx [NB][2];

  always_comb begin
    for (int b = 0; b < NB; b++) begin
      wused[b] = 2'd0;
      for (int p = 0; p < 2; p++) begin
        wp_en[b][p]  = 1'b0;
        wp_idx[b][p] = '0;
        wp_dat[b][p] = '0;
      end
    end
    wr_gnt = '0;
    for (int i = 0; i < NW; i++) begin
      if (wr_req[i] && wused[bank_of(wr_addr[i])] != 2'd2) begin
        wr_gnt[i] = 1'b1;
        wp_en [bank_of(wr_addr[i])][wused[bank_of(wr_addr[i])][0]] = 1'b1;
        wp_idx[bank_of(wr_addr[i])][wused[bank_of(wr_addr[i])][0]] = wr_addr[i][AW-1:BW];
        wp_dat[bank_of(wr_addr[i])][wused[bank_of(wr_addr[i])][0]] = wr_data[i];
        wused[bank_of(wr_addr[i])] = wused[bank_of(wr_addr[i])] + 2'd1;
      end
    end
  end

  always_comb begin
    for (int b = 0; b < NB; b++) begin
      used[b] = wused[b];
      for (int p = 0; p < 2; p++) begin
        rp_en[b][p]  = 1'b0;
        rp_idx[b][p] = '0;
      end
    end
    rd_gnt = '0;
    for (int i = 0; i < NR; i++) begin
      rd_bank[i] = '0;
      rd_port[i] = 1'b0;
      if (rd_req[i] && used[bank_of(rd_addr[i])] != 2'd2) begin
        rd_gnt[i]  = 1'b1;
        rd_bank[i] = BW'(bank_of(rd_addr[i]));
        rd_port[i] = used[bank_of(rd_addr[i])][0];
        rp_en [bank_of(rd_addr[i])][used[bank_of(rd_addr[i])][0]] = 1'b1;
        rp_idx[bank_of(rd_addr[i])][used[bank_of(rd_addr[i])][0]] = rd_addr[i][AW-1:BW];
        used[bank_of(rd_addr[i])] = used[bank_of(rd_addr[i])] + 2'd1;
      end
    end
  end

  always_comb begin
    for (int b = 0; b < NB; b++) begin
      for (int p = 0; p < 2; p++) begin
        b_en[b][p]    = wp_en[b][p] || rp_en[b][p];
        b_we[b][p]    = wp_en[b][p];
        b_idx[b][p]   = wp_en[b][p] ? wp_idx[b][p] : rp_idx[b][p];
        b_wdata[b][p] = wp_dat[b][p];
      end
    end
  end

  always_comb begin
    b_clr_en = '0;
    for (int b = 0; b < NB; b++) b_clr_idx[b] = '0;
    for (int c = 0; c < NC; c++) begin
      if (clr_req[c]) begin
        b_clr_en[bank_of(clr_addr[c])]  = 1'b1;
        b_clr_idx[bank_of(clr_addr[c])] = clr_addr[c][AW-1:BW];
      end
    end
  end

  // ---------------- read return path ----------------
  logic [NR-1:0] s1_v;
  logic [BW-1:0] s1_bank [NR];
  logic          s1_port [NR];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v         <= '0;
      rd_ret_valid <= '0;
    end else begin
      s1_v         <= rd_gnt;
      rd_ret_valid <= s1_v;
    end
  end

  always_ff @(posedge clk) begin
    for (int i = 0; i < NR; i++) begin
      s1_bank[i]     <= rd_bank[i];
      s1_port[i]     <= rd_port[i];
      rd_ret_data[i] <= b_rdata[s1_bank[i]][s1_port[i]];
      rd_ret_vbit[i] <= b_rvalid[s1_bank[i]][s1_port[i]];
    end
  end

  // at most one valid-bit clear per bank per cycle
  always_ff @(posedge clk) begin
    for (int c = 0; c < NC; c++)
      for (int d = c + 1; d < NC; d++)
        a_one_clear: assert (!(rst_n && clr_req[c] && clr_req[d] &&
                               bank_of(clr_addr[c]) == bank_of(clr_addr[d])))
          else $error("sww_crossbar: two valid-bit clears to one bank");
  end

endmodule
