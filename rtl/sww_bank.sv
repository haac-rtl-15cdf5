// sww_bank: one bank of the sliding wire window (SWW), the on-chip scratchpad that
// holds wire labels.
//
// Each entry holds a 128-bit label and a valid bit saying the label has been computed.
// The paper builds the SWW from single-port SRAM banks clocked at twice the gate-engine
// clock, so each bank serves two accesses per engine cycle; this model keeps a single
// clock and gives the bank two access ports instead. A port either writes (label
// stored, valid bit set) or reads (label and valid bit returned one cycle later).
// A separate clear port resets one entry's valid bit: an engine clears the entry of
// each output wire when it issues the gate, so later readers wait for the new value
// rather than read the old wire that shared the entry. The paper places the valid bit in
// the SRAM word; keeping the valid bits in a flip-flop array beside the label RAM, so
// that the clear needs no RAM port, is this design's choice. A clear wins over a write
// to the same entry in the same cycle. Reads return the contents before any write in
// the same cycle.
module sww_bank
  import haac_pkg::*;
#(
  parameter int DEPTH = 2048
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [1:0]               en,
  input  logic [1:0]               we,
  input  logic [$clog2(DEPTH)-1:0] idx   [2],
  input  label_t                   wdata [2],
  output label_t                   rdata [2],
  output logic [1:0]               rvalid,
  input  logic                     clr_en,
  input  logic [$clog2(DEPTH)-1:0] clr_idx
);
  label_t           mem [DEPTH];
  logic [DEPTH-1:0] vld;

  always_ff @(posedge clk) begin
    for (int p = 0; p < 2; p++) begin
      if (en[p] && we[p]) mem[idx[p]] <= wdata[p];
      if (en[p] && !we[p]) rdata[p] <= mem[idx[p]];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld    <= '0;
      rvalid <= '0;
    end else begin
      for (int p = 0; p < 2; p++) begin
        if (en[p] && !we[p]) rvalid[p] <= vld[idx[p]];
        if (en[p] && we[p])  vld[idx[p]] <= 1'b1;
      end
      if (clr_en) vld[clr_idx] <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    a_one_writer: assert (!(en[0] && we[0] && en[1] && we[1] && idx[0] == idx[1]))
      else $error("sww_bank: two writes to one entry in a cycle");
  end

endmodule
