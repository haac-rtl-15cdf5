// fwd_network: the wire forwarding network shared by all gate engines.
//
// Every wire written back to the SWW in a cycle is also broadcast here (NS sources:
// the FreeXOR and Half-Gate write ports of every engine). Each operand that is still
// waiting in an engine's read stages presents its SWW address as a query (NQ queries);
// a query whose address matches a broadcast in the same cycle gets that label. This
// resolves read-after-write hazards inside an engine and between engines without
// waiting for the SWW round trip, as the paper describes, and is purely combinational.
// If two sources broadcast the same address (which a correct program never does) the
// highest-numbered source wins.
module fwd_network
  import haac_pkg::*;
#(
  parameter int NS = 4,
  parameter int NQ = 6,
  parameter int AW = 10
) (
  input  logic [NS-1:0] bc_valid,
  input  logic [AW-1:0] bc_addr [NS],
  input  label_t        bc_data [NS],
  input  logic [AW-1:0] q_addr  [NQ],
  output logic [NQ-1:0] q_hit,
  output label_t        q_data  [NQ]
);
  always_comb begin
    q_hit = '0;
    for (int q = 0; q < NQ; q++) begin
      q_data[q] = '0;
      for (int s = 0; s < NS; s++) begin
        if (bc_valid[s] && bc_addr[s] == q_addr[q]) begin
          q_hit[q]  = 1'b1;
          q_data[q] = bc_data[s];
        end
      end
    end
  end
endmodule
