// rr_arbiter: round-robin arbiter that merges N request streams onto one port.
//
// All gate engines share one off-chip read port (for out-of-range wire fetches) and
// one write port (for live wires); this arbiter picks one requester per cycle. `gnt`
// is one-hot (or zero) and combinational in `req`; when `accept` is high the pointer
// moves past the granted requester so each requester waits at most N-1 grants.
// The arbitration policy is this design's choice; the paper does not describe how
// off-chip traffic from the engines is merged.
module rr_arbiter #(
  parameter int N = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         req,
  input  logic                 accept,
  output logic [N-1:0]         gnt,
  output logic [$clog2(N)-1:0] gnt_idx
);
  localparam int IW = (N > 1) ? $clog2(N) : 1;
  logic [IW-1:0] ptr;

  always_comb begin
    int idx;
    gnt     = '0;
    gnt_idx = '0;
    for (int i = N-1; i >= 0; i--) begin
      idx = (int'(ptr) + i) % N;
      if (req[idx]) begin
        gnt     = '0;
        gnt[idx] = 1'b1;
        gnt_idx = ($clog2(N))'(idx);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ptr <= '0;
    else if (accept && (req != '0))
      ptr <= (int'(gnt_idx) == N-1) ? '0 : IW'(gnt_idx + 1'b1);
  end
endmodule
