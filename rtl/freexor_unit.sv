// freexor_unit: the FreeXOR execution unit of a gate engine.
//
// With FreeXOR the label of an XOR gate's output is the XOR of its input labels
// (the Garbler works on 0-labels, the Evaluator on the labels it holds), so the unit
// is an array of 128 XOR gates followed by one register: one gate per enabled cycle,
// result one cycle later. It has its own XORs rather than sharing the Half-Gate's, so
// XOR gates resolve their dependences after one cycle. `meta` (the output address and
// live bit) travels with the result.
module freexor_unit
  import haac_pkg::*;
#(
  parameter int META_W = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              en,
  input  logic              in_valid,
  input  label_t            wa,
  input  label_t            wb,
  input  logic [META_W-1:0] meta_in,
  output logic              out_valid,
  output label_t            wc,
  output logic [META_W-1:0] meta_out
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  out_valid <= 1'b0;
    else if (en) out_valid <= in_valid;
  end
  always_ff @(posedge clk) begin
    if (en) begin
      wc       <= wa ^ wb;
      meta_out <= meta_in;
    end
  end
endmodule
