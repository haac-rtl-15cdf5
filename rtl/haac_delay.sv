// haac_delay: D-stage shift register for a W-bit word with a valid bit and a common
// enable. Used to carry side-band data (addresses, labels, tables) alongside the AES
// pipelines and to pad the half-gate pipelines to their stated depths. With D=0 the
// input passes straight through. Reset clears the valid bits only.
module haac_delay #(
  parameter int W = 8,
  parameter int D = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  input  logic         in_valid,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  output logic [W-1:0] out_data
);
  if (D == 0) begin : g_wire
    assign out_valid = in_valid;
    assign out_data  = in_data;
  end else begin : g_pipe
    logic         v_q [D];
    logic [W-1:0] d_q [D];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int i = 0; i < D; i++) v_q[i] <= 1'b0;
      end else if (en) begin
        v_q[0] <= in_valid;
        for (int i = 1; i < D; i++) v_q[i] <= v_q[i-1];
      end
    end
    always_ff @(posedge clk) begin
      if (en) begin
        d_q[0] <= in_data;
        for (int i = 1; i < D; i++) d_q[i] <= d_q[i-1];
      end
    end
    assign out_valid = v_q[D-1];
    assign out_data  = d_q[D-1];
  end
endmodule
