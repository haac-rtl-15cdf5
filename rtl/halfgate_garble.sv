// halfgate_garble: the Garbler's Half-Gate unit, which garbles one AND gate per cycle.
//
// Inputs are the 0-labels W_A^0, W_B^0 of the gate's input wires, the gate index i and
// the global FreeXOR offset R (whose LSB must be 1). The datapath is the one drawn in
// the paper's Half-Gate figure:
//   W^1 = W^0 ^ R;  H(W_A^b) = AES_{KE(2i)}(W_A^b);  H(W_B^b) = AES_{KE(2i+1)}(W_B^b)
//   Table[0] = H(W_A^0) ^ H(W_A^1) ^ (LSB(W_B^0) & R)
//   W_G      = H(W_A^0) ^ (LSB(W_A^0) & Table[0])
//   Table[1] = H(W_B^0) ^ H(W_B^1) ^ W_A^0
//   W_E      = H(W_B^0) ^ (LSB(W_B^0) & (H(W_B^0) ^ H(W_B^1)))
//   W_C^0    = W_G ^ W_E
// One key expansion feeds the two AES datapaths of each input wire.
//
// Interface: `tbl` packs Table[0] in bits [127:0], Table[1] in bits [255:128].
// Timing: one gate per enabled cycle, results LAT=21 enabled cycles later (the paper's
// Garbler depth); this design fills the depth with LAT-12 input register stages ahead
// of the 11-stage AES and one combining stage.
module halfgate_garble
  import haac_pkg::*;
#(
  parameter int LAT    = 21,
  parameter int META_W = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              en,
  input  logic              in_valid,
  input  logic [31:0]       gate_id,
  input  label_t            wa0,
  input  label_t            wb0,
  input  label_t            r,
  input  logic [META_W-1:0] meta_in,
  output logic              out_valid,
  output label_t            wc0,
  output table_t            tbl,
  output logic [META_W-1:0] meta_out
);
  localparam int AES_LAT = 11;
  localparam int PAD     = LAT - AES_LAT - 1;
  localparam int SB_W    = 32 + 2*LABEL_W + META_W;
  localparam int CB_W    = LABEL_W + 1 + META_W;

  logic            p_v;
  logic [SB_W-1:0] p_d;
  haac_delay #(.W(SB_W), .D(PAD)) u_pad (
    .clk, .rst_n, .en, .in_valid,
    .in_data ({gate_id, wa0, wb0, meta_in}),
    .out_valid(p_v), .out_data(p_d));

  logic [31:0]       p_gid;
  label_t            p_wa0, p_wb0;
  logic [META_W-1:0] p_meta;
  assign {p_gid, p_wa0, p_wb0, p_meta} = p_d;

  logic         ha_v, hb_v;
  logic [127:0] pa [2];
  logic [127:0] pb [2];
  logic [127:0] ha [2];
  logic [127:0] hb [2];
  assign pa[0] = p_wa0;
  assign pa[1] = p_wa0 ^ r;
  assign pb[0] = p_wb0;
  assign pb[1] = p_wb0 ^ r;

  aes_rekey_pipe #(.NBLK(2)) u_aes_a (
    .clk, .rst_n, .en, .in_valid(p_v),
    .key({95'd0, p_gid, 1'b0}), .pt(pa), .out_valid(ha_v), .ct(ha));
  aes_rekey_pipe #(.NBLK(2)) u_aes_b (
    .clk, .rst_n, .en, .in_valid(p_v),
    .key({95'd0, p_gid, 1'b1}), .pt(pb), .out_valid(hb_v), .ct(hb));

  logic            c_v;
  logic [CB_W-1:0] c_d;
  haac_delay #(.W(CB_W), .D(AES_LAT)) u_side (
    .clk, .rst_n, .en, .in_valid(p_v),
    .in_data ({p_wa0, p_wb0[0], p_meta}),
    .out_valid(c_v), .out_data(c_d));

  // R is a configuration value held steady while gates run, so it is not delayed.
  label_t            c_wa0;
  logic              c_pb;
  logic [META_W-1:0] c_meta;
  assign {c_wa0, c_pb, c_meta} = c_d;

  label_t tg, te, wg, we;
  always_comb begin
    tg = ha[0] ^ ha[1] ^ (c_pb ? r : '0);
    wg = ha[0] ^ (c_wa0[0] ? tg : '0);
    te = hb[0] ^ hb[1] ^ c_wa0;
    we = hb[0] ^ (c_pb ? (hb[0] ^ hb[1]) : '0);
  end

  logic o_v;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  o_v <= 1'b0;
    else if (en) o_v <= c_v & ha_v & hb_v;
  end
  always_ff @(posedge clk) begin
    if (en) begin
      wc0      <= wg ^ we;
      tbl      <= {te, tg};
      meta_out <= c_meta;
    end
  end
  assign out_valid = o_v;

endmodule
