// halfgate_eval: the Evaluator's Half-Gate unit, which evaluates one garbled AND gate
// per cycle.
//
// Given the two input labels W_A, W_B of an AND gate, its gate index i and its
// two-row garbled table (T_G = Table[0], T_E = Table[1]), the Evaluator computes
//   W_C = H(W_A, 2i) ^ H(W_B, 2i+1) ^ (s_A ? T_G : 0) ^ (s_B ? (T_E ^ W_A) : 0)
// where s_A, s_B are the least significant (colour) bits of the labels and H(W, k) is
// AES-128 of W under the key k with a full key expansion per gate (re-keying), as in
// the paper's Garbler figure; the Evaluator needs one AES per input label. The hash
// is the bare AES output, as drawn in that figure.
//
// Interface: `tbl` packs Table[0] in bits [127:0] and Table[1] in bits [255:128].
// `meta` is carried unchanged with the gate (the GE uses it for the output address).
// Timing: fully pipelined, one gate per enabled cycle, result LAT=18 enabled cycles
// after the input (the paper's Evaluator depth). The paper gives only the depth; this
// design fills it with LAT-12 input register stages ahead of the 11-stage AES and a
// final combining stage.
module halfgate_eval
  import haac_pkg::*;
#(
  parameter int LAT    = 18,
  parameter int META_W = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              en,
  input  logic              in_valid,
  input  logic [31:0]       gate_id,
  input  label_t            wa,
  input  label_t            wb,
  input  table_t            tbl,
  input  logic [META_W-1:0] meta_in,
  output logic              out_valid,
  output label_t            wc,
  output logic [META_W-1:0] meta_out
);
  localparam int AES_LAT = 11;
  localparam int PAD     = LAT - AES_LAT - 1;
  localparam int SB_W    = 32 + 2*LABEL_W + TABLE_W + META_W;
  localparam int CB_W    = LABEL_W + TABLE_W + 2 + META_W;

  // input padding stages
  logic            p_v;
  logic [SB_W-1:0] p_d;
  haac_delay #(.W(SB_W), .D(PAD)) u_pad (
    .clk, .rst_n, .en, .in_valid,
    .in_data ({gate_id, wa, wb, tbl, meta_in}),
    .out_valid(p_v), .out_data(p_d));

  logic [31:0]       p_gid;
  label_t            p_wa, p_wb;
  table_t            p_tbl;
  logic [META_W-1:0] p_meta;
  assign {p_gid, p_wa, p_wb, p_tbl, p_meta} = p_d;

  // hash of W_A under 2i and of W_B under 2i+1
  logic         ha_v, hb_v;
  logic [127:0] ha [1];
  logic [127:0] hb [1];
  logic [127:0] pa [1];
  logic [127:0] pb [1];
  assign pa[0] = p_wa;
  assign pb[0] = p_wb;

  aes_rekey_pipe #(.NBLK(1)) u_aes_a (
    .clk, .rst_n, .en, .in_valid(p_v),
    .key({95'd0, p_gid, 1'b0}), .pt(pa), .out_valid(ha_v), .ct(ha));
  aes_rekey_pipe #(.NBLK(1)) u_aes_b (
    .clk, .rst_n, .en, .in_valid(p_v),
    .key({95'd0, p_gid, 1'b1}), .pt(pb), .out_valid(hb_v), .ct(hb));

  // side-band through the AES latency: W_A, table, colour bits, meta
  logic            c_v;
  logic [CB_W-1:0] c_d;
  haac_delay #(.W(CB_W), .D(AES_LAT)) u_side (
    .clk, .rst_n, .en, .in_valid(p_v),
    .in_data ({p_wa, p_tbl, p_wa[0], p_wb[0], p_meta}),
    .out_valid(c_v), .out_data(c_d));

  label_t            c_wa;
  table_t            c_tbl;
  logic              c_sa, c_sb;
  logic [META_W-1:0] c_meta;
  assign {c_wa, c_tbl, c_sa, c_sb, c_meta} = c_d;

  label_t wg, we;
  always_comb begin
    wg = ha[0] ^ (c_sa ? c_tbl[127:0] : '0);
    we = hb[0] ^ (c_sb ? (c_tbl[255:128] ^ c_wa) : '0);
  end

  logic o_v;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  o_v <= 1'b0;
    else if (en) o_v <= c_v & ha_v & hb_v;
  end
  always_ff @(posedge clk) begin
    if (en) begin
      wc       <= wg ^ we;
      meta_out <= c_meta;
    end
  end
  assign out_valid = o_v;

endmodule
