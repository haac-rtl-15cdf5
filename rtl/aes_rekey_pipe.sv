// aes_rekey_pipe: fully pipelined AES-128 encryption with the key expansion done
// alongside, so every input may carry its own key ("re-keying").
//
// The half-gate hash of a wire label encrypts the label under a key derived from the
// gate index; with re-keying every gate needs a full key expansion. Following the
// half-gate figure of the paper, one key expansion feeds NBLK AES datapaths (the
// Garbler hashes both labels of a wire under the same key, NBLK=2; the Evaluator
// hashes one label per key, NBLK=1). Round structures (S-boxes, MixColumns, XOR
// arrays) are replicated per stage and all state is held in registers, so a new
// input is accepted every cycle, as the paper describes for its Half-Gate unit.
//
// Timing: stage 0 registers the inputs after the initial AddRoundKey; stages 1..10 each
// compute one round key and one AES round. Output appears LATENCY=11 enabled cycles
// after the input. `en` low freezes the whole pipeline (used for back-pressure).
// The split of work into stages is this design's choice; the paper gives only the
// total depth of its Half-Gate pipelines.
module aes_rekey_pipe
  import haac_pkg::*;
#(
  parameter int NBLK = 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  logic                 in_valid,
  input  logic [127:0]         key,
  input  logic [127:0]         pt  [NBLK],
  output logic                 out_valid,
  output logic [127:0]         ct  [NBLK]
);
  localparam int NR = 10;

  logic         v_q  [NR+1];
  logic [127:0] rk_q [NR+1];
  logic [127:0] st_q [NR+1][NBLK];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r <= NR; r++) v_q[r] <= 1'b0;
    end else if (en) begin
      v_q[0] <= in_valid;
      for (int r = 1; r <= NR; r++) v_q[r] <= v_q[r-1];
    end
  end

  always_ff @(posedge clk) begin
    if (en) begin
      rk_q[0] <= key;
      for (int b = 0; b < NBLK; b++) st_q[0][b] <= pt[b] ^ key;
      for (int r = 1; r <= NR; r++) begin
        rk_q[r] <= key_step(rk_q[r-1], rcon_of(r));
        for (int b = 0; b < NBLK; b++) begin
          if (r < NR)
            st_q[r][b] <= mix_columns(sub_shift(st_q[r-1][b])) ^ key_step(rk_q[r-1], rcon_of(r));
          else
            st_q[r][b] <= sub_shift(st_q[r-1][b]) ^ key_step(rk_q[r-1], rcon_of(r));
        end
      end
    end
  end

  assign out_valid = v_q[NR];
  always_comb
    for (int b = 0; b < NBLK; b++) ct[b] = st_q[NR][b];

endmodule
