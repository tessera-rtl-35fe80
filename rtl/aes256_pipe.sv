// aes256_pipe: fully pipelined AES-256 forward cipher, the keystream
// generator of the ICE.
//
// One 128-bit counter block may enter every cycle (in_valid) and its
// encryption leaves exactly AES_ROUNDS = 14 cycles later (out_valid), so the
// keystream latency is T_ks = R = 14 cycles with one round per stage, the
// "single fully-pipelined core" option of the architecture. The initial
// AddRoundKey is folded into stage 1. A side tag (the keystream buffer slot
// and block number) travels with each block. The pipeline never stalls: the
// keystream buffer has reserved room for every block before it enters.
// The round keys come from ice_key_regs and are static while blocks are in
// flight. Rounds per stage and the tag are this design's choices.
module aes256_pipe
  import tessera_pkg::*;
#(
  parameter int unsigned TAG_W = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  rkeys_t           rkeys,
  input  logic             in_valid,
  input  block_t           in_block,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output block_t           out_block,
  output logic [TAG_W-1:0] out_tag
);

  block_t              st  [1:AES_ROUNDS];
  logic                vld [1:AES_ROUNDS];
  logic [TAG_W-1:0]    tg  [1:AES_ROUNDS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 1; r <= AES_ROUNDS; r++) vld[r] <= 1'b0;
    end else begin
      vld[1] <= in_valid;
      for (int r = 2; r <= AES_ROUNDS; r++) vld[r] <= vld[r-1];
    end
  end

  always_ff @(posedge clk) begin
    st[1] <= aes_round(in_block ^ rkeys[0], rkeys[1], 1'b0);
    tg[1] <= in_tag;
    for (int r = 2; r <= AES_ROUNDS; r++) begin
      st[r] <= aes_round(st[r-1], rkeys[r], r == AES_ROUNDS);
      tg[r] <= tg[r-1];
    end
  end

  assign out_valid = vld[AES_ROUNDS];
  assign out_block = st[AES_ROUNDS];
  assign out_tag   = tg[AES_ROUNDS];

endmodule
