// ice_xor_stage: the line-rate XOR of the ICE.
//
// Each ciphertext beat is XORed with its 128-bit keystream block and the
// plaintext is registered, so a beat taken in cycle t leaves in cycle t+1
// (T_XOR = 1 cycle, inside the 1-2 cycles the architecture allows). The
// keystream block arrives MSB-first (AES byte order) and is mapped onto the
// little-endian byte lanes of the beat. The write address (SRAM line and
// beat) and the memory tag travel alongside. No back-pressure: the SRAM
// write port accepts a beat every cycle.
module ice_xor_stage
  import tessera_pkg::*;
#(
  parameter int unsigned LADDR_W = 15
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  block_t             in_cipher,
  input  block_t             in_ks,
  input  logic [LADDR_W-1:0] in_line,
  input  logic [1:0]         in_beat,
  input  logic               in_last,
  output logic               out_valid,
  output block_t             out_plain,
  output logic [LADDR_W-1:0] out_line,
  output logic [1:0]         out_beat,
  output logic               out_last
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_plain <= '0;
      out_line  <= '0;
      out_beat  <= '0;
      out_last  <= 1'b0;
    end else begin
      out_valid <= in_valid;
      out_last  <= in_valid && in_last;
      if (in_valid) begin
        out_plain <= in_cipher ^ ks_to_lanes(in_ks);
        out_line  <= in_line;
        out_beat  <= in_beat;
      end
    end
  end

endmodule
