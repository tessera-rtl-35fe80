// ice_ctr_gen: address nonce derivation.
//
// For a line read at physical address P it forms the counter block
// CTR(P) = IV_base || floor(P / 64): the 96-bit per-model nonce in the upper
// bits and the 32-bit line index P[37:6] in the lower bits. The result is
// registered, so the counter is ready one cycle after the request, as the
// architecture specifies. Addresses above 256 GiB wrap the index, which is
// the limit the architecture states for counter uniqueness.
// The stage is a one-entry pipeline register with valid/ready: in_ready is
// high when the register is empty or is being emptied this cycle. It carries
// a side tag (the keystream slot) next to the counter.
module ice_ctr_gen
  import tessera_pkg::*;
#(
  parameter int unsigned TAG_W = 6
) (
  input  logic             clk,
  input  logic             rst_n,
  input  iv_t              iv_base,
  input  logic             in_valid,
  output logic             in_ready,
  input  paddr_t           in_addr,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  input  logic             out_ready,
  output block_t           out_ctr,
  output logic [TAG_W-1:0] out_tag
);

  localparam int unsigned LSB = $clog2(LINE_BYTES);   // 6

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_ctr   <= '0;
      out_tag   <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_ctr <= {iv_base, in_addr[LSB +: IDX_W]};
        out_tag <= in_tag;
      end
    end
  end

endmodule
