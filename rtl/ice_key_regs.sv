// ice_key_regs: the ICE key registers.
//
// The secure enclave writes the per-model session key k_msk (256 bit) and
// the nonce IV_base (96 bit) over a private on-die bus (prov_valid for one
// cycle). On that write the AES-256 key schedule is computed and all 15
// round keys are registered, so key_valid and the round keys appear together
// one cycle after the write. key_clear (from the preemption hook) zeroes key,
// nonce and round keys and drops key_valid in the next cycle; a clear in the
// same cycle as a write wins. Nothing here is readable by software: the only
// outputs go to the AES pipeline and the counter unit.
// Provisioning by the enclave and clearing on preemption follow the
// architecture; the one-cycle key expansion and the bus signals are this
// design's choices.
module ice_key_regs
  import tessera_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   prov_valid,
  input  key_t   prov_key,
  input  iv_t    prov_iv,
  input  logic   key_clear,
  output logic   key_valid,
  output rkeys_t rkeys,
  output iv_t    iv_base
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      key_valid <= 1'b0;
      rkeys     <= '0;
      iv_base   <= '0;
    end else if (key_clear) begin
      key_valid <= 1'b0;
      rkeys     <= '0;
      iv_base   <= '0;
    end else if (prov_valid) begin
      key_valid <= 1'b1;
      rkeys     <= expand_key(prov_key);
      iv_base   <= prov_iv;
    end
  end

endmodule
