// preempt_ctrl: the hardware preemption hook.
//
// On preempt_req (the OS's preemption signal, one pulse) it runs, in order:
//   DRAIN   stop the NPU DMA issuing lines (dma_stop) and wait until neither
//           the DMA nor the ICE has a line in flight;
//   SCRUB   start the scrub engine and wait for its done;
//   CLEAR   clear the ICE key registers (one cycle);
//   PARKED  raise preempt_ack: the OS may switch context. dma_stop stays
//           high while parked.
// On resume (a pulse) it waits in REKEY until the enclave has re-provisioned
// the session key (key_valid), then pulses dma_restart so that the DMA
// refetches the interrupted tile from its first line, and returns to IDLE.
// The sequence of steps follows the architecture; the handshake signals and
// the state encoding are this design's choices. The control path has no
// software-writable input: preempt_req comes from the privileged hook.
module preempt_ctrl (
  input  logic clk,
  input  logic rst_n,
  input  logic preempt_req,
  input  logic resume,
  input  logic dma_idle,
  input  logic ice_busy,
  input  logic scrub_done,
  input  logic key_valid,
  output logic dma_stop,
  output logic scrub_start,
  output logic key_clear,
  output logic preempt_ack,
  output logic dma_restart,
  output logic active
);

  typedef enum logic [2:0] {
    S_IDLE, S_DRAIN, S_SCRUB, S_CLEAR, S_PARKED, S_REKEY
  } state_e;

  state_e state, next;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state <= S_IDLE;
    else        state <= next;
  end

  always_comb begin
    next        = state;
    scrub_start = 1'b0;
    key_clear   = 1'b0;
    dma_restart = 1'b0;
    unique case (state)
      S_IDLE:   if (preempt_req) next = S_DRAIN;
      S_DRAIN:  if (dma_idle && !ice_busy) begin
                  next        = S_SCRUB;
                  scrub_start = 1'b1;
                end
      S_SCRUB:  if (scrub_done) next = S_CLEAR;
      S_CLEAR:  begin
                  key_clear = 1'b1;
                  next      = S_PARKED;
                end
      S_PARKED: if (resume) next = S_REKEY;
      S_REKEY:  if (key_valid) begin
                  dma_restart = 1'b1;
                  next        = S_IDLE;
                end
      default:  next = S_IDLE;
    endcase
  end

  assign dma_stop    = (state != S_IDLE);
  assign preempt_ack = (state == S_PARKED);
  assign active      = (state != S_IDLE);

endmodule
