// smmu_firewall: stream-ID firewall and tag check in front of the NPU SRAM.
//
// Every access to the plaintext SRAM from outside the ICE (host CPU, other
// DMA masters, the NPU's own compute) arrives here with its SMMU stream ID
// and memory tag. One access per cycle, answered one cycle later:
//   * address beyond the SRAM window        -> DECERR, SRAM not touched;
//   * stream ID other than the NPU's        -> SLVERR, SRAM not touched;
//   * NPU stream ID, but the line carries a
//     non-zero (restricted) tag that differs
//     from the access tag                    -> SLVERR, data forced to zero;
//   * otherwise                              -> OKAY with the data.
// The NPU stream ID is a configuration register that only a secure-world
// write (cfg_ns = 0, AxPROT[1] = 0) may change; a non-secure write is
// refused and pulses cfg_err. Stream-ID isolation with a bus abort, secure-
// only configuration and the restricted tag on plaintext follow the
// architecture; the single-register configuration, the reset stream ID and
// the tag rule (tag 0 = unrestricted) are this design's choices. Only reads
// are modelled: writes into the SRAM come from the ICE and the scrub engine.
// The SRAM read address (r_line, r_beat) is the access address wired
// through; only r_valid, which is gated by the checks, decides whether the
// SRAM is read.
module smmu_firewall
  import tessera_pkg::*;
#(
  parameter int unsigned       SRAM_BYTES = 2097152,
  parameter logic [SID_W-1:0]  NPU_SID    = 8'h10,
  localparam int unsigned      LINES      = SRAM_BYTES / LINE_BYTES,
  localparam int unsigned      LADDR_W    = $clog2(LINES),
  localparam int unsigned      A_W        = $clog2(SRAM_BYTES) + 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // configuration (TrustZone-protected)
  input  logic               cfg_valid,
  input  logic               cfg_ns,
  input  logic [SID_W-1:0]   cfg_sid,
  output logic               cfg_err,
  output logic [SID_W-1:0]   npu_sid,
  // access port
  input  logic               a_valid,
  input  logic [SID_W-1:0]   a_sid,
  input  logic [A_W-1:0]     a_addr,
  input  logic [MTAG_W-1:0]  a_tag,
  output logic               rsp_valid,
  output axi_resp_e          rsp_resp,
  output block_t             rsp_data,
  output logic               deny_sid,
  output logic               deny_tag,
  // SRAM read port
  output logic               r_valid,
  output logic [LADDR_W-1:0] r_line,
  output logic [1:0]         r_beat,
  input  logic               r_dvalid,
  input  block_t             r_data,
  input  logic [MTAG_W-1:0]  r_tag
);

  logic        in_range, sid_ok;
  logic        pend_q;
  axi_resp_e   early_q;
  logic [MTAG_W-1:0] tag_q;
  logic        tag_bad;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                    npu_sid <= NPU_SID;
    else if (cfg_valid && !cfg_ns) npu_sid <= cfg_sid;
  end
  assign cfg_err = cfg_valid && cfg_ns;

  assign in_range = (a_addr < A_W'(SRAM_BYTES));
  assign sid_ok   = (a_sid == npu_sid);
  assign r_valid  = a_valid && in_range && sid_ok;
  assign r_line   = a_addr[$clog2(LINE_BYTES) +: LADDR_W];
  assign r_beat   = a_addr[$clog2(BEAT_BYTES) +: 2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend_q  <= 1'b0;
      early_q <= RESP_OKAY;
      tag_q   <= '0;
    end else begin
      pend_q  <= a_valid;
      early_q <= !in_range ? RESP_DECERR : (!sid_ok ? RESP_SLVERR : RESP_OKAY);
      tag_q   <= a_tag;
    end
  end

  assign tag_bad   = r_dvalid && (r_tag != '0) && (r_tag != tag_q);
  assign rsp_valid = pend_q;
  assign deny_sid  = pend_q && (early_q == RESP_SLVERR);
  assign deny_tag  = pend_q && (early_q == RESP_OKAY) && tag_bad;

  always_comb begin
    rsp_resp = early_q;
    rsp_data = '0;
    if (pend_q && early_q == RESP_OKAY) begin
      if (tag_bad) rsp_resp = RESP_SLVERR;
      else         rsp_data = r_data;
    end
  end

endmodule
