// tessera_top: the complete weight-streaming path of a UMA edge NPU.
//
// Encrypted weights stay in shared DRAM; the NPU DMA asks for tiles line by
// line; the inline crypto engine (ICE) reads each 64-byte line over AXI and,
// in parallel, computes its AES-256-CTR keystream from the line address, so
// that the plaintext written into the isolated NPU SRAM costs only one extra
// cycle (the XOR) over a plain fetch. Reads of that SRAM pass an SMMU-style
// stream-ID and tag firewall. A preemption hook drains the datapath, scrubs
// the SRAM, clears the key and, on resume, restarts the tile once the secure
// enclave has re-provisioned the key.
//
// Outside this module: the DRAM controller (AXI read channels m_*), the
// secure enclave (prov_* key bus), the OS scheduler (preempt/resume/ack) and
// the masters that read the SRAM (acc_*), including the NPU compute units.
// The status pulses (ks_stall, slot_stall, key_stall, deny_*, rd_err) count
// the design's stall and protection events; npu_sid shows the stream ID the
// firewall currently lets through, which only a secure-world write changes.
// m_arlen, m_arsize, m_arburst and the six low bits of m_araddr are
// constant on purpose: every DRAM read is one line-aligned INCR burst of four
// 16-byte beats.
module tessera_top
  import tessera_pkg::*;
#(
  parameter int unsigned      SLOTS      = 64,
  parameter int unsigned      SRAM_BYTES = 2097152,
  parameter int unsigned      BANKS      = 8,
  parameter logic [SID_W-1:0] NPU_SID    = 8'h10,
  parameter logic [MTAG_W-1:0] PLAIN_TAG = 4'hA,
  localparam int unsigned     SW         = $clog2(SLOTS),
  localparam int unsigned     LINES      = SRAM_BYTES / LINE_BYTES,
  localparam int unsigned     LADDR_W    = $clog2(LINES),
  localparam int unsigned     ROWS       = LINES / BANKS,
  localparam int unsigned     A_W        = $clog2(SRAM_BYTES) + 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // tile commands from the NPU
  input  logic               cmd_valid,
  output logic               cmd_ready,
  input  paddr_t             cmd_src,
  input  logic [31:0]        cmd_bytes,
  input  logic [LADDR_W-1:0] cmd_dst_line,
  output logic               tile_done,
  // AXI read master to the DRAM controller
  output logic               m_arvalid,
  input  logic               m_arready,
  output paddr_t             m_araddr,
  output logic [SW-1:0]      m_arid,
  output logic [7:0]         m_arlen,
  output logic [2:0]         m_arsize,
  output logic [1:0]         m_arburst,
  input  logic               m_rvalid,
  output logic               m_rready,
  input  logic [SW-1:0]      m_rid,
  input  block_t             m_rdata,
  input  logic [1:0]         m_rresp,
  input  logic               m_rlast,
  // secure on-die key bus from the enclave
  input  logic               prov_valid,
  input  key_t               prov_key,
  input  iv_t                prov_iv,
  output logic               key_valid,
  // preemption hook
  input  logic               preempt_req,
  input  logic               resume,
  output logic               preempt_ack,
  output logic               preempt_active,
  // firewall configuration (secure world only) and SRAM access port
  input  logic               cfg_valid,
  input  logic               cfg_ns,
  input  logic [SID_W-1:0]   cfg_sid,
  output logic               cfg_err,
  input  logic               acc_valid,
  input  logic [SID_W-1:0]   acc_sid,
  input  logic [A_W-1:0]     acc_addr,
  input  logic [MTAG_W-1:0]  acc_tag,
  output logic               acc_rsp_valid,
  output axi_resp_e          acc_rsp_resp,
  output block_t             acc_rsp_data,
  // status
  output logic               ks_stall,
  output logic               slot_stall,
  output logic               key_stall,
  output logic               deny_sid,
  output logic               deny_tag,
  output logic               rd_err,
  output logic [SW:0]        ks_lines,
  output logic               scrub_busy,
  output logic [SID_W-1:0]   npu_sid
);

  // DMA <-> ICE
  logic               req_valid, req_ready, line_done;
  paddr_t             req_addr;
  logic [LADDR_W-1:0] req_line;
  // ICE -> SRAM
  logic               w_valid;
  logic [LADDR_W-1:0] w_line;
  logic [1:0]         w_beat;
  block_t             w_data;
  logic [MTAG_W-1:0]  w_tag;
  // preemption
  logic               dma_stop, dma_restart, dma_idle, ice_busy;
  logic               scrub_start, scrub_done, key_clear;
  logic               s_valid;
  logic [$clog2(ROWS)-1:0] s_row;
  // firewall <-> SRAM
  logic               r_valid, r_dvalid;
  logic [LADDR_W-1:0] r_line;
  logic [1:0]         r_beat;
  block_t             r_data;
  logic [MTAG_W-1:0]  r_tag;

  npu_dma #(.LADDR_W(LADDR_W)) u_dma (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd_src, .cmd_bytes, .cmd_dst_line, .tile_done,
    .req_valid, .req_ready, .req_addr, .req_line, .line_done,
    .stop(dma_stop), .restart(dma_restart), .idle(dma_idle)
  );

  ice #(.SLOTS(SLOTS), .LADDR_W(LADDR_W), .PLAIN_TAG(PLAIN_TAG)) u_ice (
    .clk, .rst_n,
    .prov_valid, .prov_key, .prov_iv, .key_clear, .key_valid,
    .req_valid, .req_ready, .req_addr, .req_line,
    .m_arvalid, .m_arready, .m_araddr, .m_arid, .m_arlen, .m_arsize, .m_arburst,
    .m_rvalid, .m_rready, .m_rid, .m_rdata, .m_rresp, .m_rlast,
    .w_valid, .w_line, .w_beat, .w_data, .w_tag, .line_done,
    .busy(ice_busy), .ks_lines, .ks_stall, .slot_stall, .rd_err
  );

  assign key_stall = req_valid && !key_valid;

  npu_sram #(.SRAM_BYTES(SRAM_BYTES), .BANKS(BANKS)) u_sram (
    .clk, .rst_n,
    .w_valid, .w_line, .w_beat, .w_data, .w_tag,
    .s_valid, .s_row,
    .r_valid, .r_line, .r_beat, .r_dvalid, .r_data, .r_tag
  );

  sram_scrub #(.ROWS(ROWS)) u_scrub (
    .clk, .rst_n, .start(scrub_start), .busy(scrub_busy),
    .s_valid, .s_row, .done(scrub_done)
  );

  preempt_ctrl u_preempt (
    .clk, .rst_n, .preempt_req, .resume,
    .dma_idle, .ice_busy, .scrub_done, .key_valid,
    .dma_stop, .scrub_start, .key_clear, .preempt_ack, .dma_restart,
    .active(preempt_active)
  );

  smmu_firewall #(.SRAM_BYTES(SRAM_BYTES), .NPU_SID(NPU_SID)) u_fw (
    .clk, .rst_n,
    .cfg_valid, .cfg_ns, .cfg_sid, .cfg_err, .npu_sid,
    .a_valid(acc_valid), .a_sid(acc_sid), .a_addr(acc_addr), .a_tag(acc_tag),
    .rsp_valid(acc_rsp_valid), .rsp_resp(acc_rsp_resp), .rsp_data(acc_rsp_data),
    .deny_sid, .deny_tag,
    .r_valid, .r_line, .r_beat, .r_dvalid, .r_data, .r_tag
  );

endmodule
