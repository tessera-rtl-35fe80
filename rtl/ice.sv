// ice: the Inline Crypto Engine, interposed between the NPU DMA and DRAM.
//
// Per 64-byte line (the four stages of the per-line decrypt):
//   1. Intercept: a line request (physical address, SRAM destination line)
//      is accepted when the session key is loaded, a keystream slot is free
//      and the AXI read register is free. In the same cycle a slot is
//      allocated and the AXI read (ARLEN = 3: four 16-byte beats, ARID = slot)
//      is registered towards DRAM.
//   2. Keystream in parallel with the fetch: ice_ctr_gen forms
//      CTR(P) = IV_base || floor(P/64) one cycle later; the four AES input
//      blocks of the line are CTR(P) with the beat number j XORed into the two
//      lowest nonce bits (bits 33:32 of the block), fed one per cycle into the
//      14-stage AES-256 pipeline; the outputs are stored in the slot.
//   3. XOR: each returning beat (matched by RID = slot, beats counted per
//      slot) is XORed with its keystream block. If the block is not there yet
//      the beat is held with RREADY low and ks_stall pulses.
//   4. Write: plaintext goes to the SRAM write port one cycle after the beat
//      is taken, tagged with the restricted memory tag; line_done pulses with
//      the last beat and the slot is released.
// Sustained rate: one line every four cycles, one 16-byte beat per cycle.
// The address-derived counter, the 1-cycle counter stage, the pipelined AES,
// the 1-cycle XOR and the 4 KB buffer follow the architecture. The 128-bit
// bus, the ID-per-slot scheme and the way the four blocks of a line get
// distinct counters are this design's choices (the architecture defines
// one 128-bit counter per line and does not say how a 64-byte line's four
// AES blocks are told apart). A read response error is passed on as
// rd_err; the data is still written. ks_lines is the number of keystream
// slots in use (lines in flight).
// Constant outputs, on purpose: ARLEN, ARSIZE, ARBURST (every read is one
// INCR burst of four 16-byte beats), the six low ARADDR bits (reads are
// line-aligned) and the plaintext tag w_tag.
module ice
  import tessera_pkg::*;
#(
  parameter int unsigned SLOTS   = 64,
  parameter int unsigned LADDR_W = 15,
  parameter logic [MTAG_W-1:0] PLAIN_TAG = 4'hA,
  localparam int unsigned SW     = $clog2(SLOTS)
) (
  input  logic               clk,
  input  logic               rst_n,
  // key provisioning (secure on-die bus) and clearing
  input  logic               prov_valid,
  input  key_t               prov_key,
  input  iv_t                prov_iv,
  input  logic               key_clear,
  output logic               key_valid,
  // line requests from the NPU DMA
  input  logic               req_valid,
  output logic               req_ready,
  input  paddr_t             req_addr,
  input  logic [LADDR_W-1:0] req_line,
  // AXI read address channel to the DRAM controller
  output logic               m_arvalid,
  input  logic               m_arready,
  output paddr_t             m_araddr,
  output logic [SW-1:0]      m_arid,
  output logic [7:0]         m_arlen,
  output logic [2:0]         m_arsize,
  output logic [1:0]         m_arburst,
  // AXI read data channel from the DRAM controller
  input  logic               m_rvalid,
  output logic               m_rready,
  input  logic [SW-1:0]      m_rid,
  input  block_t             m_rdata,
  input  logic [1:0]         m_rresp,
  input  logic               m_rlast,
  // plaintext write port to the NPU SRAM
  output logic               w_valid,
  output logic [LADDR_W-1:0] w_line,
  output logic [1:0]         w_beat,
  output block_t             w_data,
  output logic [MTAG_W-1:0]  w_tag,
  output logic               line_done,
  // status
  output logic               busy,
  output logic [SW:0]        ks_lines,
  output logic               ks_stall,
  output logic               slot_stall,
  output logic               rd_err
);

  rkeys_t rkeys;
  iv_t    iv_base;

  ice_key_regs u_keys (
    .clk, .rst_n, .prov_valid, .prov_key, .prov_iv, .key_clear,
    .key_valid, .rkeys, .iv_base
  );

  // ------------------------------------------------ stage 1: intercept
  logic          alloc_gnt;
  logic [SW-1:0] alloc_slot;
  logic          ctr_in_ready;
  logic          ar_free;
  logic          accept;

  assign ar_free   = !m_arvalid || m_arready;
  assign req_ready = key_valid && alloc_gnt && ctr_in_ready && ar_free;
  assign accept    = req_valid && req_ready;
  assign slot_stall = req_valid && key_valid && !alloc_gnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_arvalid <= 1'b0;
      m_araddr  <= '0;
      m_arid    <= '0;
    end else if (ar_free) begin
      m_arvalid <= accept;
      if (accept) begin
        m_araddr <= {req_addr[ADDR_W-1:6], 6'b0};
        m_arid   <= alloc_slot;
      end
    end
  end
  assign m_arlen   = 8'(BEATS - 1);
  assign m_arsize  = 3'($clog2(BEAT_BYTES));
  assign m_arburst = 2'b01;   // INCR

  // ------------------------------------------------ stage 2: keystream
  logic          ctr_valid, ctr_ready;
  block_t        ctr;
  logic [SW-1:0] ctr_slot;
  logic [1:0]    blk_cnt;

  ice_ctr_gen #(.TAG_W(SW)) u_ctr (
    .clk, .rst_n, .iv_base,
    .in_valid(accept), .in_ready(ctr_in_ready), .in_addr(req_addr), .in_tag(alloc_slot),
    .out_valid(ctr_valid), .out_ready(ctr_ready), .out_ctr(ctr), .out_tag(ctr_slot)
  );

  assign ctr_ready = ctr_valid && (blk_cnt == 2'd3);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         blk_cnt <= '0;
    else if (ctr_valid) blk_cnt <= blk_cnt + 2'd1;
  end

  block_t        aes_in;
  logic          ks_valid;
  block_t        ks_block;
  logic [SW+1:0] ks_tag;

  always_comb begin
    aes_in = ctr;
    aes_in[IDX_W +: 2] = ctr[IDX_W +: 2] ^ blk_cnt;
  end

  aes256_pipe #(.TAG_W(SW + 2)) u_aes (
    .clk, .rst_n, .rkeys,
    .in_valid(ctr_valid), .in_block(aes_in), .in_tag({ctr_slot, blk_cnt}),
    .out_valid(ks_valid), .out_block(ks_block), .out_tag(ks_tag)
  );

  // ------------------------------------------------ keystream buffer
  logic [SLOTS-1:0][1:0] rbeat;
  block_t                ks_rd;
  logic                  ks_present;
  logic [LADDR_W-1:0]    rd_line;
  logic                  r_take;
  logic                  free_valid;
  logic                  buf_empty;

  ice_ks_buffer #(.SLOTS(SLOTS), .META_W(LADDR_W)) u_buf (
    .clk, .rst_n,
    .alloc_req(accept), .alloc_gnt, .alloc_slot, .alloc_meta(req_line),
    .wr_valid(ks_valid), .wr_slot(ks_tag[SW+1:2]), .wr_blk(ks_tag[1:0]), .wr_data(ks_block),
    .rd_slot(m_rid), .rd_blk(rbeat[m_rid]), .rd_data(ks_rd), .rd_present(ks_present),
    .rd_meta(rd_line),
    .free_valid, .free_slot(m_rid),
    .used_cnt(ks_lines), .empty(buf_empty)
  );

  // ------------------------------------------------ stage 3: XOR
  assign m_rready   = ks_present;
  assign r_take     = m_rvalid && m_rready;
  assign ks_stall   = m_rvalid && !ks_present;
  assign free_valid = r_take && m_rlast;
  assign rd_err     = r_take && (m_rresp != RESP_OKAY);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      rbeat <= '0;
    else if (r_take) rbeat[m_rid] <= m_rlast ? 2'd0 : rbeat[m_rid] + 2'd1;
  end

  ice_xor_stage #(.LADDR_W(LADDR_W)) u_xor (
    .clk, .rst_n,
    .in_valid(r_take), .in_cipher(m_rdata), .in_ks(ks_rd),
    .in_line(rd_line), .in_beat(rbeat[m_rid]), .in_last(m_rlast),
    .out_valid(w_valid), .out_plain(w_data), .out_line(w_line), .out_beat(w_beat),
    .out_last(line_done)
  );
  assign w_tag = PLAIN_TAG;

  assign busy = !buf_empty || m_arvalid || ctr_valid || w_valid;

`ifndef SYNTHESIS
  // AXI: an address held valid must stay stable until taken
  a_ar_stable: assert property (@(posedge clk) disable iff (!rst_n)
    m_arvalid && !m_arready |=> m_arvalid && $stable(m_araddr) && $stable(m_arid));
  // the session key must not be cleared while lines are in flight
  a_clear_idle: assert property (@(posedge clk) disable iff (!rst_n)
    key_clear |-> buf_empty);
`endif

endmodule
