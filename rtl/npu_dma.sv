// npu_dma: the NPU's weight-tile DMA controller, as seen by the ICE.
//
// A tile command gives the physical source address and size in bytes of a
// weight tile in DRAM and the first SRAM line it goes to. The controller
// turns it into one request per 64-byte line it touches, from floor(src/64)
// to floor((src+bytes-1)/64), and nothing more: an aligned tile of T bytes
// fetches exactly ceil(T/64)*64 bytes, an unaligned one at most 63 more
// (no prefetching). Requests go to the ICE with valid/ready; line_done
// pulses from the ICE count completions, and tile_done pulses when every
// line of the tile has been written. tiles cannot overlap: cmd_ready is
// high only when idle. A zero-byte tile completes at once.
// Preemption: while stop is high no new request is issued (lines in flight
// still complete; idle tells when none is left). restart sets the tile back
// to its first line, so the tile is refetched and decrypted again after the
// key is re-provisioned. Cache-line requests, the stop and the restart from
// the tile boundary follow the architecture; the command format is this
// design's choice.
// The six low bits of req_addr are always zero: requests are line-aligned.
module npu_dma
  import tessera_pkg::*;
#(
  parameter int unsigned LADDR_W = 15
) (
  input  logic               clk,
  input  logic               rst_n,
  // tile command
  input  logic               cmd_valid,
  output logic               cmd_ready,
  input  paddr_t             cmd_src,
  input  logic [31:0]        cmd_bytes,
  input  logic [LADDR_W-1:0] cmd_dst_line,
  output logic               tile_done,
  // line requests to the ICE
  output logic               req_valid,
  input  logic               req_ready,
  output paddr_t             req_addr,
  output logic [LADDR_W-1:0] req_line,
  input  logic               line_done,
  // preemption
  input  logic               stop,
  input  logic               restart,
  output logic               idle
);

  localparam int unsigned LSB = $clog2(LINE_BYTES);
  localparam int unsigned LN_W = ADDR_W - LSB;

  logic              run;
  logic [LN_W-1:0]   first_ln;
  logic [LN_W-1:0]   nlines, issued, done_cnt;
  logic [LADDR_W-1:0] dst_q;
  logic [ADDR_W:0]   last_byte;

  assign cmd_ready = !run;
  assign last_byte = {1'b0, cmd_src} + (ADDR_W+1)'(cmd_bytes) - 1'b1;

  assign req_valid = run && !stop && (issued != nlines);
  assign req_addr  = {first_ln + issued, {LSB{1'b0}}};
  assign req_line  = dst_q + LADDR_W'(issued);
  assign idle      = (issued == done_cnt);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run       <= 1'b0;
      first_ln  <= '0;
      nlines    <= '0;
      issued    <= '0;
      done_cnt  <= '0;
      dst_q     <= '0;
      tile_done <= 1'b0;
    end else begin
      tile_done <= 1'b0;
      if (!run) begin
        if (cmd_valid) begin
          if (cmd_bytes == '0) begin
            tile_done <= 1'b1;
          end else begin
            run      <= 1'b1;
            first_ln <= cmd_src[ADDR_W-1:LSB];
            nlines   <= LN_W'(last_byte[ADDR_W-1:LSB] - {1'b0, cmd_src[ADDR_W-1:LSB]} + 1'b1);
            dst_q    <= cmd_dst_line;
          end
          issued   <= '0;
          done_cnt <= '0;
        end
      end else if (restart) begin
        issued   <= '0;
        done_cnt <= '0;
      end else begin
        if (req_valid && req_ready) issued <= issued + 1'b1;
        if (line_done) begin
          done_cnt <= done_cnt + 1'b1;
          if (done_cnt + 1'b1 == nlines && issued == nlines) begin
            run       <= 1'b0;
            tile_done <= 1'b1;
          end
        end
      end
    end
  end

`ifndef SYNTHESIS
  a_restart_idle: assert property (@(posedge clk) disable iff (!rst_n)
    restart |-> idle);
`endif

endmodule
