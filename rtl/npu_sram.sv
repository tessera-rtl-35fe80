// npu_sram: the isolated on-chip NPU SRAM that receives decrypted weights.
//
// SRAM_BYTES (2 MB by default) of 64-byte lines, split into BANKS banks by
// the low bits of the line address (line = {row, bank}). Each bank stores a
// whole line per row plus a memory tag per line, so that:
//   * the ICE writes one 16-byte beat per cycle (w_*), with the line's tag;
//   * the scrub engine zero-fills one row of every bank per cycle (s_*):
//     BANKS * 64 B = 512 B per cycle by default, i.e. 512 GB/s at 1 GHz, and
//     clears the tags; a scrub write wins over an ICE write in the same cycle;
//   * one reader (behind the SMMU firewall) gets a beat and the line's tag
//     one cycle after r_valid.
// Only the name, role and size of this memory come from the architecture;
// banking, tag storage and port widths are this design's choices. The
// arrays are plain SystemVerilog memories (one per bank) that a memory
// compiler macro would replace.
module npu_sram
  import tessera_pkg::*;
#(
  parameter int unsigned SRAM_BYTES = 2097152,
  parameter int unsigned BANKS      = 8,
  localparam int unsigned LINES     = SRAM_BYTES / LINE_BYTES,
  localparam int unsigned LADDR_W   = $clog2(LINES),
  localparam int unsigned ROWS      = LINES / BANKS,
  localparam int unsigned BK_W      = $clog2(BANKS),
  localparam int unsigned ROW_W     = $clog2(ROWS)
) (
  input  logic               clk,
  input  logic               rst_n,
  // ICE write port
  input  logic               w_valid,
  input  logic [LADDR_W-1:0] w_line,
  input  logic [1:0]         w_beat,
  input  block_t             w_data,
  input  logic [MTAG_W-1:0]  w_tag,
  // scrub port: zero one row in all banks
  input  logic               s_valid,
  input  logic [ROW_W-1:0]   s_row,
  // read port
  input  logic               r_valid,
  input  logic [LADDR_W-1:0] r_line,
  input  logic [1:0]         r_beat,
  output logic               r_dvalid,
  output block_t             r_data,
  output logic [MTAG_W-1:0]  r_tag
);

  logic [BANKS-1:0][LINE_BYTES*8-1:0] rd_line;
  logic [BANKS-1:0][MTAG_W-1:0]       rd_tag;
  logic [BK_W-1:0]                    r_bank_q;
  logic [1:0]                         r_beat_q;

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    logic [LINE_BYTES*8-1:0] mem [ROWS];
    logic [MTAG_W-1:0]       tag [ROWS];
    logic                    wr_here;

    assign wr_here = w_valid && (w_line[BK_W-1:0] == BK_W'(b));

    always_ff @(posedge clk) begin
      if (s_valid) begin
        mem[s_row] <= '0;
        tag[s_row] <= '0;
      end else if (wr_here) begin
        mem[w_line[LADDR_W-1:BK_W]][w_beat*DATA_W +: DATA_W] <= w_data;
        tag[w_line[LADDR_W-1:BK_W]] <= w_tag;
      end
      if (r_valid && r_line[BK_W-1:0] == BK_W'(b)) begin
        rd_line[b] <= mem[r_line[LADDR_W-1:BK_W]];
        rd_tag[b]  <= tag[r_line[LADDR_W-1:BK_W]];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_dvalid <= 1'b0;
      r_bank_q <= '0;
      r_beat_q <= '0;
    end else begin
      r_dvalid <= r_valid;
      if (r_valid) begin
        r_bank_q <= r_line[BK_W-1:0];
        r_beat_q <= r_beat;
      end
    end
  end

  assign r_data = rd_line[r_bank_q][r_beat_q*DATA_W +: DATA_W];
  assign r_tag  = rd_tag[r_bank_q];

endmodule
