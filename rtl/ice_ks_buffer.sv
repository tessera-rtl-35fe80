// ice_ks_buffer: keystream buffer of the ICE (4 KB: 64 lines of 64 B).
//
// Keystream is generated ahead of the ciphertext and must wait here until the
// matching burst comes back from DRAM. Each outstanding line read owns one
// slot, allocated when the ICE accepts the request (alloc) and released after
// the last beat of its burst has been decrypted (free). The slot number is
// used as the AXI read ID towards DRAM, so bursts may return in any order and
// still meet their own keystream: a plain first-in first-out queue would
// pair keystream with the wrong line if the memory controller reordered
// reads. The 4 KB size follows the architecture; indexing by slot instead of
// a strict FIFO order is this design's choice.
//
// Interface:
//   alloc    alloc_gnt is high while a slot is free, alloc_slot is the lowest
//            free one; alloc_req takes it (and stores alloc_meta, the SRAM
//            destination line) at the clock edge.
//   write    one 128-bit keystream block per cycle: (wr_slot, wr_blk).
//   read     combinational: rd_data / rd_present / rd_meta for (rd_slot,
//            rd_blk). rd_present is low until that block has been written.
//   free     free_valid releases free_slot and clears its present bits.
// used_cnt counts allocated slots; empty is high when none is.
module ice_ks_buffer
  import tessera_pkg::*;
#(
  parameter int unsigned SLOTS  = 64,
  parameter int unsigned META_W = 15,
  localparam int unsigned SW    = $clog2(SLOTS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              alloc_req,
  output logic              alloc_gnt,
  output logic [SW-1:0]     alloc_slot,
  input  logic [META_W-1:0] alloc_meta,
  input  logic              wr_valid,
  input  logic [SW-1:0]     wr_slot,
  input  logic [1:0]        wr_blk,
  input  block_t            wr_data,
  input  logic [SW-1:0]     rd_slot,
  input  logic [1:0]        rd_blk,
  output block_t            rd_data,
  output logic              rd_present,
  output logic [META_W-1:0] rd_meta,
  input  logic              free_valid,
  input  logic [SW-1:0]     free_slot,
  output logic [SW:0]       used_cnt,
  output logic              empty
);

  block_t              mem   [SLOTS*4];
  logic [META_W-1:0]   meta  [SLOTS];
  logic [SLOTS-1:0]    used;
  logic [SLOTS*4-1:0]  present;

  // lowest free slot
  always_comb begin
    alloc_gnt  = 1'b0;
    alloc_slot = '0;
    for (int i = SLOTS - 1; i >= 0; i--) begin
      if (!used[i]) begin
        alloc_gnt  = 1'b1;
        alloc_slot = SW'(i);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (wr_valid) mem[{wr_slot, wr_blk}] <= wr_data;
    if (alloc_req && alloc_gnt) meta[alloc_slot] <= alloc_meta;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      used    <= '0;
      present <= '0;
    end else begin
      if (free_valid) begin
        used[free_slot] <= 1'b0;
        present[{free_slot, 2'd0} +: 4] <= 4'b0;
      end
      if (alloc_req && alloc_gnt) used[alloc_slot] <= 1'b1;
      if (wr_valid) present[{wr_slot, wr_blk}] <= 1'b1;
    end
  end

  assign rd_data    = mem[{rd_slot, rd_blk}];
  assign rd_present = present[{rd_slot, rd_blk}];
  assign rd_meta    = meta[rd_slot];
  assign empty      = (used == '0);

  always_comb begin
    used_cnt = '0;
    for (int i = 0; i < SLOTS; i++) used_cnt += (SW+1)'(used[i]);
  end

`ifndef SYNTHESIS
  // a block is written only into an allocated slot, and only once
  a_wr_used: assert property (@(posedge clk) disable iff (!rst_n)
    wr_valid |-> used[wr_slot] && !present[{wr_slot, wr_blk}]);
  a_free_used: assert property (@(posedge clk) disable iff (!rst_n)
    free_valid |-> used[free_slot]);
`endif

endmodule
