// tb_ice_ks_buffer: allocation hands out the lowest free slot until all 64
// are taken (then alloc_gnt drops), keystream blocks read back with their
// present bits, metadata follows the slot, free releases a slot and clears
// its present bits, and used_cnt / empty track the occupancy.
module tb_ice_ks_buffer;
  import tessera_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic alloc_req = 0, alloc_gnt, wr_valid = 0, rd_present, free_valid = 0, empty;
  logic [5:0] alloc_slot, wr_slot = '0, rd_slot = '0, free_slot = '0;
  logic [14:0] alloc_meta = '0, rd_meta;
  logic [1:0] wr_blk = '0, rd_blk = '0;
  block_t wr_data = '0, rd_data;
  logic [6:0] used_cnt;
  int checks = 0, failures = 0;
  ice_ks_buffer #(.SLOTS(64), .META_W(15)) dut (.*);
  task automatic chk(input bit c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask
  function automatic block_t pat(input int s, input int b);
    return {32'(s), 32'(b), 32'h5a5a0000 + 32'(s*4+b), ~32'(s)};
  endfunction
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    chk(empty && used_cnt == 0, "empty at reset");
    for (int i = 0; i < 64; i++) begin
      chk(alloc_gnt && alloc_slot == 6'(i), $sformatf("alloc %0d", i));
      alloc_req = 1; alloc_meta = 15'(1000 + i);
      @(negedge clk);
    end
    alloc_req = 0;
    chk(!alloc_gnt && used_cnt == 64, "full");
    for (int s = 0; s < 64; s++) for (int b = 0; b < 4; b++) begin
      rd_slot = 6'(s); rd_blk = 2'(b); #1;
      chk(!rd_present, "not present before write");
      wr_valid = 1; wr_slot = 6'(s); wr_blk = 2'(b); wr_data = pat(s, b);
      @(negedge clk);
    end
    wr_valid = 0;
    for (int s = 0; s < 64; s++) for (int b = 0; b < 4; b++) begin
      rd_slot = 6'(s); rd_blk = 2'(b); #1;
      chk(rd_present && rd_data == pat(s, b) && rd_meta == 15'(1000 + s), "read back");
    end
    @(negedge clk); free_valid = 1; free_slot = 6'd17; @(negedge clk); free_valid = 0;
    rd_slot = 17; rd_blk = 0; #1;
    chk(alloc_gnt && alloc_slot == 17 && !rd_present && used_cnt == 63, "freed slot reused");
    for (int s = 0; s < 64; s++) if (s != 17) begin
      free_valid = 1; free_slot = 6'(s); @(negedge clk);
    end
    free_valid = 0;
    chk(empty && used_cnt == 0, "empty after frees");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
