// tb_npu_sram: at the full 2 MB size, beats written to random lines in all
// banks read back (one cycle later) with their tags, partial writes of a
// line keep the other beats, and a scrub of one row zeroes that row in every
// bank (data and tag) and leaves other rows alone. A scrub write wins over a
// write in the same cycle.
module tb_npu_sram;
  import tessera_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic w_valid = 0, s_valid = 0, r_valid = 0, r_dvalid;
  logic [14:0] w_line = '0, r_line = '0; logic [1:0] w_beat = '0, r_beat = '0;
  block_t w_data = '0, r_data; logic [3:0] w_tag = '0, r_tag; logic [11:0] s_row = '0;
  int checks = 0, failures = 0;
  npu_sram dut (.*);
  task automatic chk(input bit c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask
  block_t model [int]; logic [3:0] tmodel [int];
  task automatic wr(input int line, input int beat, input block_t d, input logic [3:0] t);
    w_valid = 1; w_line = 15'(line); w_beat = 2'(beat); w_data = d; w_tag = t;
    @(negedge clk); w_valid = 0;
    model[line*4+beat] = d; tmodel[line] = t;
  endtask
  task automatic rd_chk(input int line, input int beat, input string s);
    r_valid = 1; r_line = 15'(line); r_beat = 2'(beat);
    @(negedge clk); r_valid = 0;
    chk(r_dvalid, "read valid");
    chk(r_data == (model.exists(line*4+beat) ? model[line*4+beat] : '0) &&
        r_tag == (tmodel.exists(line) ? tmodel[line] : 4'h0), $sformatf("%s line %0d beat %0d", s, line, beat));
  endtask
  initial begin #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  int lines [$];
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    // zero the rows used below (the array has random power-up contents)
    for (int i = 0; i < 40; i++) begin
      int l; l = (i < 32) ? i : $urandom_range(0, 32767);
      lines.push_back(l);
      s_valid = 1; s_row = 12'(l >> 3); @(negedge clk);
    end
    s_valid = 0;
    foreach (lines[i]) for (int b = 0; b < 4; b++)
      wr(lines[i], b, {$urandom, $urandom, $urandom, $urandom}, 4'($urandom_range(1, 15)));
    foreach (lines[i]) for (int b = 0; b < 4; b++) rd_chk(lines[i], b, "readback");
    wr(5, 2, 128'h1234, 4'h3);
    rd_chk(5, 1, "partial write keeps beat 1"); rd_chk(5, 2, "partial write");
    // scrub row 1 (lines 8..15) while line 9 is written in the same cycle
    s_valid = 1; s_row = 12'd1; w_valid = 1; w_line = 15'd9; w_beat = 0; w_data = '1; w_tag = 4'hf;
    @(negedge clk); s_valid = 0; w_valid = 0;
    for (int l = 8; l < 16; l++) begin
      for (int b = 0; b < 4; b++) model.delete(l*4+b);
      tmodel.delete(l);
    end
    for (int l = 0; l < 24; l++) for (int b = 0; b < 4; b++) rd_chk(l, b, "after row scrub");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
