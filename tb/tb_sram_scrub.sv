// tb_sram_scrub: a start pulse walks every row 0..ROWS-1 exactly once, one
// per cycle, and done pulses once, ROWS cycles after the first row; a start
// while busy is ignored. Run with the default ROWS = 4096 (2 MB in 8 banks).
module tb_sram_scrub;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, s_valid, done;
  logic [11:0] s_row;
  int checks = 0, failures = 0;
  sram_scrub dut (.*);
  task automatic chk(input bit c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask
  int cyc = 0, first = -1, ndone = 0, done_at = -1, exp_row = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (s_valid) begin
      if (first < 0) first = cyc;
      if (s_row != 12'(exp_row)) begin failures++; $display("row %0d expected %0d", s_row, exp_row); end
      exp_row++;
    end
    if (done) begin ndone++; done_at = cyc; end
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    repeat (3) @(negedge clk);
    chk(!busy && !s_valid, "idle");
    start = 1; @(negedge clk); start = 0;
    repeat (100) @(negedge clk);
    start = 1; @(negedge clk); start = 0;     // ignored
    repeat (4100) @(negedge clk);
    chk(exp_row == 4096, $sformatf("rows visited %0d", exp_row));
    chk(ndone == 1, "one done");
    chk(done_at - first == 4096, $sformatf("scrub took %0d cycles", done_at - first));
    chk(!busy, "idle after");
    checks++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
