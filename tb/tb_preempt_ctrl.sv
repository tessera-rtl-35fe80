// tb_preempt_ctrl: the preemption hook runs its steps in the required order:
// DMA stopped first; the scrub starts only once DMA and ICE are idle; the
// key is cleared only after the scrub is done; the OS gets preempt_ack only
// after the clear; after resume the DMA restart waits for the re-provisioned
// key; dma_stop holds throughout and drops with the restart.
module tb_preempt_ctrl;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic preempt_req = 0, resume = 0, dma_idle = 1, ice_busy = 0, scrub_done = 0, key_valid = 1;
  logic dma_stop, scrub_start, key_clear, preempt_ack, dma_restart, active;
  int checks = 0, failures = 0;
  preempt_ctrl dut (.*);
  task automatic chk(input bit c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask
  int cyc = 0, t_scrub = -1, t_clear = -1, t_ack = -1, t_restart = -1, n_scrub = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (scrub_start) begin n_scrub++; t_scrub = cyc; end
    if (key_clear) t_clear = cyc;
    if (preempt_ack && t_ack < 0) t_ack = cyc;
    if (dma_restart) t_restart = cyc;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    chk(!dma_stop && !active, "idle");
    dma_idle = 0; ice_busy = 1;
    preempt_req = 1; @(negedge clk); preempt_req = 0;
    chk(dma_stop, "DMA stopped");
    repeat (10) @(negedge clk);
    chk(t_scrub < 0, "no scrub while lines in flight");
    dma_idle = 1; repeat (3) @(negedge clk);
    chk(t_scrub < 0, "no scrub while ICE busy");
    ice_busy = 0; @(negedge clk);
    chk(t_scrub > 0 && n_scrub == 1, "scrub started once drained");
    repeat (20) @(negedge clk);
    chk(t_clear < 0 && !preempt_ack, "no clear before scrub done");
    scrub_done = 1; @(negedge clk); scrub_done = 0;
    @(negedge clk);
    chk(t_clear > t_scrub, "key cleared after scrub");
    key_valid = 0;
    @(negedge clk);
    chk(preempt_ack && t_ack > t_clear, "ack after clear");
    repeat (10) @(negedge clk);
    chk(preempt_ack && dma_stop, "parked");
    resume = 1; @(negedge clk); resume = 0;
    repeat (10) @(negedge clk);
    chk(t_restart < 0 && dma_stop && !preempt_ack, "restart waits for key");
    key_valid = 1; @(negedge clk);
    chk(t_restart > 0 && !dma_stop && !active, "restart after key");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
