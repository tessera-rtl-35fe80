// tb_npu_dma: tiles of the sizes of the layer types in the bandwidth study
// (128, 288, 512, 1024, 2048, 4096 B) and odd sizes, aligned and unaligned,
// are split into line requests; the number of lines must be
// floor((src+T-1)/64) - floor(src/64) + 1 (ceil(T/64) when aligned), the
// addresses consecutive lines, the SRAM lines consecutive from the
// destination, and tile_done must pulse once after the last completion.
// The ICE is modelled by a ready that drops at random and completions that
// come back after a random delay. Also: no request while stop is high, idle
// tracks outstanding lines, restart refetches the tile from its first line,
// and a zero-byte tile completes at once.
module tb_npu_dma;
  import tessera_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cmd_valid = 0, cmd_ready, tile_done, req_valid, req_ready = 0, line_done = 0;
  logic stop = 0, restart = 0, idle;
  paddr_t cmd_src = '0, req_addr; logic [31:0] cmd_bytes = '0;
  logic [14:0] cmd_dst_line = '0, req_line;
  int checks = 0, failures = 0;
  npu_dma dut (.*);
  task automatic chk(input bit c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask

  // ICE model
  int pend_done [$];
  int reqs = 0, dones = 0, n_tile_done = 0;
  paddr_t exp_addr; logic [14:0] exp_line;
  always @(posedge clk) if (rst_n) begin
    if (req_valid && req_ready) begin
      chk(!stop, "request while stopped");
      chk(req_addr == exp_addr && req_line == exp_line, $sformatf("req %h line %0d", req_addr, req_line));
      exp_addr = exp_addr + 64; exp_line = exp_line + 1;
      reqs++;
      pend_done.push_back($urandom_range(1, 30));
    end
    line_done <= 0;
    foreach (pend_done[i]) pend_done[i]--;
    if (pend_done.size() > 0 && pend_done[0] <= 0) begin
      void'(pend_done.pop_front()); line_done <= 1; dones++;
    end
    req_ready <= ($urandom_range(0, 3) != 0);
    if (tile_done) n_tile_done++;
  end

  initial begin #2000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic run_tile(input paddr_t src, input int bytes, input int dst);
    int exp_n, r0, t0;
    exp_n = int'((src + 40'(bytes) - 1) / 64 - src / 64 + 1);
    exp_addr = {src[39:6], 6'b0}; exp_line = 15'(dst);
    r0 = reqs; t0 = n_tile_done;
    wait (cmd_ready); @(negedge clk);
    cmd_valid = 1; cmd_src = src; cmd_bytes = 32'(bytes); cmd_dst_line = 15'(dst);
    @(negedge clk); cmd_valid = 0;
    wait (n_tile_done == t0 + 1);
    @(negedge clk);
    chk(reqs - r0 == exp_n, $sformatf("tile %0d B at %h: %0d lines, expected %0d", bytes, src, reqs - r0, exp_n));
    chk(idle && cmd_ready && pend_done.size() == 0, "idle after tile");
    if (src[5:0] == 0) chk(exp_n * 64 == ((bytes + 63) / 64) * 64, "aligned: ceil(T/64) lines");
  endtask

  initial begin
    int sizes [6] = '{128, 288, 512, 1024, 2048, 4096};
    repeat (2) @(negedge clk); rst_n = 1;
    foreach (sizes[i]) begin
      run_tile(40'h10_0000_0000 + 40'(i) * 40'h1_0000, sizes[i], 100 * i);
      run_tile(40'h10_0000_0000 + 40'(i) * 40'h1_0000 + 40'($urandom_range(1, 63)), sizes[i], 100 * i + 3);
    end
    run_tile(40'h20_0000_0010, 1, 7);
    run_tile(40'h20_0000_003f, 2, 9);
    // zero-byte tile
    @(negedge clk); cmd_valid = 1; cmd_bytes = 0; @(negedge clk); cmd_valid = 0;
    chk(tile_done, "zero-byte tile done at once");
    // stop and restart in the middle of a 4 KB tile
    begin
      int t0, r_at_stop, r_before;
      @(negedge clk); t0 = n_tile_done; r_before = reqs;
      exp_addr = 40'h30_0000_0000; exp_line = 15'd500;
      @(negedge clk);
      cmd_valid = 1; cmd_src = 40'h30_0000_0000; cmd_bytes = 4096; cmd_dst_line = 500;
      @(negedge clk); cmd_valid = 0;
      wait (reqs - r_before >= 20);
      @(negedge clk); stop = 1;
      r_at_stop = reqs;
      repeat (50) @(negedge clk);
      chk(reqs == r_at_stop || reqs == r_at_stop + 1, "no requests while stopped");
      chk(idle, "idle once the in-flight lines completed");
      chk(n_tile_done == t0, "tile not done while stopped");
      restart = 1; exp_addr = 40'h30_0000_0000; exp_line = 15'd500; r_before = reqs;
      @(negedge clk); restart = 0; stop = 0;
      wait (n_tile_done == t0 + 1);
      @(negedge clk);
      chk(reqs - r_before == 64, $sformatf("whole tile refetched after restart (%0d)", reqs - r_before));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
