// tb_workload_preempt: the preemption hook on the three NPU configurations
// of the preemption-latency study, each a full design instance.
//
//   platform            SRAM    SRAM scrub bandwidth   instance
//   i9-12900H iGPU L2   2 MB    512 GB/s               SRAM_BYTES 2 MB, 8 banks
//   Jetson Xavier DLA   4 MB    480 GB/s               SRAM_BYTES 4 MB, 8 banks
//   Jetson Orin DLA     4 MB    960 GB/s               SRAM_BYTES 4 MB, 16 banks
//
// The scrub engine clears one 64-byte line per bank per cycle, so a
// configuration's bandwidth fixes the clock at which its bank count gives
// that bandwidth: f = BW / (BANKS * 64 B), i.e. 1.0, 0.9375 and 0.9375 GHz.
// For each instance the test streams part of a 16 KB tile, raises the
// preemption request, and checks:
//   * the hook takes drain + SRAM_BYTES / (BANKS * 64) scrub cycles + a few;
//   * every scrub row was written once and sampled SRAM lines (and all the
//     lines of the tile) read back zero;
//   * the key is gone at the acknowledge, the restart waits for the key, and
//     the refetched tile is correct after the key is provisioned again;
//   * T_preempt = scrub cycles / f + 1.5 us (state save, a software cost
//     outside this design) is within 5% of the study's 5.4 / 9.8 / 5.7 us,
//     and the whole hook, drain included, within 8%. The study counts MB as
//     10^6 bytes; the SRAM here is a power of two (2^20 bytes per MB), which
//     makes the scrub 3-5% longer. The drain, which depends on the DRAM
//     latency of the lines in flight, adds about 0.1 us.
module tb_workload_preempt;
  import tessera_pkg::*;
  import aes_ref_pkg::*;

  localparam int NP = 3;
  localparam int unsigned SB [NP] = '{2097152, 4194304, 4194304};
  localparam int unsigned BK [NP] = '{8, 8, 16};
  localparam real BW_GBS [NP] = '{512.0, 480.0, 960.0};
  localparam real T_PAPER [NP] = '{5.4, 9.8, 5.7};
  localparam string NAME [NP] = '{"i9-12900H iGPU L2", "Jetson AGX Xavier DLA", "Jetson AGX Orin DLA"};

  localparam logic [255:0] KEY = 256'h8d2e60365f17c7df1040d7501b4a7b5a59f6a7c1a9f0d8e3b2c1d0e9f8a7b6c5;
  localparam logic [95:0]  IV  = 96'h0a1b2c3d_4e5f6071_8293a4b0;
  localparam int TILE_BYTES = 16384;
  localparam int DST_LINE   = 100;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_done = 0;
  task automatic chk(input bit c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask

  initial begin
    #20000000;
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar p = 0; p < NP; p++) begin : g_plat
    localparam int unsigned LINES   = SB[p] / LINE_BYTES;
    localparam int unsigned LADDR_W = $clog2(LINES);
    localparam int unsigned ROWS    = LINES / BK[p];
    localparam int unsigned A_W     = $clog2(SB[p]) + 1;
    localparam paddr_t      BASE    = 40'h10_0000_0000 + 40'(p) * 40'h100_0000;

    logic cmd_valid = 0, cmd_ready, tile_done;
    paddr_t cmd_src = '0; logic [31:0] cmd_bytes = '0; logic [LADDR_W-1:0] cmd_dst_line = '0;
    logic m_arvalid, m_arready, m_rvalid, m_rready, m_rlast;
    paddr_t m_araddr; logic [5:0] m_arid, m_rid; logic [7:0] m_arlen; logic [2:0] m_arsize;
    logic [1:0] m_arburst, m_rresp; block_t m_rdata;
    logic prov_valid = 0, key_valid; key_t prov_key = '0; iv_t prov_iv = '0;
    logic preempt_req = 0, resume = 0, preempt_ack, preempt_active;
    logic cfg_valid = 0, cfg_ns = 0, cfg_err; logic [7:0] cfg_sid = '0;
    logic acc_valid = 0; logic [7:0] acc_sid = '0; logic [A_W-1:0] acc_addr = '0;
    logic [3:0] acc_tag = '0;
    logic acc_rsp_valid; axi_resp_e acc_rsp_resp; block_t acc_rsp_data;
    logic ks_stall, slot_stall, key_stall, deny_sid, deny_tag, rd_err, scrub_busy;
    logic [7:0] npu_sid;
    logic [6:0] ks_lines;

    tessera_top #(.SRAM_BYTES(SB[p]), .BANKS(BK[p])) dut (.*);

    dram_model #(.ID_W(6), .LAT_MIN(40), .LAT_MAX(90), .REORDER(1)) dram (
      .clk, .rst_n, .arvalid(m_arvalid), .arready(m_arready), .araddr(m_araddr), .arid(m_arid),
      .arlen(m_arlen), .rvalid(m_rvalid), .rready(m_rready), .rid(m_rid), .rdata(m_rdata),
      .rresp(m_rresp), .rlast(m_rlast));

    longint cyc = 0;
    int n_tiles = 0, n_restart = 0, n_scrub = 0;
    int row_hits [ROWS];
    always @(posedge clk) if (rst_n) begin
      cyc++;
      if (tile_done) n_tiles++;
      if (dut.u_preempt.dma_restart) n_restart++;
      if (dut.s_valid) begin
        n_scrub++;
        row_hits[dut.s_row]++;
      end
    end

    task automatic provision();
      @(negedge clk); prov_valid = 1; prov_key = KEY; prov_iv = IV;
      @(negedge clk); prov_valid = 0;
    endtask

    task automatic sram_read(input int line, input int beat, input logic [3:0] tag,
                             output axi_resp_e resp, output block_t data);
      acc_valid = 1; acc_sid = 8'h10; acc_addr = A_W'(line * 64 + 16 * beat); acc_tag = tag;
      @(negedge clk); acc_valid = 0;
      resp = acc_rsp_resp; data = acc_rsp_data;
    endtask

    initial begin
      longint tp0, tp1;
      int t0, nz, bad, missed;
      real f_ghz, t_us, t_all;
      axi_resp_e r; block_t d;

      foreach (row_hits[i]) row_hits[i] = 0;
      for (paddr_t a = BASE; a < BASE + 40'(TILE_BYTES); a += 64)
        for (int j = 0; j < 4; j++)
          dram.write_beat(a + 40'(16*j), ref_plain(a + 40'(16*j)) ^ ref_ks_beat(KEY, IV, a, j));
      repeat (3) @(negedge clk);
      rst_n = 1;
      repeat (3) @(negedge clk);
      provision();

      // start the tile, preempt after a quarter of it
      t0 = n_tiles;
      wait (cmd_ready); @(negedge clk);
      cmd_valid = 1; cmd_src = BASE; cmd_bytes = 32'(TILE_BYTES); cmd_dst_line = LADDR_W'(DST_LINE);
      @(negedge clk); cmd_valid = 0;
      wait (dut.u_dma.done_cnt > 64);
      @(negedge clk);
      preempt_req = 1; tp0 = cyc; @(negedge clk); preempt_req = 0;
      wait (preempt_ack);
      tp1 = cyc;
      @(negedge clk);

      f_ghz = BW_GBS[p] / (real'(BK[p]) * 64.0);
      t_us  = real'(n_scrub) / (f_ghz * 1000.0) + 1.5;
      t_all = real'(tp1 - tp0) / (f_ghz * 1000.0) + 1.5;
      missed = 0;
      foreach (row_hits[i]) if (row_hits[i] != 1) missed++;
      $display("%s: SRAM %0d KB in %0d banks, hook %0d cycles (scrub %0d rows), at %.4f GHz T_preempt = %.2f us from the scrub, %.2f us with the drain (study: %.1f us)",
               NAME[p], SB[p] / 1024, BK[p], tp1 - tp0, n_scrub, f_ghz, t_us, t_all, T_PAPER[p]);
      chk(!key_valid, $sformatf("%s: key cleared at ack", NAME[p]));
      chk(n_tiles == t0, $sformatf("%s: tile interrupted", NAME[p]));
      chk(n_scrub == int'(ROWS) && missed == 0, $sformatf("%s: each of %0d rows scrubbed once (%0d rows, %0d not once)",
          NAME[p], ROWS, n_scrub, missed));
      chk(tp1 - tp0 >= longint'(ROWS) && tp1 - tp0 < longint'(ROWS) + 400,
          $sformatf("%s: hook time = drain + %0d scrub cycles + a few", NAME[p], ROWS));
      chk(t_us > T_PAPER[p] * 0.95 && t_us < T_PAPER[p] * 1.05,
          $sformatf("%s: T_preempt %.2f us within 5%% of %.1f us", NAME[p], t_us, T_PAPER[p]));
      chk(t_all > T_PAPER[p] * 0.95 && t_all < T_PAPER[p] * 1.08,
          $sformatf("%s: hook with drain %.2f us within 8%% of %.1f us", NAME[p], t_all, T_PAPER[p]));

      nz = 0;
      for (int l = 0; l < int'(LINES); l += 41) begin
        sram_read(l, l % 4, 4'h0, r, d);
        if (r != RESP_OKAY || d != '0) nz++;
      end
      for (int l = DST_LINE; l < DST_LINE + TILE_BYTES / 64; l++) begin
        sram_read(l, 0, 4'h0, r, d);
        if (r != RESP_OKAY || d != '0) nz++;
      end
      chk(nz == 0, $sformatf("%s: SRAM reads zero after the scrub (%0d reads not)", NAME[p], nz));

      // resume: nothing restarts before the key is back
      repeat (20) @(negedge clk);
      resume = 1; @(negedge clk); resume = 0;
      repeat (10) @(negedge clk);
      chk(preempt_active && n_restart == 0, $sformatf("%s: restart waits for the key", NAME[p]));
      provision();
      wait (n_tiles == t0 + 1);
      @(negedge clk);
      bad = 0;
      for (int i = 0; i < TILE_BYTES / 16; i++) begin
        sram_read(DST_LINE + i / 4, i % 4, 4'hA, r, d);
        if (r != RESP_OKAY || d !== ref_plain(BASE + 40'(16 * i))) bad++;
      end
      chk(n_restart == 1 && !preempt_active, $sformatf("%s: restarted once", NAME[p]));
      chk(bad == 0, $sformatf("%s: refetched tile correct (%0d of %0d beats wrong)", NAME[p], bad, TILE_BYTES / 16));
      n_done++;
    end
  end

  initial begin
    wait (n_done == NP);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
