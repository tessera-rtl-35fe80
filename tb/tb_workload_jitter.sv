// tb_workload_jitter: the pipeline-robustness study, run on the whole design
// at its default size. For each of the three platforms of the latency
// measurements, DRAM latency is drawn per read from a normal distribution
// with the platform's mean T_DRAM and a 20% standard deviation, converted to
// cycles of a 1.4 GHz clock (the clock at which one AES block per cycle
// gives 22.4 GB/s):
//     i9-12900H / DDR5-4800   71.6 ns -> 100 cycles, sd 20
//     Jetson AGX Xavier        43.2 ns ->  60 cycles, sd 12
//     Jetson AGX Orin          38.7 ns ->  54 cycles, sd 11
// A continuous stream of NLINES 64-byte lines (as 32 KB tiles) is decrypted
// per platform; the keystream latency is fixed at 15 cycles (10.7 ns).
// Checked per platform: every plaintext beat, keystream-late stalls below
// 0.1% of beats, at most 64 lines in flight, sustained rate within each tile
// at least 0.95 beats per cycle (the DMA starts a tile only after the
// previous one completed, so the gap of one DRAM latency between tiles is
// printed but not checked). The stall fraction, peak buffer occupancy (the study
// reports 58 lines, 3.7 KB) and rate are printed.
module tb_workload_jitter;
  import tessera_pkg::*;
  import aes_ref_pkg::*;

  localparam int NLINES = 6144;            // per platform (12 tiles of 32 KB)
  localparam int TILE   = 32768;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid = 0, cmd_ready, tile_done;
  paddr_t cmd_src = '0; logic [31:0] cmd_bytes = '0; logic [14:0] cmd_dst_line = '0;
  logic m_arvalid, m_arready, m_rvalid, m_rready, m_rlast;
  paddr_t m_araddr; logic [5:0] m_arid, m_rid; logic [7:0] m_arlen; logic [2:0] m_arsize;
  logic [1:0] m_arburst, m_rresp; block_t m_rdata;
  logic prov_valid = 0, key_valid; key_t prov_key = '0; iv_t prov_iv = '0;
  logic preempt_req = 0, resume = 0, preempt_ack, preempt_active;
  logic cfg_valid = 0, cfg_ns = 0, cfg_err; logic [7:0] cfg_sid = '0;
  logic acc_valid = 0; logic [7:0] acc_sid = '0; logic [21:0] acc_addr = '0; logic [3:0] acc_tag = '0;
  logic acc_rsp_valid; axi_resp_e acc_rsp_resp; block_t acc_rsp_data;
  logic ks_stall, slot_stall, key_stall, deny_sid, deny_tag, rd_err, scrub_busy;
  logic [7:0] npu_sid;
  logic [6:0] ks_lines;

  tessera_top dut (.*);

  dram_model #(.ID_W(6), .LAT_MIN(60), .LAT_MAX(60), .REORDER(1)) dram (
    .clk, .rst_n, .arvalid(m_arvalid), .arready(m_arready), .araddr(m_araddr), .arid(m_arid),
    .arlen(m_arlen), .rvalid(m_rvalid), .rready(m_rready), .rid(m_rid), .rdata(m_rdata),
    .rresp(m_rresp), .rlast(m_rlast));

  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask

  localparam logic [255:0] KEY = 256'h2b7e151628aed2a6abf7158809cf4f3c_762e7160f38b4da56a784d9045190cfe;
  localparam logic [95:0]  IV  = 96'h0a0b0c0d_0e0f1011_12131400;
  localparam paddr_t       BASE = 40'h01_2000_0000;

  // monitor: every plaintext beat against the pattern
  paddr_t dst_src [int];        // SRAM line -> source line address (current tile)
  int beats = 0, bad = 0, n_ks = 0, max_lines = 0, n_tiles = 0;
  longint first_w = -1, last_w = 0, cyc = 0;
  longint tile_first = -1, tile_last = 0, tile_cycles = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (ks_stall) n_ks++;
    if (int'(ks_lines) > max_lines) max_lines = int'(ks_lines);
    if (tile_done) begin
      n_tiles++;
      tile_cycles += tile_last - tile_first + 1;
      tile_first = -1;
    end
    if (dut.w_valid) begin
      beats++;
      if (first_w < 0) first_w = cyc;
      if (tile_first < 0) tile_first = cyc;
      last_w = cyc; tile_last = cyc;
      if (dut.w_data !== ref_plain(dst_src[int'(dut.w_line)] + 40'(16 * dut.w_beat))) bad++;
    end
  end

  initial begin
    #200000000;
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    string names [3] = '{"i9-12900H (DDR5-4800)", "Jetson AGX Xavier (LPDDR4x)", "Jetson AGX Orin (LPDDR5X)"};
    int    mean  [3] = '{100, 60, 54};
    int    sd    [3] = '{20, 12, 11};
    // encrypt the weight region once (TILE bytes, reused by every tile)
    for (paddr_t a = BASE; a < BASE + 40'(TILE); a += 64)
      for (int j = 0; j < 4; j++)
        dram.write_beat(a + 40'(16*j), ref_plain(a + 40'(16*j)) ^ ref_ks_beat(KEY, IV, a, j));
    for (int l = 0; l < TILE / 64; l++) dst_src[l] = BASE + 40'(64 * l);
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk); prov_valid = 1; prov_key = KEY; prov_iv = IV;
    @(negedge clk); prov_valid = 0;
    for (int p = 0; p < 3; p++) begin
      int t0;
      dram.lat_min = mean[p]; dram.lat_sd = sd[p];
      beats = 0; bad = 0; n_ks = 0; max_lines = 0; first_w = -1; tile_cycles = 0;
      t0 = n_tiles;
      for (int t = 0; t < NLINES * 64 / TILE; t++) begin
        wait (cmd_ready); @(negedge clk);
        cmd_valid = 1; cmd_src = BASE; cmd_bytes = TILE; cmd_dst_line = 0;
        @(negedge clk); cmd_valid = 0;
        wait (n_tiles == t0 + t + 1);
      end
      @(negedge clk);
      $display("%s: T_DRAM %0d+-%0d cycles, %0d lines, keystream-late stalls %0d of %0d beats (%.4f%%), peak occupancy %0d lines (%0d B), rate within tiles %.4f beats/cycle (%.4f including the gaps between tiles)",
               names[p], mean[p], sd[p], beats / 4, n_ks, beats, 100.0 * n_ks / beats, max_lines, 64 * max_lines,
               real'(beats) / real'(tile_cycles), real'(beats) / real'(last_w - first_w + 1));
      chk(beats == 4 * NLINES, $sformatf("%s: all beats written", names[p]));
      chk(bad == 0, $sformatf("%s: %0d wrong plaintext beats", names[p], bad));
      chk(real'(n_ks) / real'(beats) < 0.001, $sformatf("%s: stall probability below 0.1%%", names[p]));
      chk(max_lines <= 64, $sformatf("%s: occupancy within 64 lines", names[p]));
      chk(real'(beats) / real'(tile_cycles) >= 0.95, $sformatf("%s: sustained rate within tiles", names[p]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
