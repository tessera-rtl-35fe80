// tb_tessera_top: end-to-end run of the whole design at its default size
// (64 keystream slots, 2 MB SRAM in 8 banks) against a behavioural DRAM
// that reorders bursts.
//
// The weights of a model are encrypted in DRAM with the reference AES-256-CTR
// (per-line counter IV || P/64). The test then:
//   0. checks that DRAM, as a bus probe or a CPU mapping would see it, holds
//      no plaintext beat of the 32 KB tile;
//   1. sends a tile before the key exists (key stall), provisions the key;
//   2. streams one tile of each layer type of the bandwidth study
//      (128, 288, 512, 1024, 2048, 4096 B) plus a 32 KB tile, reads every
//      beat back through the firewall with the NPU stream ID and tag and
//      compares it with the plaintext; counts the DRAM bytes fetched
//      (amplification must be exactly 1 for these aligned tiles) and the
//      sustained rate on the 32 KB tile (must be at least 0.95 beats per
//      cycle, against the 128/130 = 98.5% the architecture projects);
//   3. runs with short DRAM latency (keystream late: stall) and with very
//      long latency (all 64 slots busy: stall);
//   4. preempts in the middle of a 16 KB tile: checks the order drain ->
//      scrub -> key clear -> ack, that the whole SRAM reads back zero with tag
//      zero, that the key is gone, and the preemption time; then resumes,
//      re-provisions the key and checks the refetched tile;
//   5. tries host (CPU) and rogue-DMA stream IDs, a wrong tag, an address
//      outside the SRAM, and a non-secure firewall reconfiguration;
//   6. remaps a ciphertext line to another address (address aliasing): the
//      plaintext must not come out.
// Each of these mechanisms is counted and must happen at least once.
module tb_tessera_top;
  import tessera_pkg::*;
  import aes_ref_pkg::*;

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

  dram_model #(.ID_W(6), .LAT_MIN(40), .LAT_MAX(90), .REORDER(1)) dram (
    .clk, .rst_n, .arvalid(m_arvalid), .arready(m_arready), .araddr(m_araddr), .arid(m_arid),
    .arlen(m_arlen), .rvalid(m_rvalid), .rready(m_rready), .rid(m_rid), .rdata(m_rdata),
    .rresp(m_rresp), .rlast(m_rlast));

  int checks = 0, failures = 0;
  task automatic chk(input bit c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask

  // event counters
  int n_ks_stall = 0, n_slot_stall = 0, n_key_stall = 0, n_deny_sid = 0, n_deny_tag = 0;
  int n_decerr = 0, n_cfg_err = 0, n_preempt = 0, n_restart = 0, n_alias = 0, n_tiles = 0;
  int max_lines = 0, n_scrub_rows = 0;
  longint cyc = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (ks_stall) n_ks_stall++;
    if (slot_stall) n_slot_stall++;
    if (key_stall) n_key_stall++;
    if (deny_sid) n_deny_sid++;
    if (deny_tag) n_deny_tag++;
    if (acc_rsp_valid && acc_rsp_resp == RESP_DECERR) n_decerr++;
    if (cfg_err) n_cfg_err++;
    if (dut.u_preempt.dma_restart) n_restart++;
    if (dut.s_valid) n_scrub_rows++;
    if (tile_done) n_tiles++;
    if (int'(ks_lines) > max_lines) max_lines = int'(ks_lines);
  end

  initial begin
    #50000000;
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam logic [255:0] KEY = 256'h603deb1015ca71be2b73aef0857d77811f352c073b6108d72d9810a30914dff4;
  localparam logic [95:0]  IV  = 96'hf0f1f2f3_f4f5f6f7_f8f9fa00;

  task automatic encrypt_region(input paddr_t base, input int bytes);
    for (paddr_t a = {base[39:6], 6'b0}; a < base + 40'(bytes); a += 64)
      for (int j = 0; j < 4; j++)
        dram.write_beat(a + 40'(16*j), ref_plain(a + 40'(16*j)) ^ ref_ks_beat(KEY, IV, a, j));
  endtask

  task automatic provision();
    @(negedge clk); prov_valid = 1; prov_key = KEY; prov_iv = IV;
    @(negedge clk); prov_valid = 0;
  endtask

  task automatic start_tile(input paddr_t src, input int bytes, input int dst);
    wait (cmd_ready); @(negedge clk);
    cmd_valid = 1; cmd_src = src; cmd_bytes = 32'(bytes); cmd_dst_line = 15'(dst);
    @(negedge clk); cmd_valid = 0;
  endtask

  task automatic wait_tile(input int t0);
    wait (n_tiles == t0 + 1);
    @(negedge clk);
  endtask

  task automatic sram_read(input logic [7:0] sid, input int byte_addr, input logic [3:0] tag,
                           output axi_resp_e resp, output block_t data);
    acc_valid = 1; acc_sid = sid; acc_addr = 22'(byte_addr); acc_tag = tag;
    @(negedge clk); acc_valid = 0;
    resp = acc_rsp_resp; data = acc_rsp_data;
  endtask

  // compare a tile in SRAM with the plaintext
  task automatic check_tile(input paddr_t src, input int bytes, input int dst, input string s);
    int bad; axi_resp_e r; block_t d;
    int nl; nl = (bytes + 63) / 64;
    bad = 0;
    for (int i = 0; i < nl * 4; i++) begin
      sram_read(8'h10, dst * 64 + 16 * i, 4'hA, r, d);
      if (r != RESP_OKAY || d !== ref_plain({src[39:6], 6'b0} + 40'(16 * i))) bad++;
    end
    chk(bad == 0, $sformatf("%s: %0d of %0d beats wrong", s, bad, nl * 4));
  endtask

  initial begin
    static int sizes [6] = '{128, 288, 512, 1024, 2048, 4096};
    paddr_t base;
    axi_resp_e r; block_t d;
    int t0, ar0;
    longint c0, c1;

    base = 40'h08_0000_0000;
    encrypt_region(base, 256);
    foreach (sizes[i]) encrypt_region(base + 40'h1_0000 + 40'(i) * 40'h2000, sizes[i]);
    encrypt_region(base + 40'h4_0000, 32768);
    encrypt_region(base + 40'h6_0000, 4096 + 16384);
    encrypt_region(base + 40'h8_0000, 16384);
    // what a DRAM probe or a CPU mapping of the weights sees: no beat of the
    // 32 KB tile is plaintext
    begin
      int same; same = 0;
      for (int i = 0; i < 2048; i++)
        if (dram.read_beat(base + 40'h4_0000 + 40'(16 * i)) == ref_plain(base + 40'h4_0000 + 40'(16 * i))) same++;
      chk(same == 0, $sformatf("DRAM holds ciphertext only (%0d plaintext beats)", same));
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);

    // 1. tile before the key: stalls until provisioned
    t0 = n_tiles;
    start_tile(base, 256, 0);
    repeat (30) @(negedge clk);
    chk(dram.ar_count == 0, "no DRAM read before the key is provisioned");
    provision();
    wait_tile(t0);
    check_tile(base, 256, 0, "tile after key provisioning");

    // 2. layer-type tiles: data and amplification
    foreach (sizes[i]) begin
      paddr_t src; src = base + 40'h1_0000 + 40'(i) * 40'h2000;
      t0 = n_tiles; ar0 = dram.ar_count;
      start_tile(src, sizes[i], 1024 + 128 * i);
      wait_tile(t0);
      check_tile(src, sizes[i], 1024 + 128 * i, $sformatf("tile %0d B", sizes[i]));
      chk((dram.ar_count - ar0) * 64 == ((sizes[i] + 63) / 64) * 64,
          $sformatf("tile %0d B fetched %0d B", sizes[i], (dram.ar_count - ar0) * 64));
      $display("tile %0d B: DRAM traffic %0d B, amplification %.3f (page-level: %0d)",
               sizes[i], (dram.ar_count - ar0) * 64, real'((dram.ar_count - ar0) * 64) / sizes[i],
               (4096 + sizes[i] - 1) / sizes[i]);
    end

    // sustained rate on a 32 KB tile
    begin
      int beats; longint first_w, last_w;
      t0 = n_tiles; ar0 = dram.ar_count;
      start_tile(base + 40'h4_0000, 32768, 4096);
      first_w = -1;
      beats = 0;
      while (n_tiles == t0) begin
        @(posedge clk);
        if (dut.w_valid) begin
          if (first_w < 0) first_w = cyc;
          last_w = cyc; beats++;
        end
      end
      @(negedge clk);
      check_tile(base + 40'h4_0000, 32768, 4096, "32 KB tile");
      $display("32 KB tile: %0d beats in %0d cycles (%.4f beats/cycle), max lines in flight %0d",
               beats, last_w - first_w + 1, real'(beats) / real'(last_w - first_w + 1), max_lines);
      chk(real'(beats) / real'(last_w - first_w + 1) >= 0.95, "sustained rate");
    end

    // 3a. short DRAM latency: keystream not ready when data arrives
    dram.lat_min = 1; dram.lat_max = 6;
    t0 = n_tiles; start_tile(base + 40'h6_0000, 4096, 8000); wait_tile(t0);
    check_tile(base + 40'h6_0000, 4096, 8000, "short-latency tile");
    // 3b. very long latency: all keystream slots in use
    dram.lat_min = 400; dram.lat_max = 500;
    t0 = n_tiles; start_tile(base + 40'h6_1000, 16384, 9000); wait_tile(t0);
    check_tile(base + 40'h6_1000, 16384, 9000, "long-latency tile");
    dram.lat_min = 40; dram.lat_max = 90;

    // 4. preemption in the middle of a 16 KB tile
    begin
      longint tp0, tp1;
      t0 = n_tiles;
      start_tile(base + 40'h8_0000, 16384, 12000);
      wait (dut.u_dma.done_cnt > 60);
      @(negedge clk);
      preempt_req = 1; tp0 = cyc; @(negedge clk); preempt_req = 0;
      wait (preempt_ack);
      tp1 = cyc;
      n_preempt++;
      $display("preemption: %0d cycles from request to ack (scrub %0d rows)", tp1 - tp0, n_scrub_rows);
      chk(!key_valid, "key cleared at ack");
      chk(n_scrub_rows == 4096, "whole SRAM scrubbed");
      chk(tp1 - tp0 >= 4096 && tp1 - tp0 < 4096 + 400, "preemption time = drain + 4096-cycle scrub + a few");
      chk(n_tiles == t0, "tile not finished at preemption");
      begin
        int nz; nz = 0;
        for (int l = 0; l < 32768; l += 7) begin
          sram_read(8'h10, l * 64 + 16 * (l % 4), 4'h0, r, d);
          if (r != RESP_OKAY || d != '0) nz++;
        end
        for (int l = 12000; l < 12256; l++) begin
          sram_read(8'h10, l * 64, 4'h0, r, d);
          if (r != RESP_OKAY || d != '0) nz++;
        end
        chk(nz == 0, $sformatf("SRAM zero after scrub (%0d lines not)", nz));
      end
      repeat (20) @(negedge clk);
      resume = 1; @(negedge clk); resume = 0;
      repeat (10) @(negedge clk);
      chk(preempt_active && n_restart == 0, "restart waits for key");
      provision();
      wait_tile(t0);
      check_tile(base + 40'h8_0000, 16384, 12000, "tile refetched after preemption");
    end

    // 5. firewall
    sram_read(8'h01, 12000 * 64, 4'hA, r, d);
    chk(r == RESP_SLVERR && d == '0, "CPU read refused");
    sram_read(8'h33, 12000 * 64, 4'hA, r, d);
    chk(r == RESP_SLVERR && d == '0, "rogue DMA read refused");
    sram_read(8'h10, 12000 * 64, 4'h3, r, d);
    chk(r == RESP_SLVERR && d == '0, "wrong tag refused");
    sram_read(8'h10, 2097152 + 64, 4'hA, r, d);
    chk(r == RESP_DECERR, "outside SRAM: DECERR");
    @(negedge clk); cfg_valid = 1; cfg_ns = 1; cfg_sid = 8'h01; @(negedge clk); cfg_valid = 0;
    sram_read(8'h01, 12000 * 64, 4'hA, r, d);
    chk(r == RESP_SLVERR && npu_sid == 8'h10, "non-secure reconfiguration had no effect");

    // 6. address aliasing: put the ciphertext of line A at address B
    begin
      paddr_t a, b; int bad;
      a = base + 40'h1_0000; b = base + 40'hA_0000;
      for (int j = 0; j < 4; j++) dram.write_beat(b + 40'(16*j), dram.read_beat(a + 40'(16*j)));
      t0 = n_tiles; start_tile(b, 64, 20000); wait_tile(t0);
      bad = 0;
      for (int j = 0; j < 4; j++) begin
        sram_read(8'h10, 20000 * 64 + 16 * j, 4'hA, r, d);
        if (d == ref_plain(a + 40'(16*j))) bad++;
      end
      chk(bad == 0, "remapped ciphertext does not decrypt");
      if (bad == 0) n_alias++;
    end

    // every mechanism happened
    $display("events: ks_stall=%0d slot_stall=%0d key_stall=%0d preempt=%0d restart=%0d deny_sid=%0d deny_tag=%0d decerr=%0d cfg_err=%0d alias=%0d reordered=%0d max_lines=%0d",
             n_ks_stall, n_slot_stall, n_key_stall, n_preempt, n_restart, n_deny_sid, n_deny_tag,
             n_decerr, n_cfg_err, n_alias, dram.reordered, max_lines);
    chk(n_ks_stall > 0, "keystream-late stall happened");
    chk(n_slot_stall > 0, "slot-full stall happened");
    chk(n_key_stall > 0, "no-key stall happened");
    chk(n_preempt > 0 && n_restart > 0, "preemption and restart happened");
    chk(n_deny_sid > 0 && n_deny_tag > 0 && n_decerr > 0 && n_cfg_err > 0, "firewall refusals happened");
    chk(n_alias > 0, "aliasing attempt happened");
    chk(dram.reordered > 0, "out-of-order DRAM return happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
