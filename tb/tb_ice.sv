// tb_ice: the inline crypto engine against a behavioural DRAM that returns
// bursts out of order with random latency (2..400 cycles) and gaps.
// Ciphertext in DRAM is made with the reference AES; every plaintext beat
// the ICE writes must equal the original pattern at the right SRAM line and
// beat, with the restricted tag. Also checked: no request is taken before
// the key is provisioned, the AXI read has ARLEN 3 / 16-byte beats / INCR
// and a line-aligned address, each written beat leaves exactly one cycle
// after its ciphertext beat was taken (T_XOR = 1), every line completes
// once, and the three stall causes (no key, keystream late, no free slot)
// and out-of-order return each happened.
module tb_ice;
  import tessera_pkg::*;
  import aes_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic prov_valid = 0, key_clear = 0, key_valid;
  key_t prov_key = '0;
  iv_t  prov_iv = '0;
  logic req_valid = 0, req_ready;
  paddr_t req_addr = '0;
  logic [14:0] req_line = '0;
  logic m_arvalid, m_arready, m_rvalid, m_rready, m_rlast;
  paddr_t m_araddr;
  logic [5:0] m_arid, m_rid;
  logic [7:0] m_arlen; logic [2:0] m_arsize; logic [1:0] m_arburst, m_rresp;
  block_t m_rdata;
  logic w_valid, line_done, busy, ks_stall, slot_stall, rd_err;
  logic [14:0] w_line; logic [1:0] w_beat; block_t w_data; logic [3:0] w_tag;
  logic [6:0] ks_lines;

  ice dut (.*);

  dram_model #(.ID_W(6), .LAT_MIN(2), .LAT_MAX(400), .REORDER(1), .GAP_PCT(10)) dram (
    .clk, .rst_n, .arvalid(m_arvalid), .arready(m_arready), .araddr(m_araddr), .arid(m_arid),
    .arlen(m_arlen), .rvalid(m_rvalid), .rready(m_rready), .rid(m_rid), .rdata(m_rdata),
    .rresp(m_rresp), .rlast(m_rlast));

  int checks = 0, failures = 0;
  int n_ks_stall = 0, n_slot_stall = 0, n_key_stall = 0, n_done = 0, max_lines = 0;
  paddr_t line_src [int];
  int     beats_seen [int];
  logic   prev_take = 0;

  task automatic fail(input string s);
    failures++; $display("FAIL: %s", s);
  endtask

  always @(posedge clk) if (rst_n) begin
    if (ks_stall) n_ks_stall++;
    if (slot_stall) n_slot_stall++;
    if (req_valid && !key_valid) n_key_stall++;
    if (int'(ks_lines) > max_lines) max_lines = int'(ks_lines);
    // T_XOR = 1 cycle
    checks++;
    if (w_valid !== prev_take) fail("write not one cycle after ciphertext beat");
    prev_take <= m_rvalid && m_rready;
    if (m_arvalid && m_arready) begin
      checks++;
      if (m_arlen != 3 || m_arsize != 4 || m_arburst != 2'b01 || m_araddr[5:0] != 0)
        fail("bad AXI read");
    end
    if (w_valid) begin
      paddr_t a; logic [127:0] e;
      checks++;
      if (!line_src.exists(int'(w_line))) fail("write to unknown line");
      else begin
        a = line_src[int'(w_line)] + 40'(16 * w_beat);
        e = ref_plain(a);
        if (w_data !== e || w_tag !== 4'hA) begin
          fail($sformatf("line %0d beat %0d got %h exp %h", w_line, w_beat, w_data, e));
        end
        beats_seen[int'(w_line)] = beats_seen.exists(int'(w_line)) ? beats_seen[int'(w_line)] + 1 : 1;
      end
    end
    if (line_done) n_done++;
  end

  initial begin
    #2000000;
    fail("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NLINES = 300;
  logic [255:0] key = {8{32'h0badf00d}} ^ 256'h1234;
  logic [95:0]  iv  = 96'hcafe_f00d_0000_1111_2222_3330;

  initial begin
    // fill DRAM with ciphertext of NLINES lines at scattered addresses
    for (int i = 0; i < NLINES; i++) begin
      paddr_t a;
      a = {8'h00, 6'(i * 7), 20'($urandom), 6'b0} ^ (40'(i) << 26);
      line_src[i] = a;
      for (int j = 0; j < 4; j++)
        dram.write_beat(a + 40'(16*j), ref_plain(a + 40'(16*j)) ^ ref_ks_beat(key, iv, a, j));
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // request without a key: must not be taken
    req_valid = 1; req_addr = line_src[0]; req_line = 0;
    repeat (5) begin
      @(negedge clk);
      checks++;
      if (req_ready) fail("request taken without key");
    end
    prov_valid = 1; prov_key = key; prov_iv = iv;
    @(negedge clk); prov_valid = 0;
    for (int i = 0; i < NLINES; i++) begin
      req_valid = 1; req_addr = line_src[i] + 40'($urandom_range(0, 63)); req_line = 15'(i);
      do @(negedge clk); while (!req_ready_q);
      if ($urandom_range(0, 9) == 0) begin req_valid = 0; repeat ($urandom_range(1, 8)) @(negedge clk); end
    end
    req_valid = 0;
    wait (n_done == NLINES);
    repeat (5) @(negedge clk);
    checks++; if (busy) fail("busy after all lines done");
    foreach (line_src[i]) begin
      checks++;
      if (!beats_seen.exists(i) || beats_seen[i] != 4) fail($sformatf("line %0d beats", i));
    end
    checks++; if (n_ks_stall == 0) fail("no keystream-late stall exercised");
    checks++; if (n_slot_stall == 0) fail("no slot-full stall exercised");
    checks++; if (n_key_stall == 0) fail("no key stall exercised");
    checks++; if (dram.reordered == 0) fail("no out-of-order return exercised");
    checks++; if (max_lines > 64) fail("more than 64 lines in flight");
    $display("ks_stall=%0d slot_stall=%0d key_stall=%0d reordered=%0d max_lines=%0d",
             n_ks_stall, n_slot_stall, n_key_stall, dram.reordered, max_lines);
    // clear: key gone, requests refused
    key_clear = 1; @(negedge clk); key_clear = 0;
    checks++; if (key_valid) fail("key still valid after clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // req_ready sampled at the clock edge where the request was taken
  logic req_ready_q;
  always @(posedge clk) req_ready_q <= req_valid && req_ready;

endmodule
