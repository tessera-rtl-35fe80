// tb_aes256_pipe: checks the pipelined AES-256 core against the FIPS-197
// AES-256 example vector and against the reference model for random keys
// and blocks, sent back to back (one block per cycle) and with gaps. Also
// checks that every block comes out exactly 14 cycles after it went in and
// that its side tag follows it.
module tb_aes256_pipe;
  import tessera_pkg::*;
  import aes_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  rkeys_t     rkeys;
  logic       in_valid = 0, out_valid;
  block_t     in_block = '0, out_block;
  logic [7:0] in_tag = '0, out_tag;
  int checks = 0, failures = 0;
  int cycle = 0;

  aes256_pipe #(.TAG_W(8)) dut (.*);

  always @(posedge clk) cycle <= cycle + 1;

  block_t exp_q [$];
  logic [7:0] tag_q [$];
  int     t_q [$];

  always @(posedge clk) begin
    if (in_valid) begin
      exp_q.push_back(ref_aes256(cur_key, in_block));
      tag_q.push_back(in_tag);
      t_q.push_back(cycle);
    end
    if (out_valid) begin
      block_t e; logic [7:0] tg; int t0;
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        e = exp_q.pop_front(); tg = tag_q.pop_front(); t0 = t_q.pop_front();
        if (out_block !== e || out_tag !== tg) begin
          failures++; $display("mismatch got %h exp %h", out_block, e);
        end
        checks++;
        if (cycle - t0 != 14) begin failures++; $display("latency %0d", cycle - t0); end
      end
    end
  end

  logic [255:0] cur_key;

  initial begin
    #200000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // FIPS-197 C.3
    cur_key = 256'h000102030405060708090a0b0c0d0e0f101112131415161718191a1b1c1d1e1f;
    rkeys = expand_key(cur_key);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    in_valid = 1; in_block = 128'h00112233445566778899aabbccddeeff; in_tag = 8'h5a;
    @(negedge clk);
    in_valid = 0;
    repeat (20) @(negedge clk);
    checks++;
    if (ref_aes256(cur_key, 128'h00112233445566778899aabbccddeeff) !== 128'h8ea2b7ca516745bfeafc49904b496089) begin
      failures++; $display("reference model disagrees with FIPS-197");
    end
    // two random keys, random traffic
    for (int k = 0; k < 2; k++) begin
      cur_key = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      rkeys = expand_key(cur_key);
      for (int i = 0; i < 60; i++) begin
        in_valid = (i < 30) ? 1'b1 : 1'($urandom_range(0, 1));
        in_block = {$urandom, $urandom, $urandom, $urandom};
        in_tag   = 8'(i);
        @(negedge clk);
      end
      in_valid = 0;
      repeat (20) @(negedge clk);
    end
    // FIPS vector through the pipe once more, checked directly
    cur_key = 256'h000102030405060708090a0b0c0d0e0f101112131415161718191a1b1c1d1e1f;
    rkeys = expand_key(cur_key);
    in_valid = 1; in_block = 128'h00112233445566778899aabbccddeeff;
    @(negedge clk); in_valid = 0;
    repeat (13) @(negedge clk);
    checks++;
    if (!(out_valid && out_block == 128'h8ea2b7ca516745bfeafc49904b496089)) begin
      failures++; $display("FIPS-197 vector not produced after 14 cycles");
    end
    repeat (5) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
