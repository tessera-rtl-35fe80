// tb_ice_xor_stage: plaintext = ciphertext XOR keystream with the keystream's
// byte 0 (MSB) on byte lane 0, one cycle later, with line/beat/last carried.
module tb_ice_xor_stage;
  import tessera_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_last = 0, out_valid, out_last;
  block_t in_cipher = '0, in_ks = '0, out_plain;
  logic [14:0] in_line = '0, out_line; logic [1:0] in_beat = '0, out_beat;
  int checks = 0, failures = 0;
  ice_xor_stage dut (.*);
  task automatic chk(input bit c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    // known lane mapping
    in_valid = 1; in_cipher = '0; in_ks = 128'h00112233445566778899aabbccddeeff;
    in_line = 15'd7; in_beat = 2'd2; in_last = 1;
    @(negedge clk); in_valid = 0;
    chk(out_valid && out_plain == 128'hffeeddccbbaa99887766554433221100, "lane mapping");
    chk(out_line == 7 && out_beat == 2 && out_last, "side fields");
    @(negedge clk);
    chk(!out_valid && !out_last, "idle");
    for (int i = 0; i < 100; i++) begin
      block_t c, k, e;
      c = {$urandom, $urandom, $urandom, $urandom}; k = {$urandom, $urandom, $urandom, $urandom};
      for (int b = 0; b < 16; b++) e[8*b +: 8] = c[8*b +: 8] ^ k[127-8*b -: 8];
      in_valid = 1; in_cipher = c; in_ks = k; in_last = (i % 4 == 3); in_beat = 2'(i);
      @(negedge clk);
      chk(out_valid && out_plain == e && out_beat == 2'(i) && out_last == (i % 4 == 3), "random beat");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
