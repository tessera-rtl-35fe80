// tb_ice_key_regs: provisioning expands the key (round keys checked against
// the FIPS-197 AES-256 schedule: first, second and last round key) and sets
// key_valid one cycle later; key_clear zeroes key, nonce and round keys and
// wins over a simultaneous provisioning write.
module tb_ice_key_regs;
  import tessera_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic prov_valid = 0, key_clear = 0, key_valid;
  key_t prov_key = '0; iv_t prov_iv = '0; rkeys_t rkeys; iv_t iv_base;
  int checks = 0, failures = 0;
  ice_key_regs dut (.*);

  task automatic chk(input bit c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask

  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    chk(!key_valid && rkeys == '0, "reset state");
    prov_valid = 1;
    prov_key = 256'h000102030405060708090a0b0c0d0e0f101112131415161718191a1b1c1d1e1f;
    prov_iv  = 96'h0123456789abcdef01234567;
    @(negedge clk); prov_valid = 0;
    chk(key_valid, "key_valid after provisioning");
    chk(iv_base == 96'h0123456789abcdef01234567, "iv");
    chk(rkeys[0] == 128'h000102030405060708090a0b0c0d0e0f, "rk0");
    chk(rkeys[1] == 128'h101112131415161718191a1b1c1d1e1f, "rk1");
    chk(rkeys[2] == 128'ha573c29fa176c498a97fce93a572c09c, "rk2");
    chk(rkeys[14] == 128'h24fc79ccbf0979e9371ac23c6d68de36, "rk14");
    repeat (3) @(negedge clk);
    chk(key_valid, "key held");
    key_clear = 1; prov_valid = 1;
    @(negedge clk); key_clear = 0; prov_valid = 0;
    chk(!key_valid && rkeys == '0 && iv_base == '0, "clear wins and zeroes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
