// tb_ice_ctr_gen: CTR(P) = IV_base || P[37:6] for random addresses, ready
// one cycle after the request; the register holds its value while the
// consumer is not ready and in_ready follows the one-entry rule.
module tb_ice_ctr_gen;
  import tessera_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  iv_t iv_base = 96'hfeedface_00000000_12345678;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  paddr_t in_addr = '0; logic [5:0] in_tag = '0, out_tag; block_t out_ctr;
  int checks = 0, failures = 0;
  ice_ctr_gen #(.TAG_W(6)) dut (.*);
  task automatic chk(input bit c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 50; i++) begin
      paddr_t a; a = {$urandom, $urandom} ;
      in_valid = 1; in_addr = a; in_tag = 6'(i);
      @(negedge clk);
      in_valid = 0;
      chk(out_valid, "valid after one cycle");
      chk(out_ctr == {iv_base, a[37:6]}, $sformatf("ctr %h", out_ctr));
      chk(out_ctr[31:0] == 32'(a / 64), "index = floor(P/64)");
      chk(out_tag == 6'(i), "tag");
      if (i % 5 == 0) begin
        out_ready = 0; in_valid = 1; in_addr = '1; #1;
        chk(!in_ready, "not ready while full and blocked");
        @(negedge clk);
        chk(out_valid && out_ctr == {iv_base, a[37:6]}, "held while blocked");
        out_ready = 1; in_valid = 0;
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
