// tb_smmu_firewall: the firewall in front of a real npu_sram (2 MB).
// Checked one cycle after each access: the NPU stream ID reads its data
// (OKAY), any other stream ID gets SLVERR with zero data and the SRAM is not
// read, an address past the SRAM gets DECERR, a line holding the restricted
// tag needs the same tag (else SLVERR, zero data) while tag-0 lines are open
// to the NPU stream. A non-secure configuration write is refused (cfg_err),
// a secure one moves the NPU stream ID.
module tb_smmu_firewall;
  import tessera_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_valid = 0, cfg_ns = 0, cfg_err; logic [7:0] cfg_sid = '0, npu_sid;
  logic a_valid = 0; logic [7:0] a_sid = '0; logic [21:0] a_addr = '0; logic [3:0] a_tag = '0;
  logic rsp_valid, deny_sid, deny_tag; axi_resp_e rsp_resp; block_t rsp_data;
  logic r_valid, r_dvalid; logic [14:0] r_line; logic [1:0] r_beat; block_t r_data; logic [3:0] r_tag;
  logic w_valid = 0, s_valid = 0; logic [14:0] w_line = '0; logic [1:0] w_beat = '0;
  block_t w_data = '0; logic [3:0] w_tag = '0; logic [11:0] s_row = '0;
  int checks = 0, failures = 0, n_sram_reads = 0;
  smmu_firewall dut (.*);
  npu_sram sram (.*);
  always @(posedge clk) if (r_valid) n_sram_reads++;
  task automatic chk(input bit c, input string s);
    checks++; if (!c) begin failures++; $display("FAIL: %s", s); end
  endtask
  task automatic acc(input logic [7:0] sid, input logic [21:0] addr, input logic [3:0] tag,
                     input axi_resp_e exp_resp, input block_t exp_data, input string s);
    int r0; r0 = n_sram_reads;
    a_valid = 1; a_sid = sid; a_addr = addr; a_tag = tag;
    @(negedge clk); a_valid = 0;
    chk(rsp_valid && rsp_resp == exp_resp && rsp_data == exp_data, $sformatf("%s: resp %0d data %h", s, rsp_resp, rsp_data));
    if (sid != npu_sid || addr >= 22'd2097152) chk(n_sram_reads == r0, {s, ": SRAM not touched"});
  endtask
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    chk(npu_sid == 8'h10, "reset stream ID");
    s_valid = 1; s_row = 0; @(negedge clk); s_row = 1; @(negedge clk); s_valid = 0;
    // line 3: restricted tag A; line 10: tag 0
    w_valid = 1; w_line = 3; w_beat = 1; w_data = 128'hdeadbeef; w_tag = 4'hA; @(negedge clk);
    w_line = 10; w_beat = 0; w_data = 128'h600d; w_tag = 4'h0; @(negedge clk); w_valid = 0;
    acc(8'h10, 22'(3*64 + 16), 4'hA, RESP_OKAY,   128'hdeadbeef, "NPU, matching tag");
    acc(8'h10, 22'(3*64 + 16), 4'h5, RESP_SLVERR, '0,            "NPU, wrong tag");
    acc(8'h01, 22'(3*64 + 16), 4'hA, RESP_SLVERR, '0,            "CPU stream");
    acc(8'h22, 22'(10*64),     4'h0, RESP_SLVERR, '0,            "rogue DMA stream");
    acc(8'h10, 22'(10*64),     4'h7, RESP_OKAY,   128'h600d,     "NPU, untagged line");
    acc(8'h10, 22'd2097152 + 22'd64, 4'hA, RESP_DECERR, '0,      "out of range");
    chk(deny_sid == 0, "deny pulses only with a response");
    // configuration
    cfg_valid = 1; cfg_ns = 1; cfg_sid = 8'h01; #1; chk(cfg_err, "non-secure write refused");
    @(negedge clk); cfg_valid = 0;
    chk(npu_sid == 8'h10, "stream ID unchanged by non-secure write");
    acc(8'h01, 22'(10*64), 4'h0, RESP_SLVERR, '0, "CPU still refused");
    cfg_valid = 1; cfg_ns = 0; cfg_sid = 8'h20; #1; chk(!cfg_err, "secure write ok");
    @(negedge clk); cfg_valid = 0;
    acc(8'h20, 22'(10*64), 4'h0, RESP_OKAY, 128'h600d, "new NPU stream ID");
    acc(8'h10, 22'(10*64), 4'h0, RESP_SLVERR, '0, "old stream ID refused");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
