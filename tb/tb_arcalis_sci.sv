// tb_arcalis_sci: checks the snooping command interface.
// Programs a watch range, then drives UC and cacheable stores and loads
// inside, below, at the end of and above the range, and checks which are
// claimed, what is forwarded one cycle later, and that a forward-unit reply
// comes back on the load-reply channel one cycle after it is offered.
`timescale 1ns/1ps
module tb_arcalis_sci;
  import arcalis_pkg::*;
  logic clk = 0, rst_n = 0;
  always #0.5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic cfg_we, snp_valid, snp_uc, snp_store, snp_hit, cmd_valid, cmd_is_load;
  logic fwd_rsp_valid, load_rsp_valid;
  pa_t cfg_base, cfg_limit, snp_addr;
  logic [63:0] snp_wdata, cmd_word, fwd_rsp_data, load_rsp_data;
  logic [3:0] cmd_addr_lo;
  arcalis_sci dut (.*);

  initial begin repeat (10000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic snoop(input bit uc, input bit st, input longint a, input longint d, input bit exp);
    @(negedge clk);
    snp_valid = 1; snp_uc = uc; snp_store = st; snp_addr = pa_t'(a); snp_wdata = d;
    #0.1 check(snp_hit == exp, $sformatf("claim uc=%0d st=%0d a=%h", uc, st, a));
    @(negedge clk);
    snp_valid = 0;
    check(cmd_valid == exp, "forwarded one cycle later");
    if (exp) begin
      check(cmd_is_load == !st, "load flag");
      check(cmd_addr_lo == a[3:0], "address low bits");
      check(cmd_word == (st ? d : 64'd0), "store word");
    end
  endtask

  initial begin
    cfg_we = 0; snp_valid = 0; snp_uc = 0; snp_store = 0; snp_addr = '0; snp_wdata = '0;
    fwd_rsp_valid = 0; fwd_rsp_data = '0; cfg_base = '0; cfg_limit = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    snoop(1, 1, 64'h1000, 64'h55, 0);            // unconfigured: nothing claimed
    @(negedge clk); cfg_we = 1; cfg_base = 48'h1000; cfg_limit = 48'h2000; @(negedge clk); cfg_we = 0;
    snoop(1, 1, 64'h1000, 64'hABCD_0001, 1);
    snoop(1, 0, 64'h1FF3, 64'h0, 1);
    snoop(0, 1, 64'h1008, 64'h1, 0);
    snoop(1, 1, 64'h0FF8, 64'h1, 0);
    snoop(1, 1, 64'h2000, 64'h1, 0);
    snoop(1, 0, 64'h1234, 64'h0, 1);
    @(negedge clk); fwd_rsp_valid = 1; fwd_rsp_data = 64'h4000_0000_0000_0059;
    @(negedge clk); fwd_rsp_valid = 0;
    check(load_rsp_valid && load_rsp_data == 64'h4000_0000_0000_0059, "reply returned");
    @(negedge clk); check(!load_rsp_valid, "reply lasts one cycle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
