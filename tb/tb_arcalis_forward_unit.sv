// tb_arcalis_forward_unit: checks the completion tokens.
// A load before completion returns PENDING, a load after an engine's
// completion returns its status once and then PENDING again, the two engines'
// tokens are independent, and other opcodes read zero.
`timescale 1ns/1ps
module tb_arcalis_forward_unit;
  import arcalis_pkg::*;
  logic clk = 0, rst_n = 0;
  always #0.5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  logic rx_done, tx_done, ld_valid, rsp_valid;
  status_t rx_status, tx_status;
  opcode_e ld_op;
  logic [63:0] rsp_data;
  arcalis_forward_unit dut (.*);
  initial begin repeat (10000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic load(input opcode_e op, input logic [63:0] exp, input string what);
    @(negedge clk); ld_valid = 1; ld_op = op;
    @(negedge clk); ld_valid = 0;
    check(rsp_valid && rsp_data == exp, what);
  endtask
  initial begin
    status_t a, b;
    rx_done = 0; tx_done = 0; ld_valid = 0; ld_op = CMD_NOP; rx_status = '0; tx_status = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    load(CMD_APP_READY_FLAG, 64'd0, "rx pending");
    load(CMD_DPDK_NET_FLAG, 64'd0, "tx pending");
    a = '{kind: STAT_READY, detail: 14'd0, value: 48'd89};
    b = '{kind: STAT_FAULT, detail: 14'd0, value: 48'h4000_8000};
    @(negedge clk); rx_done = 1; rx_status = a; @(negedge clk); rx_done = 0;
    load(CMD_DPDK_NET_FLAG, 64'd0, "tx still pending");
    load(CMD_SEND_NET_BUF, 64'd0, "other opcode reads zero");
    load(CMD_APP_READY_FLAG, a, "rx token");
    load(CMD_APP_READY_FLAG, 64'd0, "rx token consumed");
    @(negedge clk); tx_done = 1; tx_status = b; @(negedge clk); tx_done = 0;
    load(CMD_DPDK_NET_FLAG, b, "tx fault token");
    load(CMD_DPDK_NET_FLAG, 64'd0, "tx token consumed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
