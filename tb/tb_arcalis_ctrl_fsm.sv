// tb_arcalis_ctrl_fsm: checks the command control FSM.
// Sends the six commands in both orders (buffer address before length, and
// destination before or after the request), holds the engine-side ready
// signals low for random spells, and checks that each descriptor carries the
// right address and length, stays valid until taken, and is raised once.
// Random addresses and lengths come from $urandom.
`timescale 1ns/1ps
module tb_arcalis_ctrl_fsm;
  import arcalis_pkg::*;
  logic clk = 0, rst_n = 0;
  always #0.5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  logic cmd_valid;
  cmd_t cmd;
  logic rx_req_valid, rx_req_ready, rx_dst_valid, rx_dst_ready;
  logic tx_req_valid, tx_req_ready, tx_dst_valid, tx_dst_ready;
  va_t rx_req_va, rx_dst_va, tx_req_va, tx_dst_va;
  logic [15:0] rx_req_len, tx_req_len;
  arcalis_ctrl_fsm dut (.*);
  initial begin repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic send(input opcode_e op, input logic [59:0] d);
    @(negedge clk); cmd_valid = 1; cmd = '{is_load: 1'b0, op: op, data: d};
    @(negedge clk); cmd_valid = 0;
  endtask

  // Wait for one descriptor on the selected channel while the consumer is
  // slow, then take it and check it went away.
  task automatic take(input int ch, input va_t va, input logic [15:0] len, input string what);
    logic v; va_t a; logic [15:0] l;
    int wait_n = $urandom_range(0, 5);
    for (int i = 0; i <= wait_n; i++) begin
      @(negedge clk);
      case (ch)
        0: begin v = rx_req_valid; a = rx_req_va; l = rx_req_len; end
        1: begin v = rx_dst_valid; a = rx_dst_va; l = len; end
        2: begin v = tx_req_valid; a = tx_req_va; l = tx_req_len; end
        default: begin v = tx_dst_valid; a = tx_dst_va; l = len; end
      endcase
      check(v && a == va && l == len, {what, " held valid"});
    end
    case (ch) 0: rx_req_ready = 1; 1: rx_dst_ready = 1; 2: tx_req_ready = 1; default: tx_dst_ready = 1; endcase
    @(negedge clk);
    rx_req_ready = 0; rx_dst_ready = 0; tx_req_ready = 0; tx_dst_ready = 0;
    case (ch)
      0: v = rx_req_valid; 1: v = rx_dst_valid; 2: v = tx_req_valid; default: v = tx_dst_valid;
    endcase
    check(!v, {what, " released after handshake"});
  endtask

  initial begin
    va_t nb, ab, dst, rdst;
    logic [15:0] len;
    cmd_valid = 0; cmd = '0;
    rx_req_ready = 0; rx_dst_ready = 0; tx_req_ready = 0; tx_dst_ready = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 20; it++) begin
      nb = {$urandom, 10'd0}; ab = {$urandom, 10'd0};
      dst = {$urandom, 6'd0}; rdst = {$urandom, 6'd0};
      len = 16'($urandom_range(1, 1518));
      // receive path
      send(CMD_SEND_NET_BUF, 60'(nb));
      @(negedge clk); check(!rx_req_valid, "buffer address alone starts nothing");
      if (it % 2) send(CMD_APP_READY_FLAG, 60'(dst));
      send(CMD_SEND_NET_LEN, 60'(len));
      if (!(it % 2)) send(CMD_APP_READY_FLAG, 60'(dst));
      take(0, nb, len, "rx request");
      take(1, dst, len, "rx destination");
      // response path
      send(CMD_SEND_APP_BUF, 60'(ab));
      if (it % 3 == 0) send(CMD_DPDK_NET_FLAG, 60'(rdst));
      send(CMD_SEND_APP_RESP, 60'(len));
      if (it % 3 != 0) send(CMD_DPDK_NET_FLAG, 60'(rdst));
      take(2, ab, len, "tx request");
      take(3, rdst, len, "tx destination");
      repeat (2) @(negedge clk);
      check(!rx_req_valid && !rx_dst_valid && !tx_req_valid && !tx_dst_valid, "raised only once");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
