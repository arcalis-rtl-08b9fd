// tb_arcalis_cmd_decoder: checks the byte selector and decoder.
// Every opcode 0..15 is sent once as a UC store (opcode in the word) and once
// as a UC load (opcode in the address, with a different value in the word so
// the selector's choice is visible); outputs are compared with the six known
// commands one cycle later.
`timescale 1ns/1ps
module tb_arcalis_cmd_decoder;
  import arcalis_pkg::*;
  logic clk = 0, rst_n = 0;
  always #0.5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  logic in_valid, in_is_load, cmd_valid, ld_valid, illegal;
  logic [3:0] in_addr_lo;
  logic [63:0] in_word;
  cmd_t cmd;
  arcalis_cmd_decoder dut (.*);
  initial begin repeat (10000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    bit known;
    logic [59:0] d;
    in_valid = 0; in_is_load = 0; in_addr_lo = '0; in_word = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int ld = 0; ld < 2; ld++)
      for (int op = 0; op < 16; op++) begin
        known = (op >= 1 && op <= 6);
        d = {$urandom, $urandom};
        @(negedge clk);
        in_valid = 1; in_is_load = ld[0];
        in_addr_lo = ld ? 4'(op) : 4'(15 - op);
        in_word = ld ? {d, 4'(15 - op)} : {d, 4'(op)};
        @(negedge clk); in_valid = 0;
        check(cmd_valid == (known && !ld), $sformatf("store strobe op %0d", op));
        check(ld_valid == (known && ld), $sformatf("load strobe op %0d", op));
        check(illegal == !known, $sformatf("illegal op %0d", op));
        if (known) begin
          check(cmd.op == opcode_e'(op), "opcode");
          check(cmd.data == (ld ? 60'd0 : d), "data field");
        end
        @(negedge clk);
        check(!cmd_valid && !ld_valid && !illegal, "strobes last one cycle");
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
