// tb_arcalis_resp_function: checks that the response stub enumerates the
// used entries of a sparse schema packed from index 0, with their ids,
// types and slots, flags the last one and reports nothing beyond it.
`timescale 1ns/1ps
module tb_arcalis_resp_function;
  import arcalis_pkg::*;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  localparam schema_t S = '{'{fid: 16'd0, ttype: T_STOP}, '{fid: 16'd7, ttype: T_STRING},
                            '{fid: 16'd0, ttype: T_STOP}, '{fid: 16'd0, ttype: T_STOP},
                            '{fid: 16'd3, ttype: T_I32},  '{fid: 16'd0, ttype: T_STOP},
                            '{fid: 16'd0, ttype: T_STOP}, '{fid: 16'd0, ttype: T_I64}};
  logic [2:0] idx, slot;
  logic valid, last;
  logic [15:0] fid;
  logic [7:0] ftype;
  arcalis_resp_function #(.SCHEMA(S)) dut (.*);
  initial begin #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    idx = 0; #1 check(valid && !last && fid == 0 && ftype == T_I64 && slot == 0, "entry 0");
    idx = 1; #1 check(valid && !last && fid == 3 && ftype == T_I32 && slot == 3, "entry 1");
    idx = 2; #1 check(valid && last && fid == 7 && ftype == T_STRING && slot == 6, "entry 2");
    idx = 3; #1 check(!valid && !last, "past the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
