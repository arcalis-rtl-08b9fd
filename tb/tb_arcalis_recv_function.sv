// tb_arcalis_recv_function: checks the receive stub of the "set" and
// "ComposeUniqueId" methods: matching (id, type) pairs land in their slots;
// an unknown id, a wrong type and STOP are rejected.
`timescale 1ns/1ps
module tb_arcalis_recv_function;
  import arcalis_pkg::*;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  logic [15:0] fid_a, fid_b;
  logic [7:0]  ft_a, ft_b;
  logic hit_a, hit_b;
  logic [2:0] slot_a, slot_b;
  arcalis_recv_function #(.SCHEMA(RECV_SCHEMAS[0])) u_set (.fid(fid_a), .ftype(ft_a), .hit(hit_a), .slot(slot_a));
  arcalis_recv_function #(.SCHEMA(RECV_SCHEMAS[2])) u_uid (.fid(fid_b), .ftype(ft_b), .hit(hit_b), .slot(slot_b));
  initial begin #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    fid_a = 1; ft_a = T_STRING; fid_b = 1; ft_b = T_I64;
    #1 check(hit_a && slot_a == 0 && hit_b && slot_b == 0, "field 1");
    fid_a = 2; ft_a = T_STRING; fid_b = 2; ft_b = T_I32;
    #1 check(hit_a && slot_a == 1 && hit_b && slot_b == 1, "field 2");
    fid_a = 2; ft_a = T_I32; fid_b = 2; ft_b = T_STRING;
    #1 check(!hit_a && !hit_b, "type mismatch skipped");
    fid_a = 3; ft_a = T_STRING; fid_b = 9; ft_b = T_I32;
    #1 check(!hit_a && !hit_b, "unknown id skipped");
    fid_a = 0; ft_a = T_STOP; fid_b = 0; ft_b = T_STOP;
    #1 check(!hit_a && !hit_b, "unused entries never match");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
