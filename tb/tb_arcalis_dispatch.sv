// tb_arcalis_dispatch: checks method-name dispatch against the method table:
// each known name gives its index, while prefixes, extensions, wrong lengths
// and unknown names miss; bytes beyond the length are ignored.
`timescale 1ns/1ps
module tb_arcalis_dispatch;
  import arcalis_pkg::*;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  name_t name;
  logic [7:0] name_len;
  logic hit;
  logic [FUNC_W-1:0] func_id;
  arcalis_dispatch dut (.*);
  initial begin #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic probe(input string s, input int len, input bit exp_hit, input int exp_id);
    name = str2name(s); name_len = 8'(len);
    #1 check(hit == exp_hit, {"hit for ", s});
    if (exp_hit) check(func_id == FUNC_W'(exp_id), {"id for ", s});
  endtask
  initial begin
    probe("set", 3, 1, 0);
    probe("get", 3, 1, 1);
    probe("ComposeUniqueId", 15, 1, 2);
    probe("se", 2, 0, 0);
    probe("sets", 4, 0, 0);
    probe("setX", 3, 1, 0);              // byte past the length ignored
    probe("ComposeUniqueIx", 15, 0, 0);
    probe("Get", 3, 0, 0);
    probe("", 0, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
