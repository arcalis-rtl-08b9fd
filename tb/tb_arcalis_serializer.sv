// tb_arcalis_serializer: checks header creation and result serialization.
// Random result objects are built for each method (set -> bool,
// get -> string, ComposeUniqueId -> i64), sometimes with the result field
// absent, with random sequence ids and string contents up to near-MTU size.
// The bench builds the expected Thrift REPLY bytes itself and compares the
// written packet and its length. A function id outside the table and a
// string that points past the end of the object must end with err.
`timescale 1ns/1ps
module tb_arcalis_serializer;
  import arcalis_pkg::*;
  logic clk = 0, rst_n = 0;
  always #0.5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  localparam int BUF = 1536, OUTB = BUF + 128, AW = $clog2(OUTB);
  logic start, out_we, done, err;
  logic [15:0] in_len, out_len;
  logic [AW-1:0] in_addr, out_addr;
  logic [7:0] in_data, out_data;
  arcalis_serializer dut (.*);
  initial begin repeat (2000000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  logic [7:0] objbuf [OUTB];
  logic [7:0] wire_b [OUTB];
  assign in_data = objbuf[in_addr];
  always @(posedge clk) if (out_we) wire_b[out_addr] <= out_data;

  function automatic void be(ref logic [7:0] q[$], input longint v, input int n);
    for (int i = n - 1; i >= 0; i--) q.push_back(8'(v >> (8 * i)));
  endfunction
  function automatic void le(input int a, input longint v, input int n);
    for (int i = 0; i < n; i++) objbuf[a + i] = 8'(v >> (8 * i));
  endfunction

  task automatic run(input int len, output bit e, output int olen);
    int n = 0;
    for (int i = 0; i < OUTB; i++) wire_b[i] = 8'hEE;
    @(negedge clk); start = 1; in_len = 16'(len);
    @(negedge clk); start = 0;
    while (!done && n < 20000) begin @(negedge clk); n++; end
    check(done, "finished");
    e = err; olen = int'(out_len);
  endtask

  initial begin
    logic [7:0] exp[$];
    string names[3];
    int func, olen, slen, total, off;
    logic [31:0] seq;
    logic [63:0] v;
    bit e, present, ok;
    names[0] = "set"; names[1] = "get"; names[2] = "ComposeUniqueId";
    start = 0; in_len = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 200; it++) begin
      func = $urandom_range(0, 2); seq = $urandom; present = ($urandom_range(0, 7) != 0);
      for (int i = 0; i < OUTB; i++) objbuf[i] = 8'($urandom);
      for (int i = SLOT_OFF; i < DATA_OFF; i++) objbuf[i] = 8'h00;
      total = DATA_OFF;
      exp.delete();
      be(exp, 32'h8001_0002, 4); be(exp, names[func].len(), 4);
      for (int i = 0; i < names[func].len(); i++) exp.push_back(names[func][i]);
      be(exp, seq, 4);
      if (present) begin
        case (func)
          0: begin v = 64'($urandom_range(0, 1)); le(SLOT_OFF, v, 8);
                   exp.push_back(T_BOOL); be(exp, 0, 2); exp.push_back(v[7:0]); end
          1: begin
               slen = (it % 8 == 0) ? $urandom_range(1000, 1400) : $urandom_range(0, 60);
               off = DATA_OFF + $urandom_range(0, 16);
               total = off + slen;
               le(SLOT_OFF, {32'(slen), 32'(off)}, 8);
               exp.push_back(T_STRING); be(exp, 0, 2); be(exp, slen, 4);
               for (int i = 0; i < slen; i++) exp.push_back(objbuf[off + i]);
             end
          default: begin v = {$urandom, $urandom}; le(SLOT_OFF, v, 8);
                   exp.push_back(T_I64); be(exp, 0, 2); be(exp, v, 8); end
        endcase
      end
      exp.push_back(T_STOP);
      le(0, func, 4); le(4, seq, 4); le(8, present ? 1 : 0, 4); le(12, total, 4);
      run(total, e, olen);
      check(!e, $sformatf("object %0d accepted", it));
      check(olen == exp.size(), $sformatf("wire length %0d vs %0d", olen, exp.size()));
      ok = 1;
      for (int i = 0; i < exp.size(); i++) if (wire_b[i] != exp[i]) ok = 0;
      check(ok, $sformatf("wire bytes of reply %0d (func %0d)", it, func));
      // the same string object with a shortened length must be refused
      if (func == 1 && present && slen > 0) begin
        run(total - 1, e, olen);
        check(e, "string outside the object rejected");
      end
    end
    le(0, 3, 4);
    run(DATA_OFF, e, olen);
    check(e, "unknown function id rejected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
