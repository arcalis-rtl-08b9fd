// tb_arcalis_deserializer: checks header parsing, dispatch and field
// deserialization on random Thrift binary-protocol CALL messages.
// Each message picks a method (set, get, ComposeUniqueId), a random sequence
// id, its argument fields in random order with random string contents, and
// random extra fields the method does not know (which must be skipped).
// The bench works out the expected object independently: function id,
// sequence id, present mask, each scalar zero-extended in its slot, and each
// string reachable through its {length, offset} slot inside the object.
// Malformed messages (bad version, unknown method, truncated, struct-typed
// field) must end with err. The byte read port is served combinationally
// from a bench array and the write port stores into another.
`timescale 1ns/1ps
module tb_arcalis_deserializer;
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
  logic [FUNC_W-1:0] func_id;
  arcalis_deserializer dut (.*);
  initial begin repeat (2000000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  logic [7:0] inbuf [BUF];
  logic [7:0] obj [OUTB];
  assign in_data = (int'(in_addr) < BUF) ? inbuf[in_addr] : 8'hxx;
  always @(posedge clk) if (out_we) obj[out_addr] <= out_data;

  function automatic void be(ref logic [7:0] q[$], input longint v, input int n);
    for (int i = n - 1; i >= 0; i--) q.push_back(8'(v >> (8 * i)));
  endfunction
  function automatic string rstr(input int n);
    string s = "";
    for (int i = 0; i < n; i++) s = {s, string'(8'($urandom_range(32, 126)))};
    return s;
  endfunction
  function automatic logic [63:0] rd(input int a, input int n);
    logic [63:0] v = 0;
    for (int i = 0; i < n; i++) v[i*8 +: 8] = obj[a + i];
    return v;
  endfunction

  task automatic run(input logic [7:0] pkt[$], input int len, output bit e, output int olen);
    int n = 0;
    for (int i = 0; i < BUF; i++) inbuf[i] = (i < pkt.size()) ? pkt[i] : 8'($urandom);
    for (int i = 0; i < OUTB; i++) obj[i] = 8'hEE;
    @(negedge clk); start = 1; in_len = 16'(len);
    @(negedge clk); start = 0;
    while (!done && n < 20000) begin @(negedge clk); n++; end
    check(done, "finished");
    e = err; olen = int'(out_len);
  endtask

  // expected per-slot contents
  typedef struct { bit present; bit is_str; logic [63:0] val; string s; } slot_t;

  initial begin
    logic [7:0] pkt[$];
    slot_t slots[MAX_FIELDS];
    string names[3];
    logic [31:0] seq;
    int func, nargs, nx, order[$], str_total, olen, max_s;
    logic [7:0] mask;
    bit e, ok;
    int k;
    string s;
    logic [63:0] v;
    names[0] = "set"; names[1] = "get"; names[2] = "ComposeUniqueId";
    start = 0; in_len = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 150; it++) begin
      func = $urandom_range(0, 2); seq = $urandom;
      pkt.delete(); mask = 0; str_total = 0;
      for (int m = 0; m < MAX_FIELDS; m++) slots[m] = '{0, 0, 0, ""};
      be(pkt, 32'h8001_0001, 4); be(pkt, names[func].len(), 4);
      for (int i = 0; i < names[func].len(); i++) pkt.push_back(names[func][i]);
      be(pkt, seq, 4);
      nargs = (func == 1) ? 1 : 2;
      order.delete();
      for (int k = 0; k < nargs; k++) if ($urandom_range(0, 5) != 0) order.push_back(k);
      order.shuffle();
      max_s = (it % 10 == 0) ? 700 : 40;       // some near-MTU packets
      nx = $urandom_range(0, 2);
      for (int j = 0; j < order.size() + nx; j++) begin
        if (j < order.size()) begin
          k = order[j];
          mask[k] = 1;
          if (func == 2) begin
            if (k == 0) begin v = {$urandom, $urandom}; pkt.push_back(T_I64); be(pkt, 1, 2); be(pkt, v, 8); end
            else begin v = 64'($urandom); pkt.push_back(T_I32); be(pkt, 2, 2); be(pkt, v, 4); end
            slots[k] = '{1, 0, v, ""};
          end else begin
            s = rstr($urandom_range(0, max_s));
            pkt.push_back(T_STRING); be(pkt, k + 1, 2); be(pkt, s.len(), 4);
            for (int i = 0; i < s.len(); i++) pkt.push_back(s[i]);
            slots[k] = '{1, 1, 0, s}; str_total += s.len();
          end
        end else begin
          // unknown field: id 9..20 or a known id with the wrong type
          case ($urandom_range(0, 3))
            0: begin pkt.push_back(T_I32); be(pkt, $urandom_range(9, 20), 2); be(pkt, $urandom, 4); end
            1: begin pkt.push_back(T_BOOL); be(pkt, $urandom_range(9, 20), 2); pkt.push_back(8'd1); end
            2: begin pkt.push_back(T_STRING); be(pkt, $urandom_range(9, 20), 2); be(pkt, 5, 4);
                     for (int i = 0; i < 5; i++) pkt.push_back(8'h41); end
            default: begin pkt.push_back(T_I16); be(pkt, 1, 2); be(pkt, $urandom, 2); end
          endcase
        end
      end
      pkt.push_back(T_STOP);
      run(pkt, pkt.size(), e, olen);
      check(!e, $sformatf("message %0d accepted", it));
      check(func_id == FUNC_W'(func), "func id output");
      check(rd(0, 4) == 64'(func) && rd(4, 4) == 64'(32'(seq)) && rd(8, 4) == 64'(mask), "object header");
      check(olen == DATA_OFF + str_total && rd(12, 4) == 64'(olen), "object length");
      for (int k = 0; k < MAX_FIELDS; k++)
        if (slots[k].present) begin
          v = rd(SLOT_OFF + 8 * k, 8);
          if (!slots[k].is_str) check(v == slots[k].val, $sformatf("scalar slot %0d", k));
          else begin
            ok = (v[63:32] == 32'(slots[k].s.len())) && (v[31:0] >= DATA_OFF)
                     && (int'(v[31:0]) + slots[k].s.len() <= olen);
            for (int i = 0; ok && i < slots[k].s.len(); i++) ok = (obj[int'(v[31:0]) + i] == slots[k].s[i]);
            check(ok, $sformatf("string slot %0d", k));
          end
        end
      // the same message cut short must fail
      if (pkt.size() > 20) begin
        run(pkt, $urandom_range(1, pkt.size() - 1), e, olen);
        check(e, "truncated message rejected");
      end
    end
    // malformed headers and types
    pkt.delete(); be(pkt, 32'h8001_0002, 4); be(pkt, 3, 4); pkt.push_back("s"); pkt.push_back("e");
    pkt.push_back("t"); be(pkt, 1, 4); pkt.push_back(T_STOP);
    run(pkt, pkt.size(), e, olen); check(e, "REPLY type rejected");
    pkt[3] = 8'd1; pkt[0] = 8'h7F;
    run(pkt, pkt.size(), e, olen); check(e, "bad version rejected");
    pkt[0] = 8'h80; pkt[8] = "x";
    run(pkt, pkt.size(), e, olen); check(e, "unknown method rejected");
    pkt[8] = "s";
    run(pkt, pkt.size(), e, olen); check(!e && olen == DATA_OFF, "empty argument list accepted");
    void'(pkt.pop_back()); pkt.push_back(8'd12); be(pkt, 1, 2); pkt.push_back(T_STOP); pkt.push_back(T_STOP);
    run(pkt, pkt.size(), e, olen); check(e, "struct field rejected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
