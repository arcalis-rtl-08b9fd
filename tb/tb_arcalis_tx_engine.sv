// tb_arcalis_tx_engine: checks the response micro-engine end to end at the
// transfer level, with the same bench model of the memory pipeline as the
// receive-engine bench. Random result objects (bool, string up to 1536 B,
// i64) are placed in App. Resp of the AppCore address space; the engine must
// write the exact Thrift REPLY bytes into Net. Resp and report READY with the
// wire length. The Net. Resp address comes before, right after, or late
// (IDLE_RESP). Load faults, a zero or over-1664 B length and an unknown
// function id must give FAULT or PROTO completions and release the
// destination.
`timescale 1ns/1ps
module tb_arcalis_tx_engine;
  import arcalis_pkg::*;
  logic clk = 0, rst_n = 0;
  always #0.5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  logic req_valid, req_ready, dst_valid, dst_ready, xfer_req, xfer_ack, xfer_end, xfer_fault;
  logic ret_valid, done;
  va_t req_va, dst_va, fault_va;
  logic [15:0] req_len;
  xfer_t xfer;
  logic [7:0] wr_idx, ret_idx;
  line_t wr_data, ret_data;
  logic [4:0] mem_inflight;
  status_t status;
  eng_state_e state;
  arcalis_tx_engine dut (.*);
  initial begin repeat (3000000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // ---------------- byte memory, two address spaces ----------------
  logic [7:0] mem [longint];
  function automatic longint key(input bit asid, input longint va);
    return va | (longint'(asid) << 56);
  endfunction
  function automatic logic [7:0] rdb(input bit asid, input longint va);
    return mem.exists(key(asid, va)) ? mem[key(asid, va)] : 8'h00;
  endfunction
  function automatic logic [63:0] rdn(input bit asid, input longint va, input int n);
    logic [63:0] v = 0;
    for (int i = 0; i < n; i++) v[i*8 +: 8] = rdb(asid, va + i);
    return v;
  endfunction

  // ---------------- transfer-level model of the memory pipeline ----------------
  // Acknowledges a transfer after a random wait, issues its lines one per
  // cycle (stores read wr_data for the line index), ends the transfer when
  // all lines are issued and retires loads later in order, so requests are
  // still in flight after the end. fault_line >= 0 makes that line fault.
  int fault_line = -1;
  bit fault_stores_only = 0;
  int n_xfers = 0;
  initial begin
    xfer_t x;
    int issued, retired, inflight_n, flt;
    line_t l;
    xfer_ack = 0; xfer_end = 0; xfer_fault = 0; fault_va = '0; wr_idx = 0;
    ret_valid = 0; ret_idx = 0; ret_data = '0; mem_inflight = 0;
    forever begin
      @(negedge clk);
      xfer_end = 0; xfer_fault = 0; ret_valid = 0;
      if (xfer_req && $urandom_range(0, 2) == 0) begin
        x = xfer; n_xfers++;
        xfer_ack = 1; @(negedge clk); xfer_ack = 0;
        issued = 0; retired = 0; inflight_n = 0;
        flt = (fault_stores_only && !x.is_write) ? -1 : fault_line;
        while (issued < int'(x.nlines) && issued != flt) begin
          wr_idx = 8'(issued);
          #0.1;
          if (x.is_write)
            for (int b = 0; b < 64; b++) mem[key(x.asid, longint'(x.va) + issued * 64 + b)] = wr_data[b*8 +: 8];
          issued++; inflight_n++;
          mem_inflight = 5'(inflight_n);
          @(negedge clk);
          ret_valid = 0;
          if ($urandom_range(0, 1) == 0 && retired < issued) begin
            if (!x.is_write) begin
              for (int b = 0; b < 64; b++) l[b*8 +: 8] = rdb(x.asid, longint'(x.va) + retired * 64 + b);
              ret_valid = 1; ret_idx = 8'(retired); ret_data = l;
            end
            retired++; inflight_n--;
            mem_inflight = 5'(inflight_n);
          end
        end
        xfer_end = 1;
        if (issued == flt) begin xfer_fault = 1; fault_va = va_t'(longint'(x.va) + issued * 64); end
        @(negedge clk);
        xfer_end = 0; xfer_fault = 0; ret_valid = 0;
        // sometimes the remaining lines come back only much later
        if ($urandom_range(0, 1) == 0) repeat (100) @(negedge clk);
        while (retired < issued) begin
          repeat ($urandom_range(0, 2)) begin @(negedge clk); ret_valid = 0; end
          if (!x.is_write) begin
            for (int b = 0; b < 64; b++) l[b*8 +: 8] = rdb(x.asid, longint'(x.va) + retired * 64 + b);
            ret_valid = 1; ret_idx = 8'(retired); ret_data = l;
          end
          retired++; inflight_n--;
          mem_inflight = 5'(inflight_n);
          @(negedge clk);
          ret_valid = 0;
        end
      end
    end
  end

  // ---------------- FSM coverage ----------------
  int n_drain = 0, n_idle_resp = 0;
  eng_state_e prev;
  always @(posedge clk) if (rst_n) begin
    if (state == ST_DRAIN && prev != ST_DRAIN) n_drain++;
    if (state == ST_IDLE_RESP && prev != ST_IDLE_RESP) n_idle_resp++;
    prev <= state;
  end

  task automatic put(input bit asid, input longint va, input logic [7:0] q[$]);
    for (int i = 0; i < q.size(); i++) mem[key(asid, va + i)] = q[i];
  endtask
  function automatic void be(ref logic [7:0] q[$], input longint v, input int n);
    for (int i = n - 1; i >= 0; i--) q.push_back(8'(v >> (8 * i)));
  endfunction
  function automatic string rstr(input int n);
    string s = "";
    for (int i = 0; i < n; i++) s = {s, string'(8'($urandom_range(32, 126)))};
    return s;
  endfunction

  // Run one job: request first or destination first, or destination late
  // (after the engine parked in IDLE_RESP). Returns the completion status.
  task automatic job(input longint src, input int len, input longint dst, input int mode,
                     output status_t st);
    int n = 0;
    if (mode == 0) begin
      @(negedge clk); dst_valid = 1; dst_va = va_t'(dst);
      while (!dst_ready) @(negedge clk);
      @(negedge clk); dst_valid = 0;
    end
    @(negedge clk); req_valid = 1; req_va = va_t'(src); req_len = 16'(len);
    while (!req_ready) @(negedge clk);
    @(negedge clk); req_valid = 0;
    if (mode == 2) begin
      while (state != ST_IDLE_RESP && !done && n < 100000) begin @(negedge clk); n++; end
      repeat ($urandom_range(0, 20)) @(negedge clk);
    end
    if (mode != 0) begin
      dst_valid = 1; dst_va = va_t'(dst);
      while (!dst_ready && !done) @(negedge clk);
      @(negedge clk); dst_valid = 0;
    end
    n = 0;
    while (!done && n < 100000) begin @(negedge clk); n++; end
    check(done, "job completed");
    st = status;
    @(negedge clk);
    while (state != ST_IDLE_RECV && n < 100000) begin @(negedge clk); n++; end
  endtask

  localparam longint SRC = 64'h0000_2000_0000, DST = 64'h0000_9000_0000;
  function automatic void le(ref logic [7:0] q[$], input int a, input longint v, input int n);
    for (int i = 0; i < n; i++) q[a + i] = 8'(v >> (8 * i));
  endfunction
  initial begin
    logic [7:0] obj[$], exp[$];
    string names[3], s;
    int func, total;
    logic [31:0] seq;
    logic [63:0] v;
    status_t st;
    bit ok;
    names[0] = "set"; names[1] = "get"; names[2] = "ComposeUniqueId";
    req_valid = 0; dst_valid = 0; req_va = '0; dst_va = '0; req_len = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 60; it++) begin
      func = $urandom_range(0, 2); seq = $urandom;
      obj.delete(); exp.delete();
      for (int i = 0; i < DATA_OFF; i++) obj.push_back(8'h00);
      be(exp, 32'h8001_0002, 4); be(exp, names[func].len(), 4);
      for (int i = 0; i < names[func].len(); i++) exp.push_back(names[func][i]);
      be(exp, seq, 4);
      case (func)
        0: begin v = 64'($urandom_range(0, 1)); le(obj, SLOT_OFF, v, 8);
                 exp.push_back(T_BOOL); be(exp, 0, 2); exp.push_back(v[7:0]); end
        1: begin
             s = rstr((it % 5 == 0) ? $urandom_range(1400, 1536) : $urandom_range(0, 200));
             le(obj, SLOT_OFF, {32'(s.len()), 32'(DATA_OFF)}, 8);
             for (int i = 0; i < s.len(); i++) obj.push_back(s[i]);
             exp.push_back(T_STRING); be(exp, 0, 2); be(exp, s.len(), 4);
             for (int i = 0; i < s.len(); i++) exp.push_back(s[i]);
           end
        default: begin v = {$urandom, $urandom}; le(obj, SLOT_OFF, v, 8);
                 exp.push_back(T_I64); be(exp, 0, 2); be(exp, v, 8); end
      endcase
      exp.push_back(T_STOP);
      total = obj.size();
      le(obj, 0, func, 4); le(obj, 4, seq, 4); le(obj, 8, 1, 4); le(obj, 12, total, 4);
      put(ASID_APP, SRC, obj);
      fault_line = -1;
      job(SRC, total, DST, it % 3, st);
      check(st.kind == STAT_READY && st.value == 48'(exp.size()), $sformatf("tx %0d ready with wire length", it));
      ok = 1;
      for (int i = 0; i < exp.size(); i++) if (rdb(ASID_NET, DST + i) != exp[i]) ok = 0;
      check(ok, $sformatf("reply %0d bytes in Net. Resp", it));
      if (it % 4 == 1) begin
        fault_line = $urandom_range(0, (total - 1) / 64);
        job(SRC, total, DST + 64'h10_0000, 0, st);
        check(st.kind == STAT_FAULT && st.value == 48'(SRC + fault_line * 64), "load fault reported");
        check(dst_ready, "destination released after a fault");
        fault_line = -1;
      end
    end
    job(SRC, 0, DST, 0, st);
    check(st.kind == STAT_PROTO && st.detail == 14'd1, "zero length refused");
    job(SRC, 1665, DST, 0, st);
    check(st.kind == STAT_PROTO && st.detail == 14'd1, "object larger than the buffer refused");
    // unknown function id in the object
    obj[0] = 8'd3; put(ASID_APP, SRC, obj);
    job(SRC, DATA_OFF, DST, 1, st);
    check(st.kind == STAT_PROTO && st.detail == 14'd2, "unknown function refused");
    check(n_drain > 0 && n_idle_resp > 0, "DRAIN and IDLE_RESP both reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
