// tb_arcalis_top: end-to-end test of the accelerator tile at its default
// size (512 KiB cache, 16-entry TLB, 16-entry ROB, 1536-byte engine buffers).
//
// The testbench plays the NetCore, the AppCore, the NIC and the memory
// system. Memory is a sparse array of 64-byte lines answering after a fixed
// latency on the cache port and the page-walk port. It builds x86-64 style
// page tables for two processes (4 KB pages for the network buffers, one 2 MB
// page for the application buffers), writes Thrift CALL messages where the
// NIC would place them, drives the UC command stores and polling loads
// exactly as the software in front of the accelerator would, and checks the
// App. Recv objects and Net. Resp packets byte for byte against values it
// builds itself.
//
// Scenarios: set / get / ComposeUniqueId requests (one with an unknown field
// that must be skipped), the application ready before and after the packet
// (IDLE_RESP on both engines), a 1518-byte packet, a translation fault and
// its retry, an unknown method, receive and response transfers competing
// for the memory pipeline, a packet rewritten in place (cache invalidation),
// a TLB flush, a store to a read-only page, and accesses the snooper must
// ignore. Each mechanism is counted and one that never happened is a
// failure.
`timescale 1ns/1ps
module tb_arcalis_top;
  import arcalis_pkg::*;

  localparam longint CMD_BASE   = 64'h0000_00F0_0000;
  localparam longint ROOT_NET   = 64'h0000_0010_0000;
  localparam longint ROOT_APP   = 64'h0000_0010_1000;
  localparam longint VA_NRECV   = 64'h0000_4000_0000;
  localparam longint VA_NRESP   = 64'h0000_4000_2000;
  localparam longint VA_NFAULT  = 64'h0000_4000_8000;
  localparam longint VA_NRO     = 64'h0000_4000_A000;
  localparam longint PA_NRECV   = 64'h0000_0100_0000;
  localparam longint PA_NRESP   = 64'h0000_0100_2000;
  localparam longint PA_NFAULT  = 64'h0000_0100_8000;
  localparam longint PA_NRO     = 64'h0000_0100_A000;
  localparam longint VA_AREGION = 64'h0000_6000_0000;
  localparam longint PA_AREGION = 64'h0000_0400_0000;
  localparam longint VA_ARECV   = VA_AREGION;
  localparam longint VA_ARESP   = VA_AREGION + 64'h1000;
  localparam longint PA_ARECV   = PA_AREGION;
  localparam longint PA_ARESP   = PA_AREGION + 64'h1000;
  localparam int     MEM_LAT    = 6;

  logic clk = 1'b0, rst_n = 1'b0;
  always #0.5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---------------- DUT ----------------
  logic        cfg_we, tlb_flush;
  pa_t         cfg_base, cfg_limit;
  pa_t         cfg_root [2];
  logic        snp_valid, snp_uc, snp_store, snp_hit, ld_rsp_valid, illegal_cmd;
  pa_t         snp_addr;
  logic [63:0] snp_wdata, ld_rsp_data;
  logic        mem_req_valid, mem_req_ready, mem_req_write, mem_rsp_valid, inv_valid;
  pa_t         mem_req_addr, inv_addr;
  line_t       mem_req_wdata, mem_rsp_data;
  logic        ptw_req_valid, ptw_req_ready, ptw_rsp_valid;
  pa_t         ptw_req_addr;
  line_t       ptw_rsp_data;
  eng_state_e  rx_state, tx_state;
  logic [31:0] cache_hits, cache_misses, tlb_misses;

  arcalis_top dut (.*);

  // ---------------- memory model ----------------
  line_t mem [longint];

  function automatic line_t rd_line(input longint a);
    return mem.exists(a >> 6) ? mem[a >> 6] : '0;
  endfunction
  function automatic logic [7:0] rd_byte(input longint a);
    line_t l = rd_line(a);
    return l[(a & 63) * 8 +: 8];
  endfunction
  function automatic void wr_byte(input longint a, input logic [7:0] b);
    line_t l = rd_line(a);
    l[(a & 63) * 8 +: 8] = b;
    mem[a >> 6] = l;
  endfunction
  function automatic logic [63:0] rd64(input longint a);
    logic [63:0] v;
    for (int i = 0; i < 8; i++) v[i*8 +: 8] = rd_byte(a + i);
    return v;
  endfunction
  function automatic void wr64(input longint a, input logic [63:0] v);
    for (int i = 0; i < 8; i++) wr_byte(a + i, v[i*8 +: 8]);
  endfunction
  function automatic logic [31:0] rd32(input longint a);
    return {rd_byte(a + 3), rd_byte(a + 2), rd_byte(a + 1), rd_byte(a)};
  endfunction

  // cache port: reads answer after MEM_LAT cycles, writes are accepted at once
  int     rd_cnt;
  longint rd_addr;
  logic   rd_busy;
  int     ptw_cnt;
  longint ptw_addr_q;
  logic   ptw_busy;
  int     mem_writes = 0;
  assign mem_req_ready = !rd_busy;
  assign ptw_req_ready = !ptw_busy;
  always_ff @(posedge clk) begin
    mem_rsp_valid <= 1'b0;
    ptw_rsp_valid <= 1'b0;
    if (!rst_n) begin
      rd_busy <= 1'b0;
      ptw_busy <= 1'b0;
    end else begin
      if (mem_req_valid && mem_req_ready) begin
        if (mem_req_write) begin
          mem[longint'(mem_req_addr) >> 6] = mem_req_wdata;
          mem_writes++;
        end else begin
          rd_busy <= 1'b1;
          rd_addr <= longint'(mem_req_addr);
          rd_cnt  <= MEM_LAT;
        end
      end
      if (rd_busy) begin
        if (rd_cnt == 0) begin
          rd_busy       <= 1'b0;
          mem_rsp_valid <= 1'b1;
          mem_rsp_data  <= rd_line(rd_addr);
        end else rd_cnt <= rd_cnt - 1;
      end
      if (ptw_req_valid && ptw_req_ready) begin
        ptw_busy   <= 1'b1;
        ptw_addr_q <= longint'(ptw_req_addr);
        ptw_cnt    <= MEM_LAT;
      end
      if (ptw_busy) begin
        if (ptw_cnt == 0) begin
          ptw_busy      <= 1'b0;
          ptw_rsp_valid <= 1'b1;
          ptw_rsp_data  <= rd_line(ptw_addr_q);
        end else ptw_cnt <= ptw_cnt - 1;
      end
    end
  end

  // ---------------- page tables ----------------
  longint next_table = 64'h0000_0020_0000;
  function automatic longint walk_alloc(input longint tbl, input int idx);
    logic [63:0] e = rd64(tbl + idx * 8);
    if (!e[0]) begin
      e = next_table | 64'h3;
      wr64(tbl + idx * 8, e);
      next_table += 4096;
    end
    return {e[47:12], 12'd0};
  endfunction
  function automatic void map_page(input longint root, input longint va, input longint pa,
                                   input bit big, input bit writable);
    longint t3 = walk_alloc(root, int'(va[47:39]));
    longint t2 = walk_alloc(t3, int'(va[38:30]));
    if (big) wr64(t2 + va[29:21] * 8, pa | 64'h81 | (writable ? 64'h2 : 64'h0));
    else begin
      longint t1 = walk_alloc(t2, int'(va[29:21]));
      wr64(t1 + va[20:12] * 8, pa | 64'h1 | (writable ? 64'h2 : 64'h0));
    end
  endfunction

  // ---------------- core-side helpers ----------------
  task automatic uc_store(input opcode_e op, input longint data);
    @(negedge clk);
    snp_valid = 1'b1; snp_uc = 1'b1; snp_store = 1'b1;
    snp_addr  = pa_t'(CMD_BASE + 64'(op) * 8);
    snp_wdata = {data[59:0], op};
    @(negedge clk);
    snp_valid = 1'b0;
  endtask

  task automatic uc_load(input opcode_e op, output logic [63:0] rsp);
    int n = 0;
    @(negedge clk);
    snp_valid = 1'b1; snp_uc = 1'b1; snp_store = 1'b0;
    snp_addr  = pa_t'(CMD_BASE + 64'(op));
    @(negedge clk);
    snp_valid = 1'b0;
    while (!ld_rsp_valid && n < 20) begin @(posedge clk); #0.1; n++; end
    check(ld_rsp_valid, "UC load answered");
    rsp = ld_rsp_data;
  endtask

  int n_pending = 0;
  task automatic poll(input opcode_e op, output status_t st);
    logic [63:0] r;
    int n = 0;
    do begin
      uc_load(op, r);
      st = status_t'(r);
      if (st.kind == STAT_PENDING) begin
        n_pending++;
        repeat (20) @(posedge clk);
      end
      n++;
    end while (st.kind == STAT_PENDING && n < 2000);
  endtask

  // NIC / core writes: update memory and send invalidations
  int n_inv = 0;
  task automatic put_bytes(input longint pa, input logic [7:0] q[$]);
    for (int i = 0; i < q.size(); i++) wr_byte(pa + i, q[i]);
    for (longint l = pa >> 6; l <= (pa + q.size() - 1) >> 6; l++) begin
      @(negedge clk);
      inv_valid = 1'b1;
      inv_addr  = pa_t'(l << 6);
      @(negedge clk);
      inv_valid = 1'b0;
      n_inv++;
    end
  endtask

  // ---------------- Thrift message builders ----------------
  function automatic void be(ref logic [7:0] q[$], input longint v, input int n);
    for (int i = n - 1; i >= 0; i--) q.push_back(8'(v >> (8 * i)));
  endfunction
  function automatic void str(ref logic [7:0] q[$], input string s);
    for (int i = 0; i < s.len(); i++) q.push_back(s[i]);
  endfunction
  function automatic void call_hdr(ref logic [7:0] q[$], input string name, input int seq);
    be(q, 32'h8001_0001, 4); be(q, name.len(), 4); str(q, name); be(q, seq, 4);
  endfunction
  function automatic void fld_str(ref logic [7:0] q[$], input int id, input string s);
    q.push_back(T_STRING); be(q, id, 2); be(q, s.len(), 4); str(q, s);
  endfunction

  // ---------------- statistics ----------------
  int n_rx_idle_resp = 0, n_tx_idle_resp = 0, n_rx_drain = 0, n_tx_drain = 0;
  int n_contend = 0, n_illegal = 0;
  eng_state_e rx_prev, tx_prev;
  always @(posedge clk) if (rst_n) begin
    if (rx_state == ST_IDLE_RESP && rx_prev != ST_IDLE_RESP) n_rx_idle_resp++;
    if (tx_state == ST_IDLE_RESP && tx_prev != ST_IDLE_RESP) n_tx_idle_resp++;
    if (rx_state == ST_DRAIN && rx_prev != ST_DRAIN) n_rx_drain++;
    if (tx_state == ST_DRAIN && tx_prev != ST_DRAIN) n_tx_drain++;
    for (int e = 0; e < 2; e++) if (dut.e_req[e] && dut.u_arb.busy_q && dut.u_arb.owner_q != 1'(e)) n_contend++;
    if (illegal_cmd) n_illegal++;
    rx_prev <= rx_state;
    tx_prev <= tx_state;
  end

  // ---------------- checks on results ----------------
  task automatic check_slot_str(input longint obj, input int slot, input string s, input string tag);
    logic [63:0] v = rd64(obj + SLOT_OFF + 8 * slot);
    bit ok = (v[63:32] == s.len());
    for (int i = 0; i < s.len(); i++) ok &= (rd_byte(obj + v[31:0] + i) == s[i]);
    check(ok, {tag, ": string slot"});
  endtask

  task automatic check_wire(input longint pa, input logic [7:0] exp[$], input string tag);
    bit ok = 1'b1;
    for (int i = 0; i < exp.size(); i++)
      if (rd_byte(pa + i) != exp[i]) begin
        ok = 1'b0;
        $display("  %s byte %0d: got %02x exp %02x", tag, i, rd_byte(pa + i), exp[i]);
      end
    check(ok, {tag, ": wire bytes"});
  endtask

  // receive one request and check the object header
  task automatic do_rx(input logic [7:0] pkt[$], input bit app_first, input int exp_func,
                       input int exp_seq, input logic [7:0] exp_mask, output status_t st,
                       input string tag);
    put_bytes(PA_NRECV, pkt);
    if (app_first) uc_store(CMD_APP_READY_FLAG, VA_ARECV);
    uc_store(CMD_SEND_NET_BUF, VA_NRECV);
    uc_store(CMD_SEND_NET_LEN, pkt.size());
    if (!app_first) begin
      repeat (400) @(posedge clk);
      uc_store(CMD_APP_READY_FLAG, VA_ARECV);
    end
    poll(CMD_APP_READY_FLAG, st);
    check(st.kind == STAT_READY, {tag, ": receive completes READY"});
    check(rd32(PA_ARECV) == exp_func, {tag, ": func id"});
    check(rd32(PA_ARECV + 4) == exp_seq, {tag, ": seqid"});
    check(rd32(PA_ARECV + 8) == 32'(exp_mask), {tag, ": present mask"});
    check(rd32(PA_ARECV + 12) == 32'(st.value), {tag, ": total length"});
  endtask

  // send one response object and return the wire length
  task automatic do_tx(input logic [7:0] obj[$], input bit net_first, output status_t st);
    put_bytes(PA_ARESP, obj);
    if (net_first) uc_store(CMD_DPDK_NET_FLAG, VA_NRESP);
    uc_store(CMD_SEND_APP_BUF, VA_ARESP);
    uc_store(CMD_SEND_APP_RESP, obj.size());
    if (!net_first) begin
      repeat (400) @(posedge clk);
      uc_store(CMD_DPDK_NET_FLAG, VA_NRESP);
    end
    poll(CMD_DPDK_NET_FLAG, st);
  endtask

  function automatic void obj_hdr(ref logic [7:0] q[$], input int func, input int seq,
                                  input int mask, input int total);
    q.delete();
    for (int i = 0; i < 4; i++) q.push_back(8'(func >> (8 * i)));
    for (int i = 0; i < 4; i++) q.push_back(8'(seq >> (8 * i)));
    for (int i = 0; i < 4; i++) q.push_back(8'(mask >> (8 * i)));
    for (int i = 0; i < 4; i++) q.push_back(8'(total >> (8 * i)));
    while (q.size() < DATA_OFF) q.push_back(8'd0);
  endfunction
  function automatic void obj_slot(ref logic [7:0] q[$], input int slot, input logic [63:0] v);
    for (int i = 0; i < 8; i++) q[SLOT_OFF + 8 * slot + i] = v[i*8 +: 8];
  endfunction

  // ---------------- stimulus ----------------
  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] pkt[$], obj[$], exp[$];
    status_t st;
    string   big;
    int      t0, hits0, tlbm0;

    snp_valid = 0; snp_uc = 0; snp_store = 0; snp_addr = '0; snp_wdata = '0;
    cfg_we = 0; cfg_base = '0; cfg_limit = '0; cfg_root[0] = '0; cfg_root[1] = '0;
    tlb_flush = 0; inv_valid = 0; inv_addr = '0;
    map_page(ROOT_NET, VA_NRECV, PA_NRECV, 0, 1);
    map_page(ROOT_NET, VA_NRECV + 4096, PA_NRECV + 4096, 0, 1);
    map_page(ROOT_NET, VA_NRESP, PA_NRESP, 0, 1);
    map_page(ROOT_NET, VA_NRO, PA_NRO, 0, 0);
    map_page(ROOT_APP, VA_AREGION, PA_AREGION, 1, 1);
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    cfg_we = 1; cfg_base = pa_t'(CMD_BASE); cfg_limit = pa_t'(CMD_BASE + 4096);
    cfg_root[0] = pa_t'(ROOT_NET); cfg_root[1] = pa_t'(ROOT_APP);
    @(negedge clk);
    cfg_we = 0;

    // --- snooper ignores cacheable and out-of-range accesses ---
    @(negedge clk);
    snp_valid = 1; snp_uc = 0; snp_store = 1; snp_addr = pa_t'(CMD_BASE + 8); snp_wdata = 64'h11;
    #0.1 check(!snp_hit, "cacheable access in range ignored");
    snp_uc = 1; snp_addr = pa_t'(CMD_BASE + 8192);
    #0.1 check(!snp_hit, "UC access outside range ignored");
    snp_addr = pa_t'(CMD_BASE + 8);
    #0.1 check(snp_hit, "UC access in range claimed");
    snp_wdata = 64'h0;   // opcode 0: NOP is not a command
    @(negedge clk); snp_valid = 0;
    uc_store(opcode_e'(4'hF), 64'h0);
    repeat (4) @(posedge clk);
    check(n_illegal >= 1, "unknown opcode flagged");

    // --- RPC 1: set("foo", "barbaz"), application ready first ---
    pkt.delete(); call_hdr(pkt, "set", 7); fld_str(pkt, 1, "foo"); fld_str(pkt, 2, "barbaz"); pkt.push_back(T_STOP);
    t0 = $time;
    do_rx(pkt, 1, 0, 7, 8'b11, st, "set");
    $display("set: receive round trip %0d cycles", ($time - t0));
    check(st.value == DATA_OFF + 9, "set: object length");
    check_slot_str(PA_ARECV, 0, "foo", "set key");
    check_slot_str(PA_ARECV, 1, "barbaz", "set value");

    // response: bool true; network buffer given late -> TxEngine waits in IDLE_RESP
    obj_hdr(obj, 0, 7, 1, DATA_OFF); obj_slot(obj, 0, 64'd1);
    do_tx(obj, 0, st);
    check(st.kind == STAT_READY, "set reply: READY");
    exp.delete(); be(exp, 32'h8001_0002, 4); be(exp, 3, 4); str(exp, "set"); be(exp, 7, 4);
    exp.push_back(T_BOOL); be(exp, 0, 2); exp.push_back(8'd1); exp.push_back(T_STOP);
    check(st.value == exp.size(), "set reply: wire length");
    check_wire(PA_NRESP, exp, "set reply");

    // --- RPC 2: ComposeUniqueId(req_id, post_type) + unknown field, app late ---
    pkt.delete(); call_hdr(pkt, "ComposeUniqueId", 32'h1234_5678);
    pkt.push_back(T_I64); be(pkt, 1, 2); be(pkt, 64'h0102_0304_0506_0708, 8);
    pkt.push_back(T_I32); be(pkt, 9, 2); be(pkt, 32'hDEAD_BEEF, 4);     // unknown: skipped
    pkt.push_back(T_I32); be(pkt, 2, 2); be(pkt, 3, 4);
    pkt.push_back(T_STOP);
    do_rx(pkt, 0, 2, 32'h1234_5678, 8'b11, st, "uid");
    check(rd64(PA_ARECV + SLOT_OFF) == 64'h0102_0304_0506_0708, "uid: req_id");
    check(rd64(PA_ARECV + SLOT_OFF + 8) == 64'd3, "uid: post_type");
    check(st.value == DATA_OFF, "uid: no string data");

    obj_hdr(obj, 2, 32'h1234_5678, 1, DATA_OFF); obj_slot(obj, 0, 64'h00AB_CDEF_0011_2233);
    do_tx(obj, 1, st);
    exp.delete(); be(exp, 32'h8001_0002, 4); be(exp, 15, 4); str(exp, "ComposeUniqueId");
    be(exp, 32'h1234_5678, 4); exp.push_back(T_I64); be(exp, 0, 2); be(exp, 64'h00AB_CDEF_0011_2233, 8);
    exp.push_back(T_STOP);
    check(st.kind == STAT_READY && st.value == exp.size(), "uid reply: READY and length");
    check_wire(PA_NRESP, exp, "uid reply");

    // --- RPC 3: get with a key filling a 1518-byte packet ---
    big = "";
    for (int i = 0; i < 1518 - 4 - 4 - 3 - 4 - 7 - 1; i++) big = {big, string'(8'h41 + 8'(i % 26))};
    pkt.delete(); call_hdr(pkt, "get", 99); fld_str(pkt, 1, big); pkt.push_back(T_STOP);
    check(pkt.size() == 1518, "get: packet is 1518 bytes");
    do_rx(pkt, 1, 1, 99, 8'b1, st, "get1518");
    check_slot_str(PA_ARECV, 0, big, "get1518 key");

    // response with a 1400-byte string value, competing with a new receive
    obj_hdr(obj, 1, 99, 1, DATA_OFF + 1400); obj_slot(obj, 0, {32'd1400, 32'(DATA_OFF)});
    for (int i = 0; i < 1400; i++) obj.push_back(8'(i * 7));
    put_bytes(PA_ARESP, obj);
    pkt.delete(); call_hdr(pkt, "set", 100); fld_str(pkt, 1, "k"); fld_str(pkt, 2, big.substr(0, 999)); pkt.push_back(T_STOP);
    put_bytes(PA_NRECV, pkt);
    uc_store(CMD_DPDK_NET_FLAG, VA_NRESP);
    uc_store(CMD_APP_READY_FLAG, VA_ARECV + 2048);
    uc_store(CMD_SEND_APP_BUF, VA_ARESP);
    uc_store(CMD_SEND_NET_BUF, VA_NRECV);
    uc_store(CMD_SEND_APP_RESP, obj.size());
    uc_store(CMD_SEND_NET_LEN, pkt.size());
    poll(CMD_DPDK_NET_FLAG, st);
    exp.delete(); be(exp, 32'h8001_0002, 4); be(exp, 3, 4); str(exp, "get"); be(exp, 99, 4);
    exp.push_back(T_STRING); be(exp, 0, 2); be(exp, 1400, 4);
    for (int i = 0; i < 1400; i++) exp.push_back(8'(i * 7));
    exp.push_back(T_STOP);
    check(st.kind == STAT_READY && st.value == exp.size(), "get reply: READY and length");
    check_wire(PA_NRESP, exp, "get reply");
    poll(CMD_APP_READY_FLAG, st);
    check(st.kind == STAT_READY, "concurrent set: READY");
    check_slot_str(PA_ARECV + 2048, 1, big.substr(0, 999), "concurrent set value");

    // --- packet rewritten in place: invalidation keeps the cache coherent ---
    hits0 = cache_hits;
    pkt.delete(); call_hdr(pkt, "get", 5); fld_str(pkt, 1, "new-key"); pkt.push_back(T_STOP);
    do_rx(pkt, 1, 1, 5, 8'b1, st, "rewrite");
    check_slot_str(PA_ARECV, 0, "new-key", "rewrite key");
    // same packet again without rewriting it: served from the engine cache
    uc_store(CMD_APP_READY_FLAG, VA_ARECV);
    uc_store(CMD_SEND_NET_BUF, VA_NRECV);
    uc_store(CMD_SEND_NET_LEN, pkt.size());
    poll(CMD_APP_READY_FLAG, st);
    check(st.kind == STAT_READY, "repeat: READY");
    check(cache_hits > hits0, "repeat: cache hits");

    // --- translation fault and retry ---
    pkt.delete(); call_hdr(pkt, "get", 6); fld_str(pkt, 1, "abc"); pkt.push_back(T_STOP);
    put_bytes(PA_NFAULT, pkt);
    uc_store(CMD_APP_READY_FLAG, VA_ARECV);
    uc_store(CMD_SEND_NET_BUF, VA_NFAULT);
    uc_store(CMD_SEND_NET_LEN, pkt.size());
    poll(CMD_APP_READY_FLAG, st);
    check(st.kind == STAT_FAULT && st.value == VA_NFAULT, "unmapped buffer: FAULT with VA");
    map_page(ROOT_NET, VA_NFAULT, PA_NFAULT, 0, 1);     // the OS populates the page
    uc_store(CMD_APP_READY_FLAG, VA_ARECV);
    uc_store(CMD_SEND_NET_BUF, VA_NFAULT);
    uc_store(CMD_SEND_NET_LEN, pkt.size());
    poll(CMD_APP_READY_FLAG, st);
    check(st.kind == STAT_READY, "retry after fault: READY");
    check_slot_str(PA_ARECV, 0, "abc", "retry key");

    // --- store to a read-only page faults ---
    obj_hdr(obj, 0, 1, 1, DATA_OFF); obj_slot(obj, 0, 64'd0);
    put_bytes(PA_ARESP, obj);
    uc_store(CMD_DPDK_NET_FLAG, VA_NRO);
    uc_store(CMD_SEND_APP_BUF, VA_ARESP);
    uc_store(CMD_SEND_APP_RESP, obj.size());
    poll(CMD_DPDK_NET_FLAG, st);
    check(st.kind == STAT_FAULT && st.value == VA_NRO, "read-only Net. Resp: FAULT");

    // --- unknown method ---
    pkt.delete(); call_hdr(pkt, "delete", 8); pkt.push_back(T_STOP);
    put_bytes(PA_NRECV, pkt);
    uc_store(CMD_SEND_NET_BUF, VA_NRECV);
    uc_store(CMD_SEND_NET_LEN, pkt.size());
    poll(CMD_APP_READY_FLAG, st);
    check(st.kind == STAT_PROTO, "unknown method: PROTO error");

    // --- TLB flush forces new walks ---
    tlbm0 = tlb_misses;
    @(negedge clk); tlb_flush = 1; @(negedge clk); tlb_flush = 0;
    pkt.delete(); call_hdr(pkt, "get", 9); fld_str(pkt, 1, "z"); pkt.push_back(T_STOP);
    do_rx(pkt, 0, 1, 9, 8'b1, st, "after flush");
    check(tlb_misses > tlbm0, "flush: TLB walks again");

    // --- mechanisms seen ---
    $display("mechanisms: rx IDLE_RESP %0d, tx IDLE_RESP %0d, rx DRAIN %0d, tx DRAIN %0d, contention %0d,",
             n_rx_idle_resp, n_tx_idle_resp, n_rx_drain, n_tx_drain, n_contend);
    $display("            pending polls %0d, invalidations %0d, cache hits %0d misses %0d, TLB misses %0d, illegal %0d",
             n_pending, n_inv, cache_hits, cache_misses, tlb_misses, n_illegal);
    check(n_rx_idle_resp > 0, "mechanism: RxEngine IDLE_RESP");
    check(n_tx_idle_resp > 0, "mechanism: TxEngine IDLE_RESP");
    check(n_rx_drain + n_tx_drain > 0, "mechanism: DRAIN");
    check(n_contend > 0, "mechanism: arbiter contention");
    check(n_pending > 0, "mechanism: polling while pending");
    check(cache_misses > 0 && cache_hits > 0, "mechanism: cache hit and miss");
    check(tlb_misses > 0, "mechanism: page walk");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
