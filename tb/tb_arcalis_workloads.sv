// tb_arcalis_workloads: runs the evaluated RPC workloads through the whole
// accelerator tile at its default size and reports cycles per RPC.
//
// The bench is the software around the accelerator. The NetCore writes each
// request packet where the NIC would put it and hands it over with
// SEND_NET_BUF / SEND_NET_LEN. The AppCore gives its App. Recv buffer with
// APP_READY_FLAG, polls for the deserialized object, and runs the business
// logic itself: a key-value store for Memcached set/get, and a counter-based
// id for ComposeUniqueId. It then writes the result object to App. Resp and
// hands it over with SEND_APP_BUF / SEND_APP_RESP. The NetCore gives the
// Net. Resp buffer with DPDK_NET_FLAG and polls for the wire length. Every
// reply on the wire is checked byte for byte against the reply the bench
// builds from its own copy of the store.
//
// Workloads (one bench, differing only in mix and sizes):
//   memc_low / memc_mid / memc_high  set/get 20/80, 50/50, 80/20 (16 B keys,
//                                    32 B values: the mix sizes are not given,
//                                    the k16_v32 point is reused)
//   memc_tiny  k8_v8   and  memc_small  k16_v32, each at set ratios 0.5 and
//                                    0.05
//   packet sweep       set requests of 512, 1024 and 1518 bytes on the wire
//   unique_id          ComposeUniqueId(req_id, post_type) -> i64
//   latency sweep      memc k16_v32 set 50% and ComposeUniqueId with 5, 400
//                      and 700 cycles (ns at 1 GHz) added each way to every
//                      UC command and reply
// Keys are drawn with a skewed distribution (index = N * u^3, u uniform) as
// a stand-in for the Zipfian key popularity of the traces; the store starts
// with every key present, so the set share is the workload's. The run fails if
// any reply is wrong or any RPC does not complete.
`timescale 1ns/1ps
module tb_arcalis_workloads;
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
  // One-way core-to-accelerator latency in cycles (ns at 1 GHz), applied to
  // every UC access on the way in and to every UC load reply on the way back.
  int uc_delay = 0;
  task automatic uc_store(input opcode_e op, input longint data);
    repeat (uc_delay) @(posedge clk);
    @(negedge clk);
    snp_valid = 1'b1; snp_uc = 1'b1; snp_store = 1'b1;
    snp_addr  = pa_t'(CMD_BASE + 64'(op) * 8);
    snp_wdata = {data[59:0], op};
    @(negedge clk);
    snp_valid = 1'b0;
  endtask

  task automatic uc_load(input opcode_e op, output logic [63:0] rsp);
    int n = 0;
    repeat (uc_delay) @(posedge clk);
    @(negedge clk);
    snp_valid = 1'b1; snp_uc = 1'b1; snp_store = 1'b0;
    snp_addr  = pa_t'(CMD_BASE + 64'(op));
    @(negedge clk);
    snp_valid = 1'b0;
    while (!ld_rsp_valid && n < 20) begin @(posedge clk); #0.1; n++; end
    check(ld_rsp_valid, "UC load answered");
    rsp = ld_rsp_data;
    repeat (uc_delay) @(posedge clk);
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

  // ---------------- workload driver ----------------
  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  string kv [string];
  longint next_uid = 64'h1000;

  function automatic string mkstr(input int n, input int seed);
    string s = "";
    for (int i = 0; i < n; i++) s = {s, string'(8'(8'h61 + (seed * 7 + i * 13) % 26))};
    return s;
  endfunction
  function automatic string key_of(input int idx, input int klen);
    string s = $sformatf("k%0d_", idx);
    while (s.len() < klen) s = {s, "x"};
    return s.substr(0, klen - 1);
  endfunction

  // Read string slot k of the App. Recv object.
  function automatic string obj_str(input int k);
    logic [63:0] v = rd64(PA_ARECV + SLOT_OFF + 8 * k);
    string s = "";
    for (int i = 0; i < int'(v[63:32]); i++) s = {s, string'(rd_byte(PA_ARECV + v[31:0] + i))};
    return s;
  endfunction

  // One RPC: request packet in, reply packet out. Returns cycles from the
  // packet hand-over to the reply being ready.
  task automatic rpc(input logic [7:0] pkt[$], input int seq, output int cycles);
    status_t st;
    logic [7:0] obj[$], exp[$];
    string k, v, name;
    int func, t0;
    logic [63:0] r;
    put_bytes(PA_NRECV, pkt);
    t0 = $time;
    uc_store(CMD_APP_READY_FLAG, VA_ARECV);
    uc_store(CMD_SEND_NET_BUF, VA_NRECV);
    uc_store(CMD_SEND_NET_LEN, pkt.size());
    poll(CMD_APP_READY_FLAG, st);
    check(st.kind == STAT_READY, "request deserialized");
    func = rd32(PA_ARECV);
    check(rd32(PA_ARECV + 4) == 32'(seq), "sequence id");
    // business logic on the AppCore
    obj_hdr(obj, func, seq, 1, DATA_OFF);
    exp.delete();
    be(exp, 32'h8001_0002, 4);
    case (func)
      0: begin
           k = obj_str(0); v = obj_str(1); kv[k] = v; name = "set";
           obj_slot(obj, 0, 64'd1);
         end
      1: begin
           k = obj_str(0); name = "get";
           v = kv.exists(k) ? kv[k] : "";
           obj_slot(obj, 0, {32'(v.len()), 32'(DATA_OFF)});
           for (int i = 0; i < v.len(); i++) obj.push_back(v[i]);
           obj[12] = 8'(obj.size()); obj[13] = 8'(obj.size() >> 8);
         end
      default: begin
           name = "ComposeUniqueId";
           r = (rd64(PA_ARECV + SLOT_OFF) << 16) ^ next_uid;
           next_uid++;
           obj_slot(obj, 0, r);
         end
    endcase
    be(exp, name.len(), 4); str(exp, name); be(exp, seq, 4);
    case (func)
      0: begin exp.push_back(T_BOOL); be(exp, 0, 2); exp.push_back(8'd1); end
      1: begin exp.push_back(T_STRING); be(exp, 0, 2); be(exp, v.len(), 4); str(exp, v); end
      default: begin exp.push_back(T_I64); be(exp, 0, 2); be(exp, r, 8); end
    endcase
    exp.push_back(T_STOP);
    put_bytes(PA_ARESP, obj);
    uc_store(CMD_DPDK_NET_FLAG, VA_NRESP);
    uc_store(CMD_SEND_APP_BUF, VA_ARESP);
    uc_store(CMD_SEND_APP_RESP, obj.size());
    poll(CMD_DPDK_NET_FLAG, st);
    check(st.kind == STAT_READY && st.value == 48'(exp.size()), {name, " reply ready"});
    check_wire(PA_NRESP, exp, {name, " reply"});
    cycles = $time - t0;
  endtask

  int seq_no = 1;
  task automatic memc(input string wname, input int set_pct, input int klen, input int vlen,
                      input int n_rpc, input int n_keys);
    logic [7:0] pkt[$];
    int cyc, tot = 0, sets = 0, idx;
    real u;
    string k, v;
    // the store belongs to the AppCore: start with every key present
    for (int i = 0; i < n_keys; i++) kv[key_of(i, klen)] = mkstr(vlen, i);
    for (int i = 0; i < n_rpc; i++) begin
      u = real'($urandom_range(0, 1000000)) / 1000000.0;
      idx = int'(real'(n_keys - 1) * u * u * u);
      k = key_of(idx, klen);
      pkt.delete();
      if ($urandom_range(0, 99) < set_pct) begin
        v = mkstr(vlen, $urandom_range(0, 1000));
        call_hdr(pkt, "set", seq_no); fld_str(pkt, 1, k); fld_str(pkt, 2, v);
        sets++;
      end else begin
        call_hdr(pkt, "get", seq_no); fld_str(pkt, 1, k);
      end
      pkt.push_back(T_STOP);
      rpc(pkt, seq_no, cyc);
      seq_no++; tot += cyc;
    end
    $display("%-12s k%0d_v%0d set %0d%% (%0d of %0d): %0d cycles per RPC", wname, klen, vlen,
             set_pct, sets, n_rpc, tot / n_rpc);
  endtask

  initial begin
    logic [7:0] pkt[$];
    int cyc, tot, vlen;
    int sizes[3];
    int lat[3];
    sizes[0] = 512; sizes[1] = 1024; sizes[2] = 1518;
    snp_valid = 0; snp_uc = 0; snp_store = 0; snp_addr = '0; snp_wdata = '0;
    cfg_we = 0; cfg_base = '0; cfg_limit = '0; cfg_root[0] = '0; cfg_root[1] = '0;
    tlb_flush = 0; inv_valid = 0; inv_addr = '0;
    map_page(ROOT_NET, VA_NRECV, PA_NRECV, 0, 1);
    map_page(ROOT_NET, VA_NRECV + 4096, PA_NRECV + 4096, 0, 1);
    map_page(ROOT_NET, VA_NRESP, PA_NRESP, 0, 1);
    map_page(ROOT_APP, VA_AREGION, PA_AREGION, 1, 1);
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    cfg_we = 1; cfg_base = pa_t'(CMD_BASE); cfg_limit = pa_t'(CMD_BASE + 4096);
    cfg_root[0] = pa_t'(ROOT_NET); cfg_root[1] = pa_t'(ROOT_APP);
    @(negedge clk);
    cfg_we = 0;

    memc("memc_low",   20, 16, 32, 40, 64);
    memc("memc_mid",   50, 16, 32, 40, 64);
    memc("memc_high",  80, 16, 32, 40, 64);
    memc("memc_tiny",  50,  8,  8, 30, 64);
    memc("memc_tiny",   5,  8,  8, 30, 64);
    memc("memc_small", 50, 16, 32, 30, 64);
    memc("memc_small",  5, 16, 32, 30, 64);

    // packet-size sweep: set requests whose wire size is exactly the target
    for (int j = 0; j < 3; j++) begin
      tot = 0;
      for (int i = 0; i < 4; i++) begin
        // 15 B header + (7 + 16) key field + (7 + value) + 1 STOP
        vlen = sizes[j] - 15 - 23 - 7 - 1;
        pkt.delete(); call_hdr(pkt, "set", seq_no);
        fld_str(pkt, 1, key_of(i, 16)); fld_str(pkt, 2, mkstr(vlen, i)); pkt.push_back(T_STOP);
        check(pkt.size() == sizes[j], "sweep packet size");
        rpc(pkt, seq_no, cyc); seq_no++; tot += cyc;
        pkt.delete(); call_hdr(pkt, "get", seq_no); fld_str(pkt, 1, key_of(i, 16)); pkt.push_back(T_STOP);
        rpc(pkt, seq_no, cyc); seq_no++; tot += cyc;
      end
      $display("packet %0d B  set+get: %0d cycles per RPC", sizes[j], tot / 8);
    end

    // unique_id
    tot = 0;
    for (int i = 0; i < 40; i++) begin
      pkt.delete(); call_hdr(pkt, "ComposeUniqueId", seq_no);
      pkt.push_back(T_I64); be(pkt, 1, 2); be(pkt, {$urandom, $urandom}, 8);
      pkt.push_back(T_I32); be(pkt, 2, 2); be(pkt, $urandom_range(0, 5), 4);
      pkt.push_back(T_STOP);
      check(pkt.size() == 46, "ComposeUniqueId request is 46 bytes");
      rpc(pkt, seq_no, cyc); seq_no++; tot += cyc;
    end
    $display("unique_id    ComposeUniqueId: %0d cycles per RPC", tot / 40);

    // core-to-accelerator latency sweep (5, 400 and 700 ns one way)
    lat[0] = 5; lat[1] = 400; lat[2] = 700;
    for (int j = 0; j < 3; j++) begin
      uc_delay = lat[j];
      memc($sformatf("uc_lat_%0dns", lat[j]), 50, 16, 32, 10, 64);
      tot = 0;
      for (int i = 0; i < 10; i++) begin
        pkt.delete(); call_hdr(pkt, "ComposeUniqueId", seq_no);
        pkt.push_back(T_I64); be(pkt, 1, 2); be(pkt, {$urandom, $urandom}, 8);
        pkt.push_back(T_I32); be(pkt, 2, 2); be(pkt, $urandom_range(0, 5), 4);
        pkt.push_back(T_STOP);
        rpc(pkt, seq_no, cyc); seq_no++; tot += cyc;
      end
      $display("uc_lat_%0dns  ComposeUniqueId: %0d cycles per RPC", lat[j], tot / 10);
    end
    uc_delay = 0;
    $display("cache hits %0d misses %0d, TLB misses %0d", cache_hits, cache_misses, tlb_misses);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
