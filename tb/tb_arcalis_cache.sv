// tb_arcalis_cache: checks the 512 KiB 8-way write-through cache.
// Random loads and stores go to a small pool of lines that fall into three
// sets (more lines per set than ways, so lines are evicted) plus a few
// spread-out lines. A memory model accepts after random waits and answers
// reads after a random latency. Checked: every load returns the latest
// stored value, every store reaches memory, completions carry the request
// tag, the first load of a line misses, an immediate reload hits, hits plus
// misses equals requests, and a line changed behind the cache and
// invalidated is re-read.
`timescale 1ns/1ps
module tb_arcalis_cache;
  import arcalis_pkg::*;
  logic clk = 0, rst_n = 0;
  always #0.5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  localparam longint SET_STRIDE = 64'h1_0000;     // 1024 sets x 64 B
  logic req_valid, req_ready, req_write, rsp_valid, inv_valid;
  logic [3:0] req_tag, rsp_tag;
  pa_t req_pa, mem_req_addr, inv_addr;
  line_t req_wdata, rsp_data, mem_req_wdata, mem_rsp_data;
  logic mem_req_valid, mem_req_ready, mem_req_write, mem_rsp_valid;
  logic [31:0] hit_count, miss_count;
  arcalis_cache dut (.*);
  initial begin repeat (200000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  line_t mem [longint];
  function automatic line_t rd(input longint a);
    return mem.exists(a) ? mem[a] : {8{a}};
  endfunction
  int lat; bit busy; longint addr_q; int mem_writes = 0;
  always @(posedge clk) begin
    mem_rsp_valid <= 1'b0;
    if (busy) begin
      if (lat == 0) begin busy <= 0; mem_rsp_valid <= 1'b1; mem_rsp_data <= rd(addr_q); end
      else lat <= lat - 1;
    end else if (mem_req_valid && mem_req_ready) begin
      if (mem_req_write) begin mem[longint'(mem_req_addr)] = mem_req_wdata; mem_writes++; end
      else begin busy <= 1; addr_q <= longint'(mem_req_addr); lat <= $urandom_range(0, 8); end
    end
    mem_req_ready <= !busy && ($urandom_range(0, 2) != 0);
  end

  longint pool[$];
  bit seen[longint];
  int reqs = 0;

  task automatic access(input bit wr, input longint a, input line_t wd, output line_t rdata);
    logic [3:0] t = 4'($urandom);
    @(negedge clk);
    req_valid = 1; req_write = wr; req_pa = pa_t'(a); req_wdata = wd; req_tag = t;
    while (!req_ready) @(negedge clk);
    @(negedge clk); req_valid = 0;
    while (!rsp_valid) @(negedge clk);
    check(rsp_tag == t, "completion tag");
    rdata = rsp_data; reqs++;
  endtask

  initial begin
    line_t d, w; longint a; logic [31:0] h0, m0; int writes0;
    req_valid = 0; req_write = 0; req_pa = '0; req_wdata = '0; req_tag = 0;
    inv_valid = 0; inv_addr = '0; busy = 0; mem_req_ready = 0; mem_rsp_valid = 0; mem_rsp_data = '0;
    for (int s = 0; s < 3; s++)
      for (int k = 0; k < 11; k++) pool.push_back(64'h1000_0000 + s * 64 + k * SET_STRIDE);
    for (int k = 0; k < 6; k++) pool.push_back(64'h2000_0000 + k * 64'h1_2340);
    repeat (3) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      a = pool[$urandom_range(0, pool.size() - 1)];
      if ($urandom_range(0, 3) == 0) begin
        w = {16{$urandom}};
        writes0 = mem_writes;
        access(1, a, w, d);
        check(mem_writes == writes0 + 1 && mem[a] == w, "store written through");
      end else begin
        m0 = miss_count;
        access(0, a, '0, d);
        check(d == rd(a), $sformatf("load data %h", a));
        if (!seen.exists(a)) check(miss_count == m0 + 1, "first load misses");
        seen[a] = 1;
        h0 = hit_count;
        access(0, a, '0, d);
        check(d == rd(a) && hit_count == h0 + 1, "immediate reload hits");
      end
      // another agent writes a line and invalidates it
      if ($urandom_range(0, 19) == 0) begin
        a = pool[$urandom_range(0, pool.size() - 1)];
        mem[a] = {16{$urandom}};
        @(negedge clk); inv_valid = 1; inv_addr = pa_t'(a); @(negedge clk); inv_valid = 0;
        access(0, a, '0, d);
        check(d == mem[a], "invalidated line re-read");
        seen[a] = 1;
      end
    end
    check(hit_count + miss_count == 32'(reqs), "hits plus misses");
    check(hit_count > 1000 && miss_count > 200, "both hits and misses seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
