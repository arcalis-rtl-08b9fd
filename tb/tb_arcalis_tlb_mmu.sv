// tb_arcalis_tlb_mmu: checks translation against x86-64 style page tables.
// The bench builds 4-level tables for two address spaces in a word-addressed
// memory model, mixing 2 MB and 4 KB pages, read-only pages and unmapped
// holes, and answers the walker's line reads after a random delay. Random
// requests (reads and writes, both address spaces) are compared with the
// bench's own page map: physical address on success, fault on a hole or on a
// write to a read-only page. It also checks that an immediate repeat of a
// translation does not walk again, and that a flush forces a new walk.
`timescale 1ns/1ps
module tb_arcalis_tlb_mmu;
  import arcalis_pkg::*;
  logic clk = 0, rst_n = 0;
  always #0.5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  pa_t cfg_root [2];
  logic flush, req_valid, req_ready, req_asid, req_write, rsp_valid, rsp_fault;
  logic ptw_req_valid, ptw_req_ready, ptw_rsp_valid;
  va_t req_va;
  pa_t rsp_pa, ptw_req_addr;
  line_t ptw_rsp_data;
  logic [31:0] miss_count;
  arcalis_tlb_mmu dut (.*);
  initial begin repeat (200000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // ---------------- memory model for the tables ----------------
  logic [63:0] words [longint];
  function automatic logic [63:0] rd64(input longint a);
    return words.exists(a) ? words[a] : 64'd0;
  endfunction
  longint next_table = 64'h10_0000;
  function automatic longint walk_alloc(input longint tbl, input int idx);
    logic [63:0] e = rd64(tbl + idx * 8);
    if (!e[0]) begin e = next_table | 64'h3; words[tbl + idx * 8] = e; next_table += 4096; end
    return {e[47:12], 12'd0};
  endfunction
  function automatic void map_page(input longint root, input longint va, input longint pa,
                                   input bit big, input bit writable);
    longint t3 = walk_alloc(root, int'(va[47:39]));
    longint t2 = walk_alloc(t3, int'(va[38:30]));
    if (big) words[t2 + va[29:21] * 8] = pa | 64'h81 | (writable ? 64'h2 : 64'h0);
    else begin
      longint t1 = walk_alloc(t2, int'(va[29:21]));
      words[t1 + va[20:12] * 8] = pa | 64'h1 | (writable ? 64'h2 : 64'h0);
    end
  endfunction

  // walker port: accept after a random wait, answer after a random latency
  int lat;
  longint addr_q;
  bit busy;
  always @(posedge clk) begin
    ptw_rsp_valid <= 1'b0;
    if (busy) begin
      if (lat == 0) begin
        busy <= 0; ptw_rsp_valid <= 1'b1;
        for (int i = 0; i < 8; i++) ptw_rsp_data[i*64 +: 64] <= rd64(addr_q + i * 8);
      end else lat <= lat - 1;
    end else if (ptw_req_valid && ptw_req_ready) begin
      busy <= 1; addr_q <= longint'(ptw_req_addr); lat <= $urandom_range(1, 6);
    end
    ptw_req_ready <= !busy && ($urandom_range(0, 3) != 0);
  end

  // ---------------- reference page map ----------------
  // region[asid][k]: 0 = hole, 1 = one 2 MB page, 2 = 4 KB pages
  typedef struct { longint pa; bit w; bit mapped; } pg_t;
  int  region_kind [2][16];
  pg_t small_pg [2][16][8];
  pg_t big_pg [2][16];
  function automatic longint region_va(input int asid, input int k);
    return 64'h0000_7F00_0000_0000 + longint'(asid) * 64'h40_0000_0000 + longint'(k) * 64'h20_0000
           + (k >= 8 ? 64'h80_0000_0000 : 0);       // second half under another top-level entry
  endfunction

  task automatic translate(input int asid, input longint va, input bit wr,
                           output bit fault, output longint pa);
    @(negedge clk);
    req_valid = 1; req_asid = 1'(asid); req_va = va_t'(va); req_write = wr;
    while (!req_ready) @(negedge clk);
    @(negedge clk); req_valid = 0;
    while (!rsp_valid) @(negedge clk);
    fault = rsp_fault; pa = longint'(rsp_pa);
  endtask

  task automatic probe(input int asid, input int k, input int p, input longint off, input bit wr);
    bit f, ef; longint pa, epa; longint va;
    logic [31:0] m0;
    va = region_va(asid, k) + longint'(p) * 4096 + off;
    ef = 1; epa = 0;
    case (region_kind[asid][k])
      1: if (big_pg[asid][k].mapped) begin
           ef = wr && !big_pg[asid][k].w; epa = big_pg[asid][k].pa + longint'(p) * 4096 + off; end
      2: if (small_pg[asid][k][p].mapped) begin
           ef = wr && !small_pg[asid][k][p].w; epa = small_pg[asid][k][p].pa + off; end
      default: ;
    endcase
    translate(asid, va, wr, f, pa);
    check(f == ef, $sformatf("fault asid %0d region %0d page %0d wr %0d", asid, k, p, wr));
    if (!ef) check(pa == epa, $sformatf("pa asid %0d region %0d page %0d", asid, k, p));
    if (!ef) begin
      m0 = miss_count;
      translate(asid, va + 64, wr, f, pa);
      check(!f && pa == epa + 64 && miss_count == m0, "repeat hits the TLB");
    end
  endtask

  initial begin
    longint roots[2];
    bit f; longint pa; logic [31:0] m0;
    roots[0] = 64'h1000; roots[1] = 64'h2000;
    cfg_root[0] = pa_t'(roots[0]); cfg_root[1] = pa_t'(roots[1]);
    flush = 0; req_valid = 0; req_asid = 0; req_va = '0; req_write = 0;
    ptw_rsp_data = '0; busy = 0; ptw_req_ready = 0; ptw_rsp_valid = 0;
    for (int a = 0; a < 2; a++)
      for (int k = 0; k < 16; k++) begin
        region_kind[a][k] = $urandom_range(0, 2);
        if (region_kind[a][k] == 1) begin
          big_pg[a][k] = '{pa: 64'h4000_0000 + longint'($urandom_range(0, 255)) * 64'h20_0000,
                           w: 1'($urandom), mapped: 1};
          map_page(roots[a], region_va(a, k), big_pg[a][k].pa, 1, big_pg[a][k].w);
        end else if (region_kind[a][k] == 2)
          for (int p = 0; p < 8; p++) begin
            small_pg[a][k][p] = '{pa: 64'h8000_0000 + longint'($urandom_range(0, 65535)) * 4096,
                                  w: 1'($urandom), mapped: ($urandom_range(0, 3) != 0)};
            if (small_pg[a][k][p].mapped)
              map_page(roots[a], region_va(a, k) + p * 4096, small_pg[a][k][p].pa, 0, small_pg[a][k][p].w);
          end
      end
    repeat (3) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 400; it++)
      probe($urandom_range(0, 1), $urandom_range(0, 15), $urandom_range(0, 7),
            longint'($urandom_range(0, 62)) * 64, 1'($urandom));
    // flush forces a walk
    for (int a = 0; a < 2; a++)
      for (int k = 0; k < 16; k++)
        if (region_kind[a][k] == 1) begin
          translate(a, region_va(a, k), 0, f, pa);
          m0 = miss_count;
          translate(a, region_va(a, k), 0, f, pa);
          check(miss_count == m0, "present before flush");
          @(negedge clk); flush = 1; @(negedge clk); flush = 0;
          translate(a, region_va(a, k), 0, f, pa);
          check(miss_count == m0 + 1 && !f && pa == big_pg[a][k].pa, "flush forces a walk");
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
