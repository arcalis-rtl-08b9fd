// tb_arcalis_rob: checks the reorder buffer under random traffic.
// Entries are allocated for both engines and completed in random order; the
// bench keeps the allocation order and checks that entries retire strictly in
// that order with the data given at completion, that alloc_ready drops at
// DEPTH entries, and that the per-engine in-flight counts match.
`timescale 1ns/1ps
module tb_arcalis_rob;
  import arcalis_pkg::*;
  logic clk = 0, rst_n = 0;
  always #0.5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  localparam int DEPTH = 16;
  logic alloc_valid, alloc_ready, alloc_eng, alloc_write, cmp_valid;
  logic ret_valid, ret_eng, ret_write;
  logic [7:0] alloc_idx, ret_idx;
  logic [3:0] alloc_tag, cmp_tag;
  line_t cmp_data, ret_data;
  logic [4:0] inflight [NUM_ENGINES];
  arcalis_rob dut (.*);
  initial begin repeat (30000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  typedef struct { int tag; bit eng; bit wr; int idx; } ent_t;
  initial begin
    ent_t order[$];
    int open_tags[$];          // allocated, not yet completed
    line_t data_of[16];
    int new_tag, k;
    bit have_new;
    int cnt[2];
    int retired = 0, outstanding = 0;
    ent_t h;
    alloc_valid = 0; alloc_eng = 0; alloc_write = 0; alloc_idx = 0;
    cmp_valid = 0; cmp_tag = 0; cmp_data = 0;
    cnt[0] = 0; cnt[1] = 0; have_new = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int cyc = 0; cyc < 5000; cyc++) begin
      @(negedge clk);
      if (have_new) begin open_tags.push_back(new_tag); have_new = 0; end
      if (ret_valid) begin
        h = order.pop_front();
        check(ret_eng == h.eng && ret_write == h.wr && ret_idx == 8'(h.idx), "retire order");
        check(ret_data == data_of[h.tag], "retired data");
        cnt[h.eng]--; retired++;
      end
      check(inflight[0] == 5'(cnt[0]) && inflight[1] == 5'(cnt[1]), "in-flight counts");
      outstanding = order.size();
      check(alloc_ready == (outstanding < DEPTH), "alloc_ready");
      // new allocation
      alloc_valid = ($urandom_range(0, 99) < ((cyc / 500) % 2 ? 70 : 40));
      alloc_eng = 1'($urandom); alloc_write = 1'($urandom); alloc_idx = 8'($urandom);
      if (alloc_valid && alloc_ready) begin
        order.push_back('{tag: int'(alloc_tag), eng: alloc_eng, wr: alloc_write, idx: int'(alloc_idx)});
        new_tag = int'(alloc_tag); have_new = 1; cnt[alloc_eng]++;
      end
      // random completion of an open entry
      cmp_valid = 0;
      if (open_tags.size() > 0 && $urandom_range(0, 99) < 55) begin
        k = $urandom_range(0, open_tags.size() - 1);
        cmp_valid = 1; cmp_tag = 4'(open_tags[k]); cmp_data = {16{$urandom}};
        data_of[open_tags[k]] = cmp_data;
        open_tags.delete(k);
      end
    end
    check(retired > 1000, "traffic retired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
