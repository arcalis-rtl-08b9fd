// tb_arcalis_ldst_queue: checks the load/store queue against a reference
// queue under random push and pop traffic, including runs that fill it
// (push_ready must drop at DEPTH entries) and drain it.
`timescale 1ns/1ps
module tb_arcalis_ldst_queue;
  import arcalis_pkg::*;
  logic clk = 0, rst_n = 0;
  always #0.5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  localparam int DEPTH = 8;
  typedef struct packed { logic [3:0] tag; logic write; pa_t pa; line_t wd; } ent_t;
  logic push_valid, push_ready, pop_valid, pop_ready, push_write, pop_write;
  logic [3:0] push_tag, pop_tag;
  pa_t push_pa, pop_pa;
  line_t push_wdata, pop_wdata;
  arcalis_ldst_queue dut (.*);
  initial begin repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    ent_t model[$];
    ent_t e;
    int pp, pq;
    push_valid = 0; pop_ready = 0; push_tag = 0; push_write = 0; push_pa = 0; push_wdata = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      // phases bias traffic towards filling or draining
      pp = ((cyc / 300) % 2) ? 80 : 30;
      pq = 100 - pp;
      @(negedge clk);
      check(push_ready == (model.size() < DEPTH), "push_ready");
      check(pop_valid == (model.size() > 0), "pop_valid");
      if (model.size() > 0)
        check({pop_tag, pop_write, pop_pa, pop_wdata} == model[0], "head entry");
      push_valid = ($urandom_range(0, 99) < pp);
      pop_ready  = ($urandom_range(0, 99) < pq);
      e = '{tag: 4'($urandom), write: 1'($urandom), pa: {$urandom, 6'd0}, wd: {16{$urandom}}};
      {push_tag, push_write, push_pa, push_wdata} = e;
      if (pop_ready && model.size() > 0) void'(model.pop_front());
      if (push_valid && push_ready) model.push_back(e);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
