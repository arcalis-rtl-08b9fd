// tb_arcalis_arbiter: checks the two-engine memory arbiter.
// Both engines raise random transfer requests; a model of the address unit
// accepts with random readiness and ends each transfer after a random delay,
// sometimes with a fault. Checked: one transfer at a time, the grant follows
// round-robin priority when both request, the descriptor and write data come
// from the granted engine, and end/fault reach only the owner.
`timescale 1ns/1ps
module tb_arcalis_arbiter;
  import arcalis_pkg::*;
  logic clk = 0, rst_n = 0;
  always #0.5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  logic req [NUM_ENGINES], req_ack [NUM_ENGINES], end_o [NUM_ENGINES], fault_o [NUM_ENGINES];
  xfer_t req_xfer [NUM_ENGINES];
  line_t req_wdata [NUM_ENGINES];
  logic au_valid, au_ready, au_eng, au_end, au_fault;
  xfer_t au_xfer;
  line_t au_wdata;
  arcalis_arbiter dut (.*);
  initial begin repeat (30000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    bit busy = 0, prio = 0, owner = 0;
    int left = 0, grants[2], both = 0;
    bit exp_pick, f, g, g_eng;
    grants[0] = 0; grants[1] = 0;
    for (int e = 0; e < 2; e++) begin req[e] = 0; req_xfer[e] = '0; req_wdata[e] = '0; end
    au_ready = 0; au_end = 0; au_fault = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int cyc = 0; cyc < 6000; cyc++) begin
      @(negedge clk);
      // engine side: keep a request until acknowledged, then maybe raise another
      for (int e = 0; e < 2; e++) begin
        if (!req[e] && $urandom_range(0, 99) < 30) begin
          req[e] = 1;
          req_xfer[e] = '{is_write: 1'($urandom), asid: 1'(e), va: {$urandom, 6'd0}, nlines: 8'($urandom_range(1, 24))};
        end
        req_wdata[e] = {16{$urandom}};
      end
      au_ready = ($urandom_range(0, 99) < 60);
      au_end = 0; au_fault = 0;
      if (busy && left == 0) begin au_end = 1; f = ($urandom_range(0, 9) == 0); au_fault = f; end
      else if (busy) left--;
      #0.1;
      if (busy) begin
        check(!au_valid, "no new grant while busy");
        check(au_wdata == req_wdata[owner], "write data from owner");
      end else begin
        check(au_valid == (req[0] || req[1]), "au_valid");
        if (req[0] || req[1]) begin
          exp_pick = req[prio] ? prio : !prio;
          if (req[0] && req[1]) both++;
          check(au_eng == exp_pick, "round-robin pick");
          check(au_xfer == req_xfer[exp_pick], "descriptor from granted engine");
        end
      end
      for (int e = 0; e < 2; e++) begin
        check(req_ack[e] == (!busy && au_ready && au_valid && au_eng == 1'(e)), "ack");
        check(end_o[e] == (busy && au_end && owner == 1'(e)), "end to owner");
        check(fault_o[e] == (busy && au_end && au_fault && owner == 1'(e)), "fault to owner");
      end
      g = !busy && au_valid && au_ready;
      g_eng = au_eng;
      @(posedge clk); #0.1;
      if (busy && au_end) busy = 0;
      else if (g) begin
        busy = 1; owner = g_eng; prio = !g_eng; grants[g_eng]++;
        req[g_eng] = 0; left = $urandom_range(0, 6);
      end
    end
    check(grants[0] > 100 && grants[1] > 100 && both > 50, "both engines served under contention");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
