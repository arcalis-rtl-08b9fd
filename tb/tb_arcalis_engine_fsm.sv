// tb_arcalis_engine_fsm: checks every transition of the micro-engine FSM.
// Walks IDLE_RECV -> BUSY -> DONE -> IDLE_RECV, the DRAIN loop while memory
// requests are in flight, DONE -> IDLE_RESP when the engine is not finished
// and IDLE_RESP -> BUSY on the next command, and that states hold while
// their exit condition is false.
`timescale 1ns/1ps
module tb_arcalis_engine_fsm;
  import arcalis_pkg::*;
  logic clk = 0, rst_n = 0;
  always #0.5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  logic cmd_rcvd, work_done, engine_done;
  logic [5:0] mem_inflight;
  eng_state_e state;
  arcalis_engine_fsm dut (.*);
  initial begin repeat (10000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  task automatic step(input bit c, input bit w, input int inf, input bit e, input eng_state_e exp);
    @(negedge clk); cmd_rcvd = c; work_done = w; mem_inflight = 6'(inf); engine_done = e;
    @(negedge clk); cmd_rcvd = 0; work_done = 0;
    check(state == exp, $sformatf("expected %s got %s", exp.name(), state.name()));
  endtask
  initial begin
    cmd_rcvd = 0; work_done = 0; engine_done = 0; mem_inflight = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); check(state == ST_IDLE_RECV, "reset state");
    step(0, 0, 0, 0, ST_IDLE_RECV);
    step(1, 0, 0, 0, ST_BUSY);
    step(0, 0, 3, 0, ST_BUSY);           // still working
    step(0, 1, 0, 1, ST_DONE);           // no requests in flight
    step(0, 0, 0, 1, ST_IDLE_RECV);      // MicroEngineDone
    step(1, 0, 0, 0, ST_BUSY);
    step(0, 1, 2, 0, ST_DRAIN);          // MemReqInFlight > 0
    step(0, 0, 1, 0, ST_DRAIN);
    step(0, 0, 0, 0, ST_DONE);           // MemReqInFlight == 0
    step(0, 0, 0, 0, ST_IDLE_RESP);      // !MicroEngineDone
    step(0, 0, 0, 0, ST_IDLE_RESP);
    step(1, 0, 0, 0, ST_BUSY);           // command received
    step(0, 1, 1, 1, ST_DRAIN);
    step(0, 0, 0, 1, ST_DONE);
    step(0, 0, 0, 1, ST_IDLE_RECV);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
