// arcalis_engine_fsm: the five-state controller of a micro-engine.
//
// Both the RxEngine and the TxEngine run one of these. The engine waits in
// IDLE_RECV for a command, works in BUSY, waits in DRAIN while memory requests
// it issued are still in flight, and passes through DONE where it reports
// completion. From DONE it returns to IDLE_RECV when the RPC is finished
// (engine_done), or parks in IDLE_RESP when it has processed its input but
// still needs a further command (its destination buffer), which moves it back
// to BUSY.
//
// Inputs: cmd_rcvd (a command for this engine was accepted), work_done (the
// datapath finished the current BUSY phase), mem_inflight (MemReqInFlight),
// engine_done (MicroEngineDone). `state` is the registered state.
//
// The states and every transition condition are the paper's. That BUSY is
// left only once the datapath reports work_done is this design's reading.
module arcalis_engine_fsm
  import arcalis_pkg::*;
#(
  parameter int unsigned CNT_W = 6
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cmd_rcvd,
  input  logic             work_done,
  input  logic [CNT_W-1:0] mem_inflight,
  input  logic             engine_done,
  output eng_state_e       state
);
  eng_state_e nxt;

  always_comb begin
    nxt = state;
    unique case (state)
      ST_IDLE_RECV: if (cmd_rcvd) nxt = ST_BUSY;
      ST_BUSY:      if (work_done) nxt = (mem_inflight != '0) ? ST_DRAIN : ST_DONE;
      ST_DRAIN:     if (mem_inflight == '0) nxt = ST_DONE;
      ST_DONE:      nxt = engine_done ? ST_IDLE_RECV : ST_IDLE_RESP;
      ST_IDLE_RESP: if (cmd_rcvd) nxt = ST_BUSY;
      default:      nxt = ST_IDLE_RECV;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state <= ST_IDLE_RECV;
    else        state <= nxt;
  end
endmodule
