// arcalis_arbiter: shares the memory pipeline between the two micro-engines.
//
// The RxEngine and TxEngine each raise a transfer request (a whole buffer
// load or store). The arbiter grants one of them the address unit for the
// full transfer, alternating priority round robin so that neither path can
// starve the other. While a transfer runs it routes store data from the
// granted engine to the address unit and, at the end, returns the end/fault
// indication to that engine only.
//
// Timing: a request is granted in the cycle the address unit is idle
// (req_ack pulses for the granted engine); the grant holds until xfer_end.
//
// The arbiter block is named in the paper's architecture figure; its role and
// policy here are this design's.
module arcalis_arbiter
  import arcalis_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  req  [NUM_ENGINES],
  input  xfer_t req_xfer [NUM_ENGINES],
  input  line_t req_wdata [NUM_ENGINES],
  output logic  req_ack [NUM_ENGINES],
  output logic  end_o [NUM_ENGINES],
  output logic  fault_o [NUM_ENGINES],
  // address unit side
  output logic  au_valid,
  input  logic  au_ready,
  output xfer_t au_xfer,
  output logic  au_eng,
  output line_t au_wdata,
  input  logic  au_end,
  input  logic  au_fault
);
  logic busy_q, owner_q, prio_q;
  logic pick;

  // round robin: prio_q names the engine preferred this time
  assign pick     = (req[prio_q]) ? prio_q : !prio_q;
  assign au_valid = !busy_q && (req[0] || req[1]);
  assign au_xfer  = req_xfer[pick];
  assign au_eng   = pick;
  assign au_wdata = req_wdata[owner_q];

  always_comb begin
    for (int e = 0; e < NUM_ENGINES; e++) begin
      req_ack[e] = au_valid && au_ready && (pick == 1'(e));
      end_o[e]   = au_end && busy_q && (owner_q == 1'(e));
      fault_o[e] = au_fault && busy_q && (owner_q == 1'(e));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q  <= 1'b0;
      owner_q <= 1'b0;
      prio_q  <= 1'b0;
    end else begin
      if (au_valid && au_ready) begin
        busy_q  <= 1'b1;
        owner_q <= pick;
        prio_q  <= !pick;
      end else if (au_end) busy_q <= 1'b0;
    end
  end

  a_one_owner: assert property (@(posedge clk) disable iff (!rst_n) au_end |-> busy_q);
endmodule
