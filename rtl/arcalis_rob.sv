// arcalis_rob: reorder buffer for the accelerator's memory transactions.
//
// Every 64-byte load or store the address unit issues gets an entry, in issue
// order, and carries the entry's tag through the LD/ST queue and the cache.
// Completions (load data or store acknowledge) may come back in any order and
// are matched by tag; entries leave from the head strictly in order, so load
// data reaches the engines in the order they asked for it. The ROB also keeps
// MemReqInFlight for each engine: entries allocated and not yet retired.
//
// Timing: alloc_tag is the current tail and is valid whenever alloc_ready is
// high; an entry completed in cycle t retires at the earliest in cycle t+1
// (ret_valid for one cycle, no back-pressure). Full when DEPTH entries are in
// flight.
//
// In-order retirement and the in-flight count are from the paper; the depth
// and interface are this design's.
module arcalis_rob
  import arcalis_pkg::*;
#(
  parameter int unsigned DEPTH = 16,
  localparam int unsigned TW = $clog2(DEPTH),
  localparam int unsigned CW = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          alloc_valid,
  output logic          alloc_ready,
  input  logic          alloc_eng,
  input  logic          alloc_write,
  input  logic [7:0]    alloc_idx,
  output logic [TW-1:0] alloc_tag,
  input  logic          cmp_valid,
  input  logic [TW-1:0] cmp_tag,
  input  line_t         cmp_data,
  output logic          ret_valid,
  output logic          ret_eng,
  output logic          ret_write,
  output logic [7:0]    ret_idx,
  output line_t         ret_data,
  output logic [CW-1:0] inflight [NUM_ENGINES]
);
  logic [DEPTH-1:0] busy_q, done_q, eng_q, wr_q;
  logic [7:0]       idx_q  [DEPTH];
  line_t            data_q [DEPTH];
  logic [TW-1:0]    head_q, tail_q;
  logic [CW-1:0]    count_q;
  logic             do_alloc, do_ret;

  assign alloc_ready = (count_q != CW'(DEPTH));
  assign alloc_tag   = tail_q;
  assign do_alloc    = alloc_valid && alloc_ready;
  assign do_ret      = busy_q[head_q] && done_q[head_q];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q  <= '0;
      done_q  <= '0;
      eng_q   <= '0;
      wr_q    <= '0;
      head_q  <= '0;
      tail_q  <= '0;
      count_q <= '0;
      ret_valid <= 1'b0;
      ret_eng   <= 1'b0;
      ret_write <= 1'b0;
      ret_idx   <= '0;
      ret_data  <= '0;
      for (int e = 0; e < NUM_ENGINES; e++) inflight[e] <= '0;
    end else begin
      ret_valid <= do_ret;
      if (do_ret) begin
        ret_eng        <= eng_q[head_q];
        ret_write      <= wr_q[head_q];
        ret_idx        <= idx_q[head_q];
        ret_data       <= data_q[head_q];
        busy_q[head_q] <= 1'b0;
        done_q[head_q] <= 1'b0;
        head_q         <= head_q + 1'b1;
      end
      if (cmp_valid) begin
        done_q[cmp_tag] <= 1'b1;
        data_q[cmp_tag] <= cmp_data;
      end
      if (do_alloc) begin
        busy_q[tail_q] <= 1'b1;
        done_q[tail_q] <= 1'b0;
        eng_q[tail_q]  <= alloc_eng;
        wr_q[tail_q]   <= alloc_write;
        idx_q[tail_q]  <= alloc_idx;
        tail_q         <= tail_q + 1'b1;
      end
      count_q <= count_q + CW'(do_alloc) - CW'(do_ret);
      for (int e = 0; e < NUM_ENGINES; e++)
        inflight[e] <= inflight[e]
                     + CW'(do_alloc && (alloc_eng == 1'(e)))
                     - CW'(do_ret && (eng_q[head_q] == 1'(e)));
    end
  end

  // A completion must name an entry that is in flight and not yet complete.
  a_cmp_live: assert property (@(posedge clk) disable iff (!rst_n)
                               cmp_valid |-> busy_q[cmp_tag] && !done_q[cmp_tag]);
endmodule
