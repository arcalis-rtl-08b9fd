// arcalis_ldst_queue: load/store queue between address translation and the
// engine cache.
//
// A first-in first-out queue of translated 64-byte memory requests
// {ROB tag, load/store, physical line address, store data}. Loads and stores
// share one queue so that a load never overtakes an older store; the cache
// drains it one request at a time. Valid/ready on both sides; push and pop
// may happen in the same cycle.
//
// The queue's place in the memory path is from the paper; depth, ordering
// rule and handshake are this design's.
module arcalis_ldst_queue
  import arcalis_pkg::*;
#(
  parameter int unsigned DEPTH = 8,
  parameter int unsigned TAG_W = 4,
  localparam int unsigned PW = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push_valid,
  output logic             push_ready,
  input  logic [TAG_W-1:0] push_tag,
  input  logic             push_write,
  input  pa_t              push_pa,
  input  line_t            push_wdata,
  output logic             pop_valid,
  input  logic             pop_ready,
  output logic [TAG_W-1:0] pop_tag,
  output logic             pop_write,
  output pa_t              pop_pa,
  output line_t            pop_wdata
);
  typedef struct packed {
    logic [TAG_W-1:0] tag;
    logic             write;
    pa_t              pa;
    line_t            wdata;
  } ent_t;

  ent_t        mem_q [DEPTH];
  logic [PW-1:0] rd_q, wr_q;
  logic [PW:0]   cnt_q;
  logic          do_push, do_pop;

  assign push_ready = (cnt_q != (PW+1)'(DEPTH));
  assign pop_valid  = (cnt_q != '0);
  assign do_push    = push_valid && push_ready;
  assign do_pop     = pop_valid && pop_ready;
  assign pop_tag    = mem_q[rd_q].tag;
  assign pop_write  = mem_q[rd_q].write;
  assign pop_pa     = mem_q[rd_q].pa;
  assign pop_wdata  = mem_q[rd_q].wdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (do_push) begin
        mem_q[wr_q] <= '{tag: push_tag, write: push_write, pa: push_pa, wdata: push_wdata};
        wr_q        <= wr_q + 1'b1;
      end
      if (do_pop) rd_q <= rd_q + 1'b1;
      cnt_q <= cnt_q + (PW+1)'(do_push) - (PW+1)'(do_pop);
    end
  end
endmodule
