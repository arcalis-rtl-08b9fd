// arcalis_cache: the accelerator's private cache (512 KiB, 8-way, 64 B lines).
//
// Sits between the LD/ST queue and the coherent on-chip interconnect and
// serves one request at a time:
//   load hit    data returned two cycles after acceptance
//   load miss   the line is read over the interconnect, allocated into an
//               invalid way or, if none, the set's round-robin victim, and
//               returned
//   store       updates the line if present (no allocation on a miss) and is
//               always written through to the interconnect; it completes
//               when the interconnect accepts the write
// Completions carry the request's ROB tag on rsp_*. Because every store is
// written through, lines are never dirty and eviction is silent. inv_valid /
// inv_addr drop a line that another agent wrote (the coherence hook).
//
// Size, associativity and line size follow the paper; the write policy,
// replacement, blocking behaviour and the reduction of coherence to
// invalidation are this design's choices.
module arcalis_cache
  import arcalis_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 524288,
  parameter int unsigned WAYS       = 8,
  parameter int unsigned TAG_W      = 4,
  localparam int unsigned SETS = SIZE_BYTES / (LINE_BYTES * WAYS),
  localparam int unsigned SET_W = $clog2(SETS),
  localparam int unsigned WAY_W = $clog2(WAYS),
  localparam int unsigned OFF_W = $clog2(LINE_BYTES),
  localparam int unsigned T_W   = PA_W - SET_W - OFF_W
) (
  input  logic             clk,
  input  logic             rst_n,
  // requests from the LD/ST queue
  input  logic             req_valid,
  output logic             req_ready,
  input  logic [TAG_W-1:0] req_tag,
  input  logic             req_write,
  input  pa_t              req_pa,
  input  line_t            req_wdata,
  // completions to the ROB
  output logic             rsp_valid,
  output logic [TAG_W-1:0] rsp_tag,
  output line_t            rsp_data,
  // coherent interconnect
  output logic             mem_req_valid,
  input  logic             mem_req_ready,
  output logic             mem_req_write,
  output pa_t              mem_req_addr,
  output line_t            mem_req_wdata,
  input  logic             mem_rsp_valid,
  input  line_t            mem_rsp_data,
  // invalidation from the interconnect
  input  logic             inv_valid,
  input  pa_t              inv_addr,
  // statistics
  output logic [31:0]      hit_count,
  output logic [31:0]      miss_count
);
  typedef enum logic [2:0] {C_IDLE, C_LOOKUP, C_MISS_REQ, C_MISS_WAIT, C_WR_REQ} st_e;

  st_e              st;
  logic [TAG_W-1:0] tag_r;
  logic             wr_r;
  pa_t              pa_r;
  line_t            wdata_r;

  logic [T_W-1:0]   tag_q   [SETS*WAYS];
  logic [SETS*WAYS-1:0] valid_q;
  line_t            data_q  [SETS*WAYS];
  logic [WAY_W-1:0] rr_q    [SETS];

  logic [SET_W-1:0] set_r;
  logic [T_W-1:0]   ltag_r;
  assign set_r  = pa_r[OFF_W +: SET_W];
  assign ltag_r = pa_r[PA_W-1 -: T_W];

  // lookup
  logic             hit;
  logic [WAY_W-1:0] hit_way, fill_way;
  logic             has_inv;
  always_comb begin
    hit      = 1'b0;
    hit_way  = '0;
    has_inv  = 1'b0;
    fill_way = rr_q[set_r];
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (valid_q[{set_r, WAY_W'(w)}] && tag_q[{set_r, WAY_W'(w)}] == ltag_r) begin
        hit     = 1'b1;
        hit_way = WAY_W'(w);
      end
      if (!valid_q[{set_r, WAY_W'(w)}]) begin
        has_inv  = 1'b1;
        fill_way = WAY_W'(w);
      end
    end
  end

  assign req_ready     = (st == C_IDLE);
  assign mem_req_valid = (st == C_MISS_REQ) || (st == C_WR_REQ);
  assign mem_req_write = (st == C_WR_REQ);
  assign mem_req_addr  = {pa_r[PA_W-1:OFF_W], {OFF_W{1'b0}}};
  assign mem_req_wdata = wdata_r;

  logic [SET_W-1:0] inv_set;
  logic [T_W-1:0]   inv_tag;
  assign inv_set = inv_addr[OFF_W +: SET_W];
  assign inv_tag = inv_addr[PA_W-1 -: T_W];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= C_IDLE;
      tag_r      <= '0;
      wr_r       <= 1'b0;
      pa_r       <= '0;
      wdata_r    <= '0;
      valid_q    <= '0;
      rsp_valid  <= 1'b0;
      rsp_tag    <= '0;
      rsp_data   <= '0;
      hit_count  <= '0;
      miss_count <= '0;
      for (int s = 0; s < SETS; s++) rr_q[s] <= '0;
    end else begin
      rsp_valid <= 1'b0;
      if (inv_valid)
        for (int w = 0; w < WAYS; w++)
          if (tag_q[{inv_set, WAY_W'(w)}] == inv_tag) valid_q[{inv_set, WAY_W'(w)}] <= 1'b0;
      unique case (st)
        C_IDLE: if (req_valid) begin
          tag_r   <= req_tag;
          wr_r    <= req_write;
          pa_r    <= req_pa;
          wdata_r <= req_wdata;
          st      <= C_LOOKUP;
        end
        C_LOOKUP: begin
          if (hit) hit_count <= hit_count + 1;
          else     miss_count <= miss_count + 1;
          if (wr_r) begin
            if (hit) data_q[{set_r, hit_way}] <= wdata_r;
            st <= C_WR_REQ;
          end else if (hit) begin
            rsp_valid <= 1'b1;
            rsp_tag   <= tag_r;
            rsp_data  <= data_q[{set_r, hit_way}];
            st        <= C_IDLE;
          end else st <= C_MISS_REQ;
        end
        C_MISS_REQ:  if (mem_req_ready) st <= C_MISS_WAIT;
        C_MISS_WAIT: if (mem_rsp_valid) begin
          data_q[{set_r, fill_way}]  <= mem_rsp_data;
          tag_q[{set_r, fill_way}]   <= ltag_r;
          valid_q[{set_r, fill_way}] <= 1'b1;
          if (!has_inv) rr_q[set_r]  <= rr_q[set_r] + 1'b1;
          rsp_valid <= 1'b1;
          rsp_tag   <= tag_r;
          rsp_data  <= mem_rsp_data;
          st        <= C_IDLE;
        end
        C_WR_REQ: if (mem_req_ready) begin
          rsp_valid <= 1'b1;
          rsp_tag   <= tag_r;
          rsp_data  <= '0;
          st        <= C_IDLE;
        end
        default: st <= C_IDLE;
      endcase
    end
  end
endmodule
