// arcalis_top: near-cache RPC accelerator tile.
//
// The tile sits on the SoC's coherent interconnect next to the last-level
// cache. Cores talk to it only through uncacheable (UC) accesses to a pinned
// command page; the accelerator moves RPC data itself, with 64-byte coherent
// loads and stores through its own translation and cache.
//
//   snooped UC access -> SCI -> byte selector/decoder -+-> control FSM -> RxEngine / TxEngine
//                                                      +-> forward unit -> reply to the UC load
//   RxEngine / TxEngine -> arbiter -> address unit -> TLB/MMU -> ROB + LD/ST queue -> cache
//   cache -> ROB (in-order retirement) -> engine buffers; cache/TLB -> interconnect
//
// Receive path: the NetCore stores SEND_NET_BUF and SEND_NET_LEN; the
// RxEngine loads the packet, deserializes it and stores the object into the
// App. Recv buffer named by the AppCore's APP_READY_FLAG store; the AppCore
// collects the completion with an APP_READY_FLAG UC load. Response path: the
// AppCore stores SEND_APP_BUF and SEND_APP_RESP; the TxEngine loads the
// result object, serializes it and stores the packet into the Net. Resp
// buffer named by the NetCore's DPDK_NET_FLAG store; the NetCore collects the
// completion with a DPDK_NET_FLAG UC load and sends the packet.
//
// External ports: the snoop/reply channel, the configuration channel (command
// page range, two page-table roots, TLB flush), a 64-byte line port for the
// cache, a line port for page-table reads and an invalidation input. The
// cores, LLC, NIC and memory are outside. Block structure follows the
// paper's architecture figure; the wiring details are this design's.
module arcalis_top
  import arcalis_pkg::*;
#(
  parameter int unsigned CACHE_BYTES = 524288,
  parameter int unsigned CACHE_WAYS  = 8,
  parameter int unsigned TLB_ENTRIES = 16,
  parameter int unsigned ROB_DEPTH   = 16,
  parameter int unsigned LSQ_DEPTH   = 8,
  parameter int unsigned BUF_LINES   = 24
) (
  input  logic        clk,
  input  logic        rst_n,
  // configuration channel
  input  logic        cfg_we,
  input  pa_t         cfg_base,
  input  pa_t         cfg_limit,
  input  pa_t         cfg_root [2],
  input  logic        tlb_flush,
  // snooped core transactions and UC load replies
  input  logic        snp_valid,
  input  logic        snp_uc,
  input  logic        snp_store,
  input  pa_t         snp_addr,
  input  logic [63:0] snp_wdata,
  output logic        snp_hit,
  output logic        ld_rsp_valid,
  output logic [63:0] ld_rsp_data,
  output logic        illegal_cmd,
  // cache port to the coherent interconnect
  output logic        mem_req_valid,
  input  logic        mem_req_ready,
  output logic        mem_req_write,
  output pa_t         mem_req_addr,
  output line_t       mem_req_wdata,
  input  logic        mem_rsp_valid,
  input  line_t       mem_rsp_data,
  input  logic        inv_valid,
  input  pa_t         inv_addr,
  // page-table walk port
  output logic        ptw_req_valid,
  input  logic        ptw_req_ready,
  output pa_t         ptw_req_addr,
  input  logic        ptw_rsp_valid,
  input  line_t       ptw_rsp_data,
  // observation
  output eng_state_e  rx_state,
  output eng_state_e  tx_state,
  output logic [31:0] cache_hits,
  output logic [31:0] cache_misses,
  output logic [31:0] tlb_misses
);
  localparam int unsigned TW = $clog2(ROB_DEPTH);
  localparam int unsigned CW = $clog2(ROB_DEPTH + 1);

  // ---------------- command front end ----------------
  logic        s_valid, s_is_load;
  logic [3:0]  s_addr_lo;
  logic [63:0] s_word;
  logic        fwd_valid;
  logic [63:0] fwd_data;

  arcalis_sci u_sci (
    .clk, .rst_n, .cfg_we, .cfg_base, .cfg_limit,
    .snp_valid, .snp_uc, .snp_store, .snp_addr, .snp_wdata, .snp_hit,
    .cmd_valid(s_valid), .cmd_is_load(s_is_load), .cmd_addr_lo(s_addr_lo), .cmd_word(s_word),
    .fwd_rsp_valid(fwd_valid), .fwd_rsp_data(fwd_data),
    .load_rsp_valid(ld_rsp_valid), .load_rsp_data(ld_rsp_data));

  logic d_cmd_valid, d_ld_valid;
  cmd_t d_cmd;
  arcalis_cmd_decoder u_dec (
    .clk, .rst_n, .in_valid(s_valid), .in_is_load(s_is_load), .in_addr_lo(s_addr_lo),
    .in_word(s_word), .cmd_valid(d_cmd_valid), .ld_valid(d_ld_valid), .cmd(d_cmd),
    .illegal(illegal_cmd));

  logic        rx_req_valid, rx_req_ready, rx_dst_valid, rx_dst_ready;
  logic        tx_req_valid, tx_req_ready, tx_dst_valid, tx_dst_ready;
  va_t         rx_req_va, rx_dst_va, tx_req_va, tx_dst_va;
  logic [15:0] rx_req_len, tx_req_len;

  arcalis_ctrl_fsm u_ctrl (
    .clk, .rst_n, .cmd_valid(d_cmd_valid), .cmd(d_cmd),
    .rx_req_valid, .rx_req_ready, .rx_req_va, .rx_req_len,
    .rx_dst_valid, .rx_dst_ready, .rx_dst_va,
    .tx_req_valid, .tx_req_ready, .tx_req_va, .tx_req_len,
    .tx_dst_valid, .tx_dst_ready, .tx_dst_va);

  logic    rx_done, tx_done;
  status_t rx_status, tx_status;
  arcalis_forward_unit u_fwd (
    .clk, .rst_n, .rx_done, .rx_status, .tx_done, .tx_status,
    .ld_valid(d_ld_valid), .ld_op(d_cmd.op), .rsp_valid(fwd_valid), .rsp_data(fwd_data));

  // ---------------- micro-engines ----------------
  logic       e_req   [NUM_ENGINES];
  xfer_t      e_xfer  [NUM_ENGINES];
  line_t      e_wdata [NUM_ENGINES];
  logic       e_ack   [NUM_ENGINES];
  logic       e_end   [NUM_ENGINES];
  logic       e_fault [NUM_ENGINES];
  logic [CW-1:0] inflight [NUM_ENGINES];
  logic       e_ret   [NUM_ENGINES];
  logic [7:0] wr_idx;
  va_t        fault_va;

  logic          rob_ret_valid, rob_ret_eng, rob_ret_write;
  logic [7:0]    rob_ret_idx;
  line_t         rob_ret_data;
  always_comb
    for (int e = 0; e < NUM_ENGINES; e++)
      e_ret[e] = rob_ret_valid && !rob_ret_write && (rob_ret_eng == 1'(e));

  arcalis_rx_engine #(.BUF_LINES(BUF_LINES), .CW(CW)) u_rx (
    .clk, .rst_n,
    .req_valid(rx_req_valid), .req_ready(rx_req_ready), .req_va(rx_req_va), .req_len(rx_req_len),
    .dst_valid(rx_dst_valid), .dst_ready(rx_dst_ready), .dst_va(rx_dst_va),
    .xfer_req(e_req[ENG_RX]), .xfer(e_xfer[ENG_RX]), .xfer_ack(e_ack[ENG_RX]),
    .xfer_end(e_end[ENG_RX]), .xfer_fault(e_fault[ENG_RX]), .fault_va,
    .wr_idx, .wr_data(e_wdata[ENG_RX]),
    .ret_valid(e_ret[ENG_RX]), .ret_idx(rob_ret_idx), .ret_data(rob_ret_data),
    .mem_inflight(inflight[ENG_RX]), .done(rx_done), .status(rx_status), .state(rx_state));

  arcalis_tx_engine #(.BUF_LINES(BUF_LINES), .CW(CW)) u_tx (
    .clk, .rst_n,
    .req_valid(tx_req_valid), .req_ready(tx_req_ready), .req_va(tx_req_va), .req_len(tx_req_len),
    .dst_valid(tx_dst_valid), .dst_ready(tx_dst_ready), .dst_va(tx_dst_va),
    .xfer_req(e_req[ENG_TX]), .xfer(e_xfer[ENG_TX]), .xfer_ack(e_ack[ENG_TX]),
    .xfer_end(e_end[ENG_TX]), .xfer_fault(e_fault[ENG_TX]), .fault_va,
    .wr_idx, .wr_data(e_wdata[ENG_TX]),
    .ret_valid(e_ret[ENG_TX]), .ret_idx(rob_ret_idx), .ret_data(rob_ret_data),
    .mem_inflight(inflight[ENG_TX]), .done(tx_done), .status(tx_status), .state(tx_state));

  // ---------------- memory pipeline ----------------
  logic  au_valid, au_ready, au_eng, au_end, au_fault;
  xfer_t au_xfer;
  line_t au_wdata;
  arcalis_arbiter u_arb (
    .clk, .rst_n, .req(e_req), .req_xfer(e_xfer), .req_wdata(e_wdata), .req_ack(e_ack),
    .end_o(e_end), .fault_o(e_fault),
    .au_valid, .au_ready, .au_xfer, .au_eng, .au_wdata, .au_end, .au_fault);

  logic    tlb_req_valid, tlb_req_ready, tlb_req_asid, tlb_req_write, tlb_rsp_valid, tlb_rsp_fault;
  va_t     tlb_req_va;
  pa_t     tlb_rsp_pa;
  logic    rob_alloc_valid, rob_alloc_ready, rob_alloc_eng, rob_alloc_write;
  logic [7:0]    rob_alloc_idx;
  logic [TW-1:0] rob_alloc_tag;
  logic          q_push_valid, q_push_ready, q_push_write;
  logic [TW-1:0] q_push_tag;
  pa_t           q_push_pa;
  line_t         q_push_wdata;

  arcalis_address_unit #(.TAG_W(TW)) u_au (
    .clk, .rst_n, .xfer_valid(au_valid), .xfer_ready(au_ready), .xfer(au_xfer), .xfer_eng(au_eng),
    .xfer_end(au_end), .xfer_fault(au_fault), .fault_va, .wr_idx, .wr_data(au_wdata),
    .tlb_req_valid, .tlb_req_ready, .tlb_req_va, .tlb_req_asid, .tlb_req_write,
    .tlb_rsp_valid, .tlb_rsp_pa, .tlb_rsp_fault,
    .rob_alloc_valid, .rob_alloc_ready, .rob_alloc_eng, .rob_alloc_write, .rob_alloc_idx,
    .rob_alloc_tag, .q_push_valid, .q_push_ready, .q_push_tag, .q_push_write, .q_push_pa,
    .q_push_wdata);

  arcalis_tlb_mmu #(.ENTRIES(TLB_ENTRIES)) u_tlb (
    .clk, .rst_n, .cfg_root, .flush(tlb_flush),
    .req_valid(tlb_req_valid), .req_ready(tlb_req_ready), .req_va(tlb_req_va),
    .req_asid(tlb_req_asid), .req_write(tlb_req_write),
    .rsp_valid(tlb_rsp_valid), .rsp_pa(tlb_rsp_pa), .rsp_fault(tlb_rsp_fault),
    .ptw_req_valid, .ptw_req_ready, .ptw_req_addr, .ptw_rsp_valid, .ptw_rsp_data,
    .miss_count(tlb_misses));

  logic          c_rsp_valid;
  logic [TW-1:0] c_rsp_tag;
  line_t         c_rsp_data;
  arcalis_rob #(.DEPTH(ROB_DEPTH)) u_rob (
    .clk, .rst_n, .alloc_valid(rob_alloc_valid), .alloc_ready(rob_alloc_ready),
    .alloc_eng(rob_alloc_eng), .alloc_write(rob_alloc_write), .alloc_idx(rob_alloc_idx),
    .alloc_tag(rob_alloc_tag), .cmp_valid(c_rsp_valid), .cmp_tag(c_rsp_tag), .cmp_data(c_rsp_data),
    .ret_valid(rob_ret_valid), .ret_eng(rob_ret_eng), .ret_write(rob_ret_write),
    .ret_idx(rob_ret_idx), .ret_data(rob_ret_data), .inflight);

  logic          q_pop_valid, q_pop_ready, q_pop_write;
  logic [TW-1:0] q_pop_tag;
  pa_t           q_pop_pa;
  line_t         q_pop_wdata;
  arcalis_ldst_queue #(.DEPTH(LSQ_DEPTH), .TAG_W(TW)) u_lsq (
    .clk, .rst_n, .push_valid(q_push_valid), .push_ready(q_push_ready), .push_tag(q_push_tag),
    .push_write(q_push_write), .push_pa(q_push_pa), .push_wdata(q_push_wdata),
    .pop_valid(q_pop_valid), .pop_ready(q_pop_ready), .pop_tag(q_pop_tag),
    .pop_write(q_pop_write), .pop_pa(q_pop_pa), .pop_wdata(q_pop_wdata));

  arcalis_cache #(.SIZE_BYTES(CACHE_BYTES), .WAYS(CACHE_WAYS), .TAG_W(TW)) u_cache (
    .clk, .rst_n, .req_valid(q_pop_valid), .req_ready(q_pop_ready), .req_tag(q_pop_tag),
    .req_write(q_pop_write), .req_pa(q_pop_pa), .req_wdata(q_pop_wdata),
    .rsp_valid(c_rsp_valid), .rsp_tag(c_rsp_tag), .rsp_data(c_rsp_data),
    .mem_req_valid, .mem_req_ready, .mem_req_write, .mem_req_addr, .mem_req_wdata,
    .mem_rsp_valid, .mem_rsp_data, .inv_valid, .inv_addr,
    .hit_count(cache_hits), .miss_count(cache_misses));
endmodule
