// arcalis_tlb_mmu: address translation for the micro-engines.
//
// The engines work in the virtual address spaces of the processes that own
// the buffers: the NetCore process (ASID 0) and the AppCore process
// (ASID 1). Each has a page-table root programmed at configuration time.
// A request {va, asid, write} is looked up in a fully associative TLB; on a
// hit the physical address is returned. On a miss the page-table walker
// reads the 4-level radix table (x86-64 layout: 9 index bits per level,
// present bit 0, writable bit 1, page-size bit 7, next-level address in bits
// 47:12) through its own port, one 64-byte line per level, stops at a 2 MB
// leaf (page-size bit at the page-directory level) or a 4 KB leaf, fills a
// TLB entry chosen round robin, and retries the lookup. A missing entry, a
// 1 GB leaf or a store to a read-only page returns rsp_fault, which the
// engines report to software as a retryable error. flush empties the TLB
// (shootdown, keeping it consistent with the host TLBs).
//
// Timing: one request at a time; req_ready only when idle. A hit answers two
// cycles after acceptance; a miss adds one interconnect round trip per level.
//
// 4 KB and 2 MB pages, the walker, fault reporting and consistency with the
// host TLB are from the paper; the page-table format, the two address-space
// roots, the TLB organisation and size are this design's choices.
module arcalis_tlb_mmu
  import arcalis_pkg::*;
#(
  parameter int unsigned ENTRIES = 16,
  localparam int unsigned EW = $clog2(ENTRIES)
) (
  input  logic  clk,
  input  logic  rst_n,
  input  pa_t   cfg_root [2],
  input  logic  flush,
  input  logic  req_valid,
  output logic  req_ready,
  input  va_t   req_va,
  input  logic  req_asid,
  input  logic  req_write,
  output logic  rsp_valid,
  output pa_t   rsp_pa,
  output logic  rsp_fault,
  output logic  ptw_req_valid,
  input  logic  ptw_req_ready,
  output pa_t   ptw_req_addr,
  input  logic  ptw_rsp_valid,
  input  line_t ptw_rsp_data,
  output logic [31:0] miss_count
);
  typedef struct packed {
    logic        valid;
    logic        asid;
    logic        big;       // 2 MB page
    logic        writable;
    logic [35:0] vpn;
    logic [35:0] ppn;
  } tlbe_t;

  typedef enum logic [2:0] {T_IDLE, T_LOOKUP, T_WREQ, T_WWAIT, T_FILL} st_e;

  tlbe_t          tlb_q [ENTRIES];
  logic [EW-1:0]  victim_q;
  st_e            st;
  va_t            va_r;
  logic           asid_r, wr_r;
  logic [1:0]     level;        // 3 = PML4 ... 0 = PT
  pa_t            table_q;
  logic           wr_ok_q, leaf_big_q;
  logic [35:0]    leaf_ppn_q;

  // lookup
  logic     hit;
  tlbe_t    he;
  always_comb begin
    hit = 1'b0;
    he  = '0;
    for (int i = 0; i < ENTRIES; i++)
      if (tlb_q[i].valid && tlb_q[i].asid == asid_r &&
          (tlb_q[i].big ? (tlb_q[i].vpn[35:9] == va_r[47:21]) : (tlb_q[i].vpn == va_r[47:12]))) begin
        hit = 1'b1;
        he  = tlb_q[i];
      end
  end

  logic [8:0] vidx;
  always_comb begin
    unique case (level)
      2'd3: vidx = va_r[47:39];
      2'd2: vidx = va_r[38:30];
      2'd1: vidx = va_r[29:21];
      default: vidx = va_r[20:12];
    endcase
  end
  pa_t  pte_addr;
  logic [63:0] pte;
  assign pte_addr = {table_q[PA_W-1:12], vidx, 3'b000};
  assign pte      = ptw_rsp_data[pte_addr[5:3]*64 +: 64];

  assign req_ready     = (st == T_IDLE);
  assign ptw_req_valid = (st == T_WREQ);
  assign ptw_req_addr  = {pte_addr[PA_W-1:6], 6'd0};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= T_IDLE; va_r <= '0; asid_r <= 1'b0; wr_r <= 1'b0; level <= '0;
      table_q <= '0; wr_ok_q <= 1'b0; leaf_big_q <= 1'b0; leaf_ppn_q <= '0;
      victim_q <= '0; rsp_valid <= 1'b0; rsp_pa <= '0; rsp_fault <= 1'b0;
      miss_count <= '0;
      for (int i = 0; i < ENTRIES; i++) tlb_q[i] <= '0;
    end else begin
      rsp_valid <= 1'b0;
      unique case (st)
        T_IDLE: if (req_valid) begin
          va_r   <= req_va;
          asid_r <= req_asid;
          wr_r   <= req_write;
          st     <= T_LOOKUP;
        end
        T_LOOKUP: begin
          if (hit) begin
            rsp_valid <= 1'b1;
            rsp_fault <= wr_r && !he.writable;
            rsp_pa    <= he.big ? {he.ppn[35:9], va_r[20:0]} : {he.ppn, va_r[11:0]};
            st        <= T_IDLE;
          end else begin
            miss_count <= miss_count + 1;
            level      <= 2'd3;
            table_q    <= cfg_root[asid_r];
            wr_ok_q    <= 1'b1;
            st         <= T_WREQ;
          end
        end
        T_WREQ: if (ptw_req_ready) st <= T_WWAIT;
        T_WWAIT: if (ptw_rsp_valid) begin
          if (!pte[0] || (level == 2'd2 && pte[7])) begin
            rsp_valid <= 1'b1;
            rsp_fault <= 1'b1;
            rsp_pa    <= '0;
            st        <= T_IDLE;
          end else begin
            wr_ok_q <= wr_ok_q && pte[1];
            if (level == 2'd0 || (level == 2'd1 && pte[7])) begin
              leaf_big_q <= (level == 2'd1);
              leaf_ppn_q <= pte[47:12];
              st         <= T_FILL;
            end else begin
              table_q <= {pte[47:12], 12'd0};
              level   <= level - 2'd1;
              st      <= T_WREQ;
            end
          end
        end
        T_FILL: begin
          tlb_q[victim_q] <= '{valid: 1'b1, asid: asid_r, big: leaf_big_q, writable: wr_ok_q,
                               vpn: va_r[47:12], ppn: leaf_ppn_q};
          victim_q <= victim_q + 1'b1;
          st       <= T_LOOKUP;
        end
        default: st <= T_IDLE;
      endcase
      if (flush) for (int i = 0; i < ENTRIES; i++) tlb_q[i].valid <= 1'b0;
    end
  end
endmodule
