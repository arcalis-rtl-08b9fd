// arcalis_address_unit: turns an engine's buffer transfer into memory
// transactions.
//
// A transfer {load/store, address space, 64-byte aligned VA, line count}
// granted by the arbiter is split into consecutive 64-byte line accesses.
// For each line the unit asks the TLB/MMU for the physical address, then, in
// one cycle, allocates a reorder-buffer entry (tag = line's entry) and
// pushes {tag, load/store, PA, store data} into the LD/ST queue. Store data
// for line i is fetched from the owning engine through wr_idx/wr_data.
// xfer_end pulses when every line has been issued, or at the first
// translation fault, with xfer_fault and the faulting VA; lines already
// issued still complete through the ROB.
//
// Timing: at least three cycles per line with a TLB hit (request, lookup,
// issue); xfer_ready only while idle.
//
// Coordinating outstanding transactions with the ROB is the paper's; the
// split into per-line accesses and the issue sequence are this design's.
module arcalis_address_unit
  import arcalis_pkg::*;
#(
  parameter int unsigned TAG_W = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             xfer_valid,
  output logic             xfer_ready,
  input  xfer_t            xfer,
  input  logic             xfer_eng,
  output logic             xfer_end,
  output logic             xfer_fault,
  output va_t              fault_va,
  // store data from the owning engine
  output logic [7:0]       wr_idx,
  input  line_t            wr_data,
  // translation
  output logic             tlb_req_valid,
  input  logic             tlb_req_ready,
  output va_t              tlb_req_va,
  output logic             tlb_req_asid,
  output logic             tlb_req_write,
  input  logic             tlb_rsp_valid,
  input  pa_t              tlb_rsp_pa,
  input  logic             tlb_rsp_fault,
  // reorder buffer
  output logic             rob_alloc_valid,
  input  logic             rob_alloc_ready,
  output logic             rob_alloc_eng,
  output logic             rob_alloc_write,
  output logic [7:0]       rob_alloc_idx,
  input  logic [TAG_W-1:0] rob_alloc_tag,
  // LD/ST queue
  output logic             q_push_valid,
  input  logic             q_push_ready,
  output logic [TAG_W-1:0] q_push_tag,
  output logic             q_push_write,
  output pa_t              q_push_pa,
  output line_t            q_push_wdata
);
  typedef enum logic [2:0] {A_IDLE, A_XLATE, A_WAIT, A_ISSUE, A_END} st_e;

  st_e        st;
  xfer_t      x_r;
  logic       eng_r;
  logic [7:0] i_r;
  pa_t        pa_r;
  logic       fault_r;
  va_t        va_i;
  logic       issue;

  assign va_i          = x_r.va + VA_W'({i_r, 6'd0});
  assign xfer_ready    = (st == A_IDLE);
  assign tlb_req_valid = (st == A_XLATE);
  assign tlb_req_va    = va_i;
  assign tlb_req_asid  = x_r.asid;
  assign tlb_req_write = x_r.is_write;
  assign wr_idx        = i_r;

  assign issue           = (st == A_ISSUE) && rob_alloc_ready && q_push_ready;
  assign rob_alloc_valid = issue;
  assign rob_alloc_eng   = eng_r;
  assign rob_alloc_write = x_r.is_write;
  assign rob_alloc_idx   = i_r;
  assign q_push_valid    = issue;
  assign q_push_tag      = rob_alloc_tag;
  assign q_push_write    = x_r.is_write;
  assign q_push_pa       = pa_r;
  assign q_push_wdata    = x_r.is_write ? wr_data : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= A_IDLE; x_r <= '0; eng_r <= 1'b0; i_r <= '0; pa_r <= '0; fault_r <= 1'b0;
      xfer_end <= 1'b0; xfer_fault <= 1'b0; fault_va <= '0;
    end else begin
      xfer_end <= 1'b0;
      unique case (st)
        A_IDLE: if (xfer_valid) begin
          x_r     <= xfer;
          eng_r   <= xfer_eng;
          i_r     <= '0;
          fault_r <= 1'b0;
          st      <= (xfer.nlines == 8'd0) ? A_END : A_XLATE;
        end
        A_XLATE: if (tlb_req_ready) st <= A_WAIT;
        A_WAIT: if (tlb_rsp_valid) begin
          if (tlb_rsp_fault) begin
            fault_r  <= 1'b1;
            fault_va <= va_i;
            st       <= A_END;
          end else begin
            pa_r <= tlb_rsp_pa;
            st   <= A_ISSUE;
          end
        end
        A_ISSUE: if (issue) begin
          i_r <= i_r + 8'd1;
          st  <= (i_r + 8'd1 == x_r.nlines) ? A_END : A_XLATE;
        end
        A_END: begin
          xfer_end   <= 1'b1;
          xfer_fault <= fault_r;
          st         <= A_IDLE;
        end
        default: st <= A_IDLE;
      endcase
    end
  end
endmodule
