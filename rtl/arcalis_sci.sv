// arcalis_sci: Snooping Command Interface.
//
// Watches every memory transaction that the CPU cores put on the coherent
// interconnect. A transaction is claimed as an accelerator command when it is
// marked uncacheable (UC) and its physical address falls inside the watch
// range [cfg_base, cfg_limit) that the kernel driver programmed once at
// start-up (the pinned "command page"). Everything else is ignored.
//
// Interface and timing: snp_hit is combinational in the cycle of the snoop so
// the fabric knows the accelerator owns the access. The claimed transaction is
// registered and presented on cmd_* one cycle later, towards the byte
// selector. A claimed UC load is answered on load_rsp_* in the cycle the
// forward unit supplies fwd_rsp_*, registered once more here.
//
// The filtering rule (UC and in range) follows the paper; base/limit
// registers, the cycle timing and the reply channel are this design's choices.
// Reset leaves the range empty, so nothing is claimed before configuration.
module arcalis_sci
  import arcalis_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // configuration channel
  input  logic        cfg_we,
  input  pa_t         cfg_base,
  input  pa_t         cfg_limit,
  // snooped transaction
  input  logic        snp_valid,
  input  logic        snp_uc,
  input  logic        snp_store,
  input  pa_t         snp_addr,
  input  logic [63:0] snp_wdata,
  output logic        snp_hit,
  // claimed transaction towards the byte selector
  output logic        cmd_valid,
  output logic        cmd_is_load,
  output logic [3:0]  cmd_addr_lo,
  output logic [63:0] cmd_word,
  // reply from the forward unit and back to the requesting core
  input  logic        fwd_rsp_valid,
  input  logic [63:0] fwd_rsp_data,
  output logic        load_rsp_valid,
  output logic [63:0] load_rsp_data
);
  pa_t base_q, limit_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      base_q  <= '0;
      limit_q <= '0;
    end else if (cfg_we) begin
      base_q  <= cfg_base;
      limit_q <= cfg_limit;
    end
  end

  assign snp_hit = snp_valid && snp_uc && (snp_addr >= base_q) && (snp_addr < limit_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cmd_valid      <= 1'b0;
      cmd_is_load    <= 1'b0;
      cmd_addr_lo    <= '0;
      cmd_word       <= '0;
      load_rsp_valid <= 1'b0;
      load_rsp_data  <= '0;
    end else begin
      cmd_valid      <= snp_hit;
      cmd_is_load    <= !snp_store;
      cmd_addr_lo    <= snp_addr[3:0];
      cmd_word       <= snp_store ? snp_wdata : 64'd0;
      load_rsp_valid <= fwd_rsp_valid;
      load_rsp_data  <= fwd_rsp_data;
    end
  end
endmodule
