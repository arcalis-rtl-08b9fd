// arcalis_forward_unit: answers uncacheable loads with completion tokens.
//
// The AppCore polls for a deserialized request with a UC load whose opcode is
// APP_READY_FLAG; the NetCore polls for a serialized response with a UC load
// whose opcode is DPDK_NET_FLAG. Each engine's completion (ready with a
// length, a translation fault with the faulting address, or a protocol error)
// is held in a one-entry token register. A load returns the token and clears
// it; a load with no token returns PENDING, so the core polls again. A load
// with any other opcode returns zero.
//
// Timing: rsp_valid/rsp_data follow ld_valid by one cycle. A completion that
// arrives in the same cycle as a read of the same token is kept for the next
// read.
//
// Returning status and error codes to the pending UC load is from the paper;
// the status encoding and polling behaviour are this design's choices.
module arcalis_forward_unit
  import arcalis_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    rx_done,
  input  status_t rx_status,
  input  logic    tx_done,
  input  status_t tx_status,
  input  logic    ld_valid,
  input  opcode_e ld_op,
  output logic    rsp_valid,
  output logic [63:0] rsp_data
);
  status_t rx_tok, tx_tok;
  logic    rd_rx, rd_tx;

  assign rd_rx = ld_valid && (ld_op == CMD_APP_READY_FLAG);
  assign rd_tx = ld_valid && (ld_op == CMD_DPDK_NET_FLAG);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_tok    <= '0;
      tx_tok    <= '0;
      rsp_valid <= 1'b0;
      rsp_data  <= '0;
    end else begin
      rsp_valid <= ld_valid;
      rsp_data  <= rd_rx ? rx_tok : rd_tx ? tx_tok : 64'd0;
      if (rx_done)    rx_tok <= rx_status;
      else if (rd_rx) rx_tok <= '0;
      if (tx_done)    tx_tok <= tx_status;
      else if (rd_tx) tx_tok <= '0;
    end
  end
endmodule
