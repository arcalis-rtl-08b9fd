// arcalis_ctrl_fsm: central control block of the accelerator.
//
// Receives the decoded UC-store commands and turns them into work for the two
// micro-engines. It keeps one descriptor register per kind of buffer:
//   SEND_NET_BUF   Net. Recv packet address       (held until SEND_NET_LEN)
//   SEND_NET_LEN   packet length -> receive request {packet VA, length}
//   APP_READY_FLAG App. Recv address -> destination for the RxEngine
//   SEND_APP_BUF   App. Resp address              (held until SEND_APP_RESP)
//   SEND_APP_RESP  response length -> response request {App. Resp VA, length}
//   DPDK_NET_FLAG  Net. Resp address -> destination for the TxEngine
// Requests and destinations are offered to the engines on valid/ready pairs
// and cleared when taken. The two paths are independent, so a receive and a
// response can be in flight at the same time.
//
// Timing: a command is visible on the matching *_valid in the cycle after
// cmd_valid. A new command of a kind overwrites an unconsumed one.
//
// The command set and the activation of the engines follow the paper; the
// pairing of commands and buffers is this design's reading of the paper's
// software example.
module arcalis_ctrl_fsm
  import arcalis_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  cmd_valid,
  input  cmd_t  cmd,
  // receive path
  output logic        rx_req_valid,
  input  logic        rx_req_ready,
  output va_t         rx_req_va,
  output logic [15:0] rx_req_len,
  output logic        rx_dst_valid,
  input  logic        rx_dst_ready,
  output va_t         rx_dst_va,
  // response path
  output logic        tx_req_valid,
  input  logic        tx_req_ready,
  output va_t         tx_req_va,
  output logic [15:0] tx_req_len,
  output logic        tx_dst_valid,
  input  logic        tx_dst_ready,
  output va_t         tx_dst_va
);
  va_t net_buf_q, app_buf_q;
  logic is_cmd;
  assign is_cmd = cmd_valid && !cmd.is_load;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      net_buf_q    <= '0;
      app_buf_q    <= '0;
      rx_req_valid <= 1'b0;
      rx_req_va    <= '0;
      rx_req_len   <= '0;
      rx_dst_valid <= 1'b0;
      rx_dst_va    <= '0;
      tx_req_valid <= 1'b0;
      tx_req_va    <= '0;
      tx_req_len   <= '0;
      tx_dst_valid <= 1'b0;
      tx_dst_va    <= '0;
    end else begin
      if (rx_req_valid && rx_req_ready) rx_req_valid <= 1'b0;
      if (rx_dst_valid && rx_dst_ready) rx_dst_valid <= 1'b0;
      if (tx_req_valid && tx_req_ready) tx_req_valid <= 1'b0;
      if (tx_dst_valid && tx_dst_ready) tx_dst_valid <= 1'b0;
      if (is_cmd) begin
        unique case (cmd.op)
          CMD_SEND_NET_BUF: net_buf_q <= va_t'(cmd.data);
          CMD_SEND_NET_LEN: begin
            rx_req_valid <= 1'b1;
            rx_req_va    <= net_buf_q;
            rx_req_len   <= 16'(cmd.data);
          end
          CMD_APP_READY_FLAG: begin
            rx_dst_valid <= 1'b1;
            rx_dst_va    <= va_t'(cmd.data);
          end
          CMD_SEND_APP_BUF: app_buf_q <= va_t'(cmd.data);
          CMD_SEND_APP_RESP: begin
            tx_req_valid <= 1'b1;
            tx_req_va    <= app_buf_q;
            tx_req_len   <= 16'(cmd.data);
          end
          CMD_DPDK_NET_FLAG: begin
            tx_dst_valid <= 1'b1;
            tx_dst_va    <= va_t'(cmd.data);
          end
          default: ;
        endcase
      end
    end
  end
endmodule
