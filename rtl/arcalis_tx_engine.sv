// arcalis_tx_engine: the response micro-engine (TxEngine).
//
// Handles the egress half of an RPC. Started by a response request {App.
// Resp VA in the AppCore address space, object length}, it loads the result
// object line by line into a local buffer, runs the serializer (header
// creation from the method table and sequence id, respFunctionN field
// encoding) into a local packet buffer, then stores the packet into the
// Net. Resp buffer of the NetCore address space and reports completion with
// the wire length, which the NetCore collects with a UC load before it sends
// the packet.
//
// Its five-state controller (arcalis_engine_fsm) sequences the work exactly as
// in the RxEngine: BUSY (load, serialize, store), DRAIN, DONE, and IDLE_RESP
// when the Net. Resp address has not yet been given, resuming when it is.
// Errors end the RPC with an error status and, like every completion,
// release the destination buffer.
//
// Interfaces are the same as arcalis_rx_engine. Buffers: the object buffer
// holds 26 lines (1664 B: an 80 B header and slot area beside up to 1536 B of
// string data, so a reply carrying a value that filled a 1518 B request still
// fits); the packet buffer is the same size. Buffers assumed 64-byte aligned.
module arcalis_tx_engine
  import arcalis_pkg::*;
#(
  parameter int unsigned BUF_LINES = 24,
  parameter int unsigned CW = 5,
  localparam int unsigned BUF_BYTES = BUF_LINES * LINE_BYTES,
  localparam int unsigned OUT_BYTES = BUF_BYTES + 2 * LINE_BYTES,
  localparam int unsigned AW = $clog2(OUT_BYTES)
) (
  input  logic        clk,
  input  logic        rst_n,
  // work from the control FSM
  input  logic        req_valid,
  output logic        req_ready,
  input  va_t         req_va,
  input  logic [15:0] req_len,
  input  logic        dst_valid,
  output logic        dst_ready,
  input  va_t         dst_va,
  // transfers through the arbiter
  output logic        xfer_req,
  output xfer_t       xfer,
  input  logic        xfer_ack,
  input  logic        xfer_end,
  input  logic        xfer_fault,
  input  va_t         fault_va,
  input  logic [7:0]  wr_idx,
  output line_t       wr_data,
  // retired loads for this engine
  input  logic        ret_valid,
  input  logic [7:0]  ret_idx,
  input  line_t       ret_data,
  input  logic [CW-1:0] mem_inflight,
  // completion towards the forward unit
  output logic        done,
  output status_t     status,
  output eng_state_e  state
);
  typedef enum logic [2:0] {P_LREQ, P_LWAIT, P_RUN0, P_RUN, P_SREQ, P_SWAIT, P_FIN} phase_e;

  logic [7:0]  inbuf  [OUT_BYTES];
  logic [7:0]  outbuf [OUT_BYTES];
  phase_e      phase;
  va_t         src_va_q, dst_va_q;
  logic [15:0] len_q, out_len_q;
  logic        have_dst, end_seen, fault_seen, eng_done_q;
  status_t     status_q;
  logic        cmd_rcvd, work_done, take_req, take_dst;

  // datapath
  logic          dp_start, dp_done, dp_err, dp_we;
  logic [AW-1:0] dp_raddr, dp_waddr;
  logic [7:0]    dp_wdata;
  logic [15:0]   dp_out_len;
  assign dp_start = (state == ST_BUSY) && (phase == P_RUN0);
  arcalis_serializer #(.BUF_BYTES(BUF_BYTES), .OUT_BYTES(OUT_BYTES)) u_ser (
    .clk, .rst_n, .start(dp_start), .in_len(len_q), .in_addr(dp_raddr),
    .in_data(inbuf[dp_raddr]), .out_we(dp_we), .out_addr(dp_waddr), .out_data(dp_wdata),
    .done(dp_done), .err(dp_err), .out_len(dp_out_len));

  assign req_ready = (state == ST_IDLE_RECV);
  assign take_req  = req_valid && req_ready;
  assign dst_ready = !have_dst;
  assign take_dst  = dst_valid && dst_ready;
  assign cmd_rcvd  = take_req || ((state == ST_IDLE_RESP) && have_dst);
  assign work_done = (state == ST_BUSY) && (phase == P_FIN);

  arcalis_engine_fsm #(.CNT_W(CW)) u_fsm (
    .clk, .rst_n, .cmd_rcvd, .work_done, .mem_inflight,
    .engine_done(eng_done_q), .state);

  function automatic logic [7:0] lines_of(input logic [15:0] n);
    return 8'((n + 16'(LINE_BYTES - 1)) >> 6);
  endfunction

  always_comb begin
    xfer_req = (state == ST_BUSY) && (phase == P_LREQ || phase == P_SREQ);
    xfer     = (phase == P_SREQ)
             ? '{is_write: 1'b1, asid: ASID_NET, va: dst_va_q, nlines: lines_of(out_len_q)}
             : '{is_write: 1'b0, asid: ASID_APP, va: src_va_q, nlines: lines_of(len_q)};
    for (int b = 0; b < LINE_BYTES; b++)
      wr_data[b*8 +: 8] = outbuf[AW'(int'(wr_idx) * LINE_BYTES + b)];
  end

  assign done   = (state == ST_DONE) && eng_done_q;
  assign status = status_q;

  always_ff @(posedge clk) begin
    if (ret_valid)
      for (int b = 0; b < LINE_BYTES; b++)
        inbuf[AW'(int'(ret_idx) * LINE_BYTES + b)] <= ret_data[b*8 +: 8];
    if (dp_we) outbuf[dp_waddr] <= dp_wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= P_FIN; src_va_q <= '0; dst_va_q <= '0; len_q <= '0; out_len_q <= '0;
      have_dst <= 1'b0; end_seen <= 1'b0; fault_seen <= 1'b0; eng_done_q <= 1'b0;
      status_q <= '0;
    end else begin
      if (take_dst) begin
        have_dst <= 1'b1;
        dst_va_q <= dst_va;
      end
      if (take_req) begin
        src_va_q   <= req_va;
        len_q      <= req_len;
        eng_done_q <= 1'b0;
        if (req_len == 16'd0 || 32'(req_len) > OUT_BYTES) begin
          status_q   <= '{kind: STAT_PROTO, detail: 14'd1, value: 48'(req_len)};
          eng_done_q <= 1'b1;
          have_dst   <= 1'b0;
          phase      <= P_FIN;
        end else phase <= P_LREQ;
      end
      if (state == ST_IDLE_RESP && have_dst) phase <= P_SREQ;
      if (state == ST_BUSY) begin
        unique case (phase)
          P_LREQ, P_SREQ: if (xfer_ack) begin
            end_seen   <= 1'b0;
            fault_seen <= 1'b0;
            phase      <= (phase == P_LREQ) ? P_LWAIT : P_SWAIT;
          end
          P_LWAIT: begin
            if (xfer_end) begin
              end_seen   <= 1'b1;
              fault_seen <= xfer_fault;
              if (xfer_fault) status_q <= '{kind: STAT_FAULT, detail: 14'd0, value: fault_va};
            end
            if (end_seen && mem_inflight == '0) begin
              if (fault_seen) begin
                eng_done_q <= 1'b1;
                have_dst   <= 1'b0;
                phase      <= P_FIN;
              end else phase <= P_RUN0;
            end
          end
          P_RUN0: phase <= P_RUN;
          P_RUN: if (dp_done) begin
            if (dp_err) begin
              status_q   <= '{kind: STAT_PROTO, detail: 14'd2, value: '0};
              eng_done_q <= 1'b1;
              have_dst   <= 1'b0;
              phase      <= P_FIN;
            end else begin
              out_len_q <= dp_out_len;
              if (have_dst) phase <= P_SREQ;
              else begin
                eng_done_q <= 1'b0;
                phase      <= P_FIN;
              end
            end
          end
          P_SWAIT: if (xfer_end) begin
            status_q   <= xfer_fault ? '{kind: STAT_FAULT, detail: 14'd0, value: fault_va}
                                     : '{kind: STAT_READY, detail: 14'd0, value: 48'(out_len_q)};
            eng_done_q <= 1'b1;
            have_dst   <= 1'b0;
            phase      <= P_FIN;
          end
          default: ;
        endcase
      end
    end
  end
endmodule
