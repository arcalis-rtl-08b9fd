// arcalis_deserializer: header parser, dispatcher and deserializer of the
// receive path (Parse Header + Deserializer + Dispatch + recvFunctionN).
//
// Walks a Thrift binary-protocol CALL message held in the engine's packet
// buffer, one byte per cycle:
//   header   4B version/type (0x80 0x01 0x00 0x01), 4B name length,
//            name, 4B sequence id (all big endian)
//   dispatch the name selects recvFunctionN (arcalis_dispatch)
//   fields   1B type, 2B field id, value; a type of 0 (STOP) ends the struct
// Each field that recvFunctionN accepts is written into the App. Recv object:
// a scalar, zero-extended, into its 8-byte slot; a string's bytes into the
// data area and {length, offset} into its slot. Unknown fields are skipped.
// At the end the 16-byte object header {func id, seqid, present mask, total
// bytes} is written at offset 0 and done pulses with out_len.
//
// Ports: in_addr/in_data is a combinational byte read port into the packet
// buffer; out_we/out_addr/out_data a byte write port into the object buffer.
// err is set with done for a bad header, an unknown method, a truncated
// packet, an overflowing object or an unsupported type (struct, list, set,
// map).
//
// Header parsing, dispatch and IDL-derived deserialization are the paper's
// roles; Thrift's binary protocol, the object layout and the byte-per-cycle
// datapath are this design's choices.
module arcalis_deserializer
  import arcalis_pkg::*;
#(
  parameter int unsigned BUF_BYTES = 1536,
  parameter int unsigned OUT_BYTES = BUF_BYTES + 128,
  localparam int unsigned AW = $clog2(OUT_BYTES),
  localparam int unsigned SW = $clog2(MAX_FIELDS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [15:0]       in_len,
  output logic [AW-1:0]     in_addr,
  input  logic [7:0]        in_data,
  output logic              out_we,
  output logic [AW-1:0]     out_addr,
  output logic [7:0]        out_data,
  output logic              done,
  output logic              err,
  output logic [15:0]       out_len,
  output logic [FUNC_W-1:0] func_id
);
  typedef enum logic [3:0] {
    S_IDLE, S_HDR, S_NLEN, S_NAME, S_SEQ, S_DISP, S_FTYPE, S_FID,
    S_VAL, S_SLEN, S_STR, S_SLOT, S_HDRW, S_END, S_ERR
  } st_e;

  st_e         st;
  logic [15:0] rp, wp, cnt;
  logic [63:0] acc, slotval;
  name_t       name;
  logic [7:0]  nlen;
  logic [31:0] seqid, slen;
  logic [15:0] fid;
  logic [7:0]  ftype;
  logic [MAX_FIELDS-1:0] mask;
  logic [63:0] nxt_acc;
  logic        avail;
  logic [127:0] hdr;

  // dispatch
  logic              d_hit;
  logic [FUNC_W-1:0] d_id;
  arcalis_dispatch u_dispatch (.name(name), .name_len(nlen), .hit(d_hit), .func_id(d_id));

  // recvFunction1..N, selected by the dispatched function id
  logic [NUM_FUNCS-1:0] f_hit;
  logic [SW-1:0]        f_slot [NUM_FUNCS];
  for (genvar f = 0; f < NUM_FUNCS; f++) begin : g_recv
    arcalis_recv_function #(.SCHEMA(RECV_SCHEMAS[f])) u_fn (
      .fid(fid), .ftype(ftype), .hit(f_hit[f]), .slot(f_slot[f]));
  end
  logic          hit;
  logic [SW-1:0] slot;
  assign hit  = f_hit[func_id];
  assign slot = f_slot[func_id];

  assign in_addr = AW'(rp);
  assign avail   = rp < in_len;
  assign nxt_acc = {acc[55:0], in_data};
  assign hdr     = {16'd0, wp, 24'd0, mask, seqid, 30'd0, func_id};

  always_comb begin
    out_we   = 1'b0;
    out_addr = AW'(wp);
    out_data = in_data;
    unique case (st)
      S_STR:  out_we = hit;
      S_SLOT: begin
        out_we   = hit;
        out_addr = AW'(SLOT_OFF + 8 * int'(slot) + int'(cnt));
        out_data = slotval[cnt[2:0]*8 +: 8];
      end
      S_HDRW: begin
        out_we   = 1'b1;
        out_addr = AW'(cnt);
        out_data = hdr[cnt[3:0]*8 +: 8];
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; rp <= '0; wp <= '0; cnt <= '0; acc <= '0; slotval <= '0;
      name <= '0; nlen <= '0; seqid <= '0; slen <= '0; fid <= '0; ftype <= '0;
      mask <= '0; func_id <= '0; done <= 1'b0; err <= 1'b0; out_len <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          st <= S_HDR; rp <= '0; wp <= 16'(DATA_OFF); cnt <= '0; acc <= '0;
          mask <= '0; err <= 1'b0; name <= '0; func_id <= '0;
        end
        S_HDR, S_NLEN, S_SEQ, S_FID, S_VAL, S_SLEN: begin
          if (!avail) st <= S_ERR;
          else begin
            rp  <= rp + 16'd1;
            acc <= nxt_acc;
            cnt <= cnt + 16'd1;
            if (st == S_HDR && cnt == 16'd3) begin
              cnt <= '0;
              if (nxt_acc[31:16] == 16'h8001 && nxt_acc[7:0] == MSG_CALL) st <= S_NLEN;
              else st <= S_ERR;
            end
            if (st == S_NLEN && cnt == 16'd3) begin
              cnt  <= '0;
              nlen <= nxt_acc[7:0];
              if (nxt_acc[31:0] == 32'd0 || nxt_acc[31:0] > NAME_MAX) st <= S_ERR;
              else st <= S_NAME;
            end
            if (st == S_SEQ && cnt == 16'd3) begin
              seqid <= nxt_acc[31:0];
              st    <= S_DISP;
            end
            if (st == S_FID && cnt == 16'd1) begin
              fid <= nxt_acc[15:0];
              cnt <= '0;
              acc <= '0;
              st  <= (ftype == T_STRING) ? S_SLEN : S_VAL;
            end
            if (st == S_VAL && cnt == 16'(scalar_bytes(ftype) - 4'd1)) begin
              slotval <= nxt_acc;
              cnt     <= '0;
              st      <= S_SLOT;
            end
            if (st == S_SLEN && cnt == 16'd3) begin
              slen    <= nxt_acc[31:0];
              slotval <= {nxt_acc[31:0], 16'd0, wp};
              cnt     <= '0;
              if (hit && (32'(wp) + nxt_acc[31:0] > OUT_BYTES)) st <= S_ERR;
              else st <= (nxt_acc[31:0] == 32'd0) ? S_SLOT : S_STR;
            end
          end
        end
        S_NAME: begin
          if (!avail) st <= S_ERR;
          else begin
            name[cnt[3:0]*8 +: 8] <= in_data;
            rp  <= rp + 16'd1;
            cnt <= cnt + 16'd1;
            if (cnt == 16'(nlen) - 16'd1) begin
              cnt <= '0;
              st  <= S_SEQ;
            end
          end
        end
        S_DISP: begin
          if (d_hit) begin
            func_id <= d_id;
            st      <= S_FTYPE;
          end else st <= S_ERR;
        end
        S_FTYPE: begin
          if (!avail) st <= S_ERR;
          else begin
            ftype <= in_data;
            rp    <= rp + 16'd1;
            cnt   <= '0;
            acc   <= '0;
            if (in_data == T_STOP) st <= S_HDRW;
            else if (scalar_bytes(in_data) == 4'd0 && in_data != T_STRING) st <= S_ERR;
            else st <= S_FID;
          end
        end
        S_STR: begin
          if (!avail) st <= S_ERR;
          else begin
            rp  <= rp + 16'd1;
            if (hit) wp <= wp + 16'd1;
            cnt <= cnt + 16'd1;
            if (32'(cnt) == slen - 32'd1) begin
              cnt <= '0;
              st  <= S_SLOT;
            end
          end
        end
        S_SLOT: begin
          if (!hit) st <= S_FTYPE;
          else begin
            cnt <= cnt + 16'd1;
            if (cnt == 16'd7) begin
              mask[slot] <= 1'b1;
              cnt        <= '0;
              st         <= S_FTYPE;
            end
          end
        end
        S_HDRW: begin
          cnt <= cnt + 16'd1;
          if (cnt == 16'd15) st <= S_END;
        end
        S_END: begin
          done    <= 1'b1;
          out_len <= wp;
          st      <= S_IDLE;
        end
        S_ERR: begin
          done    <= 1'b1;
          err     <= 1'b1;
          out_len <= '0;
          st      <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
