// arcalis_serializer: header creation and serializer of the response path
// (Create Header + Serializer + respFunctionN).
//
// Reads the result object the application left in App. Resp (16-byte header
// {func id, seqid, present mask, total bytes}, 8-byte slots, string data
// area; see arcalis_pkg) and writes a Thrift binary-protocol REPLY message,
// one byte per cycle:
//   header  0x80 0x01 0x00 0x02, 4B name length, method name (from the
//           method table), 4B sequence id, all big endian
//   fields  for each entry of respFunctionN whose slot is present:
//           1B type, 2B field id, value (scalars big endian, strings as
//           4B length + bytes copied from the data area)
//   STOP    a 0 byte
// done pulses with out_len, the number of wire bytes; err flags an unknown
// function id or a string that lies outside the object.
//
// Ports: in_addr/in_data is a combinational byte read port into the object
// buffer; out_we/out_addr/out_data a byte write port into the packet buffer.
//
// Header creation and IDL-derived serialization are the paper's roles; the
// wire format (Thrift binary) and object layout are this design's choices.
module arcalis_serializer
  import arcalis_pkg::*;
#(
  parameter int unsigned BUF_BYTES = 1536,
  parameter int unsigned OUT_BYTES = BUF_BYTES + 128,
  localparam int unsigned AW = $clog2(OUT_BYTES),
  localparam int unsigned SW = $clog2(MAX_FIELDS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [15:0]   in_len,
  output logic [AW-1:0] in_addr,
  input  logic [7:0]    in_data,
  output logic          out_we,
  output logic [AW-1:0] out_addr,
  output logic [7:0]    out_data,
  output logic          done,
  output logic          err,
  output logic [15:0]   out_len
);
  typedef enum logic [3:0] {
    S_IDLE, S_RHDR, S_CHK, S_WHDR, S_WNLEN, S_WNAME, S_WSEQ, S_FLD, S_WFID,
    S_RSLOT, S_WVAL, S_WSLEN, S_WSTR, S_STOP, S_END, S_ERR
  } st_e;

  st_e          st;
  logic [15:0]  wp, cnt;
  logic [127:0] hdr;
  logic [63:0]  val;
  logic [SW-1:0] idx;
  logic [FUNC_W-1:0] func;
  logic [31:0]  seqid;
  logic [MAX_FIELDS-1:0] mask;
  logic [7:0]   nlen;

  assign func  = hdr[FUNC_W-1:0];
  assign seqid = hdr[63:32];
  assign mask  = hdr[64 +: MAX_FIELDS];
  assign nlen  = FUNC_NAME_LENS[func];

  // respFunction1..N
  logic [NUM_FUNCS-1:0] f_valid, f_last;
  logic [15:0]   f_fid   [NUM_FUNCS];
  logic [7:0]    f_type  [NUM_FUNCS];
  logic [SW-1:0] f_slot  [NUM_FUNCS];
  for (genvar f = 0; f < NUM_FUNCS; f++) begin : g_resp
    arcalis_resp_function #(.SCHEMA(RESP_SCHEMAS[f])) u_fn (
      .idx(idx), .valid(f_valid[f]), .last(f_last[f]), .fid(f_fid[f]),
      .ftype(f_type[f]), .slot(f_slot[f]));
  end
  logic          e_valid;
  logic [15:0]   e_fid;
  logic [7:0]    e_type;
  logic [SW-1:0] e_slot;
  logic [3:0]    e_sb;
  assign e_valid = f_valid[func];
  assign e_fid   = f_fid[func];
  assign e_type  = f_type[func];
  assign e_slot  = f_slot[func];
  assign e_sb    = scalar_bytes(e_type);

  // byte read address
  always_comb begin
    unique case (st)
      S_RHDR:  in_addr = AW'(cnt);
      S_RSLOT: in_addr = AW'(SLOT_OFF + 8 * int'(e_slot) + int'(cnt));
      S_WSTR:  in_addr = AW'(val[15:0] + cnt);
      default: in_addr = '0;
    endcase
  end

  // byte write
  always_comb begin
    out_we   = 1'b0;
    out_addr = AW'(wp);
    out_data = '0;
    unique case (st)
      S_WHDR: begin
        out_we = 1'b1;
        unique case (cnt[1:0])
          2'd0: out_data = 8'h80;
          2'd1: out_data = 8'h01;
          2'd2: out_data = 8'h00;
          default: out_data = MSG_REPLY;
        endcase
      end
      S_WNLEN: begin out_we = 1'b1; out_data = (cnt == 16'd3) ? nlen : 8'd0; end
      S_WNAME: begin out_we = 1'b1; out_data = FUNC_NAMES[func][cnt[3:0]*8 +: 8]; end
      S_WSEQ:  begin out_we = 1'b1; out_data = seqid[(3 - int'(cnt[1:0]))*8 +: 8]; end
      S_FLD:   begin out_we = e_valid && mask[e_slot]; out_data = e_type; end
      S_WFID:  begin out_we = 1'b1; out_data = cnt[0] ? e_fid[7:0] : e_fid[15:8]; end
      S_WVAL:  begin out_we = 1'b1; out_data = val[(e_sb - 4'd1 - cnt[3:0])*8 +: 8]; end
      S_WSLEN: begin out_we = 1'b1; out_data = val[32 + (3 - int'(cnt[1:0]))*8 +: 8]; end
      S_WSTR:  begin out_we = 1'b1; out_data = in_data; end
      S_STOP:  begin out_we = 1'b1; out_data = T_STOP; end
      default: ;
    endcase
  end

  logic room;
  assign room = 32'(wp) < OUT_BYTES;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; wp <= '0; cnt <= '0; hdr <= '0; val <= '0; idx <= '0;
      done <= 1'b0; err <= 1'b0; out_len <= '0;
    end else begin
      done <= 1'b0;
      if (out_we && !room) st <= S_ERR;
      else unique case (st)
        S_IDLE: if (start) begin
          st <= S_RHDR; wp <= '0; cnt <= '0; idx <= '0; err <= 1'b0;
        end
        S_RHDR: begin
          hdr[cnt[3:0]*8 +: 8] <= in_data;
          cnt <= cnt + 16'd1;
          if (cnt == 16'd15) begin cnt <= '0; st <= S_CHK; end
        end
        S_CHK: st <= (32'(hdr[31:0]) < NUM_FUNCS && in_len >= 16'(DATA_OFF)) ? S_WHDR : S_ERR;
        S_WHDR, S_WNLEN, S_WSEQ: begin
          wp  <= wp + 16'd1;
          cnt <= cnt + 16'd1;
          if (cnt == 16'd3) begin
            cnt <= '0;
            st  <= (st == S_WHDR) ? S_WNLEN : (st == S_WNLEN) ? S_WNAME : S_FLD;
          end
        end
        S_WNAME: begin
          wp  <= wp + 16'd1;
          cnt <= cnt + 16'd1;
          if (cnt == 16'(nlen) - 16'd1) begin cnt <= '0; st <= S_WSEQ; end
        end
        S_FLD: begin
          cnt <= '0;
          if (!e_valid) st <= S_STOP;
          else if (!mask[e_slot]) idx <= idx + 1'b1;
          else begin
            wp <= wp + 16'd1;
            st <= S_WFID;
          end
        end
        S_WFID: begin
          wp  <= wp + 16'd1;
          cnt <= cnt + 16'd1;
          if (cnt == 16'd1) begin cnt <= '0; st <= S_RSLOT; end
        end
        S_RSLOT: begin
          val[cnt[2:0]*8 +: 8] <= in_data;
          cnt <= cnt + 16'd1;
          if (cnt == 16'd7) begin
            cnt <= '0;
            st  <= (e_type == T_STRING) ? S_WSLEN : S_WVAL;
          end
        end
        S_WVAL: begin
          wp  <= wp + 16'd1;
          cnt <= cnt + 16'd1;
          if (cnt == 16'(e_sb) - 16'd1) begin cnt <= '0; idx <= idx + 1'b1; st <= S_FLD; end
        end
        S_WSLEN: begin
          wp  <= wp + 16'd1;
          cnt <= cnt + 16'd1;
          if (cnt == 16'd3) begin
            cnt <= '0;
            if (32'(val[31:0]) + 32'(val[63:32]) > 32'(in_len)) st <= S_ERR;
            else if (val[63:32] == 32'd0) begin idx <= idx + 1'b1; st <= S_FLD; end
            else st <= S_WSTR;
          end
        end
        S_WSTR: begin
          wp  <= wp + 16'd1;
          cnt <= cnt + 16'd1;
          if (32'(cnt) == val[63:32] - 32'd1) begin cnt <= '0; idx <= idx + 1'b1; st <= S_FLD; end
        end
        S_STOP: begin wp <= wp + 16'd1; st <= S_END; end
        S_END:  begin done <= 1'b1; out_len <= wp; st <= S_IDLE; end
        S_ERR:  begin done <= 1'b1; err <= 1'b1; out_len <= '0; st <= S_IDLE; end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
