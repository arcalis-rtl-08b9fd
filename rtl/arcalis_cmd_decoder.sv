// arcalis_cmd_decoder: Byte Selector and command Decoder.
//
// A claimed UC store carries a 64-bit command word: the upper 60 bits are a
// buffer address or a length and the lower 4 bits the opcode. A claimed UC
// load carries no data, so its opcode is taken from the low 4 bits of the
// physical address inside the command page. The byte selector picks the
// opcode from the right place; the decoder checks it against the six known
// commands and emits either a store command (towards the control FSM) or a
// load query (towards the forward unit). Unknown opcodes raise `illegal` for
// one cycle and are dropped.
//
// Timing: one registered stage; outputs are valid for one cycle, one cycle
// after in_valid.
//
// The 60/4 split and the command names are the paper's; opcode numbering and
// taking a load's opcode from the address are this design's reading of two
// statements in the paper (word format for stores, address bits for loads).
module arcalis_cmd_decoder
  import arcalis_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic        in_is_load,
  input  logic [3:0]  in_addr_lo,
  input  logic [63:0] in_word,
  output logic        cmd_valid,     // UC store command
  output logic        ld_valid,      // UC load query
  output cmd_t        cmd,
  output logic        illegal
);
  logic [3:0] sel_op;
  logic       known;

  // Byte selector
  assign sel_op = in_is_load ? in_addr_lo : in_word[3:0];

  // Decoder
  always_comb begin
    unique case (sel_op)
      CMD_SEND_NET_BUF, CMD_SEND_NET_LEN, CMD_APP_READY_FLAG,
      CMD_SEND_APP_RESP, CMD_SEND_APP_BUF, CMD_DPDK_NET_FLAG: known = 1'b1;
      default:                                               known = 1'b0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cmd_valid <= 1'b0;
      ld_valid  <= 1'b0;
      illegal   <= 1'b0;
      cmd       <= '0;
    end else begin
      cmd_valid   <= in_valid && known && !in_is_load;
      ld_valid    <= in_valid && known && in_is_load;
      illegal     <= in_valid && !known;
      cmd.is_load <= in_is_load;
      cmd.op      <= opcode_e'(sel_op);
      cmd.data    <= in_is_load ? '0 : in_word[63:4];
    end
  end
endmodule
