// arcalis_pkg: types and constants shared by the near-cache RPC accelerator.
//
// Holds the 64-bit command word (60-bit data field above a 4-bit opcode),
// the six command opcodes, the five micro-engine states, the completion
// status word returned to uncacheable (UC) loads, the Thrift binary-protocol
// type codes the (de)serializers understand, and the compiled-in service
// description: the method-name table used by dispatch and header creation,
// and the per-method field schemas that the recvFunction / respFunction
// blocks implement.
//
// From the paper: the 60/4 split of the command word, the six command names,
// the five state names, 64-byte memory accesses, the 512 KiB 8-way engine
// cache, and the use of Thrift-generated stubs for Memcached and
// UniqueIdService. This design's own choices: the opcode numbering, the
// status-word encoding, the 48-bit address widths, the in-memory layout of
// deserialized objects, and the concrete method schemas below.
package arcalis_pkg;

  // ---------------------------------------------------------------------
  // Basic sizes
  // ---------------------------------------------------------------------
  localparam int unsigned LINE_BYTES = 64;               // 64B-wide loads/stores
  localparam int unsigned LINE_BITS  = LINE_BYTES * 8;
  localparam int unsigned VA_W       = 48;               // virtual address width
  localparam int unsigned PA_W       = 48;               // physical address width
  localparam int unsigned CMD_DATA_W = 60;               // command data field

  typedef logic [VA_W-1:0]      va_t;
  typedef logic [PA_W-1:0]      pa_t;
  typedef logic [LINE_BITS-1:0] line_t;

  // ---------------------------------------------------------------------
  // Command word: upper 60 bits carry a buffer address or a length, the
  // lower 4 bits the opcode.
  // ---------------------------------------------------------------------
  typedef enum logic [3:0] {
    CMD_NOP            = 4'd0,
    CMD_SEND_NET_BUF   = 4'd1,   // Net. Recv buffer address (NetCore)
    CMD_SEND_NET_LEN   = 4'd2,   // packet length, starts the receive path
    CMD_APP_READY_FLAG = 4'd3,   // App. Recv buffer address / app ready (AppCore)
    CMD_SEND_APP_RESP  = 4'd4,   // response length, starts the response path
    CMD_SEND_APP_BUF   = 4'd5,   // App. Resp buffer address
    CMD_DPDK_NET_FLAG  = 4'd6    // Net. Resp buffer address / network ready
  } opcode_e;

  typedef struct packed {
    logic [CMD_DATA_W-1:0] data;
    opcode_e               op;
  } cmd_word_t;

  // Decoded command handed from the decoder to the control FSM / forward unit.
  typedef struct packed {
    logic                  is_load;
    opcode_e               op;
    logic [CMD_DATA_W-1:0] data;
  } cmd_t;

  // ---------------------------------------------------------------------
  // Micro-engine states
  // ---------------------------------------------------------------------
  typedef enum logic [2:0] {
    ST_IDLE_RECV = 3'd0,
    ST_BUSY      = 3'd1,
    ST_DRAIN     = 3'd2,
    ST_DONE      = 3'd3,
    ST_IDLE_RESP = 3'd4
  } eng_state_e;

  // ---------------------------------------------------------------------
  // Completion status returned by a UC load.
  //   [63:62] kind, [61:48] error detail, [47:0] length or faulting VA
  // ---------------------------------------------------------------------
  typedef enum logic [1:0] {
    STAT_PENDING = 2'd0,
    STAT_READY   = 2'd1,
    STAT_FAULT   = 2'd2,   // translation fault: touch the page and retry
    STAT_PROTO   = 2'd3    // malformed or unknown RPC
  } stat_kind_e;

  typedef struct packed {
    stat_kind_e  kind;
    logic [13:0] detail;
    logic [47:0] value;
  } status_t;

  localparam int unsigned NUM_ENGINES = 2;
  localparam logic ENG_RX = 1'b0;
  localparam logic ENG_TX = 1'b1;

  // Address spaces: the NetCore process and the AppCore process.
  localparam logic ASID_NET = 1'b0;
  localparam logic ASID_APP = 1'b1;

  // Memory transfer descriptor issued by an engine (line granular).
  typedef struct packed {
    logic       is_write;
    logic       asid;
    va_t        va;        // 64-byte aligned
    logic [7:0] nlines;
  } xfer_t;

  // ---------------------------------------------------------------------
  // Thrift binary protocol
  // ---------------------------------------------------------------------
  localparam logic [7:0] T_STOP   = 8'd0;
  localparam logic [7:0] T_BOOL   = 8'd2;
  localparam logic [7:0] T_BYTE   = 8'd3;
  localparam logic [7:0] T_DOUBLE = 8'd4;
  localparam logic [7:0] T_I16    = 8'd6;
  localparam logic [7:0] T_I32    = 8'd8;
  localparam logic [7:0] T_I64    = 8'd10;
  localparam logic [7:0] T_STRING = 8'd11;

  localparam logic [7:0] MSG_CALL  = 8'd1;
  localparam logic [7:0] MSG_REPLY = 8'd2;

  // ---------------------------------------------------------------------
  // Deserialized-object layout in App. Recv / App. Resp (little endian):
  //   +0  func id (4B)   +4 seqid (4B)   +8 present-field mask (4B)
  //   +12 total bytes used (4B)
  //   +16 + 8*k  slot k: scalar value, or {len[63:32], offset[31:0]} for a
  //              string whose bytes sit at buffer+offset
  //   +DATA_OFF  string data area
  // ---------------------------------------------------------------------
  localparam int unsigned MAX_FIELDS = 8;
  localparam int unsigned SLOT_OFF   = 16;
  localparam int unsigned DATA_OFF   = SLOT_OFF + 8 * MAX_FIELDS;   // 80

  // ---------------------------------------------------------------------
  // Service description (the reconfigurable part).
  // ---------------------------------------------------------------------
  localparam int unsigned NAME_MAX  = 16;
  localparam int unsigned NUM_FUNCS = 3;
  localparam int unsigned FUNC_W    = 2;

  typedef logic [NAME_MAX*8-1:0] name_t;   // byte 0 in bits [7:0]

  typedef struct packed {
    logic [15:0] fid;
    logic [7:0]  ttype;
  } field_t;

  typedef field_t [MAX_FIELDS-1:0] schema_t;   // entry k maps to slot k

  function automatic name_t str2name(input string s);
    name_t n = '0;
    for (int i = 0; i < s.len() && i < NAME_MAX; i++) n[i*8 +: 8] = s[i];
    return n;
  endfunction

  function automatic schema_t mk_schema(input logic [15:0] f0, input logic [7:0] t0,
                                        input logic [15:0] f1, input logic [7:0] t1);
    schema_t s = '0;
    s[0] = '{fid: f0, ttype: t0};
    s[1] = '{fid: f1, ttype: t1};
    return s;
  endfunction

  typedef name_t   [NUM_FUNCS-1:0] name_tab_t;
  typedef schema_t [NUM_FUNCS-1:0] schema_tab_t;
  typedef logic [NUM_FUNCS-1:0][7:0] len_tab_t;

  // Method 0: set(1:string key, 2:string value) -> bool
  // Method 1: get(1:string key)                 -> string
  // Method 2: ComposeUniqueId(1:i64 req_id, 2:i32 post_type) -> i64
  localparam name_tab_t FUNC_NAMES = '{str2name("ComposeUniqueId"), str2name("get"),
                                       str2name("set")};
  localparam len_tab_t  FUNC_NAME_LENS = '{8'd15, 8'd3, 8'd3};

  // Argument structs (receive path). A type of T_STOP marks an unused slot.
  localparam schema_tab_t RECV_SCHEMAS = '{
    mk_schema(16'd1, T_I64,    16'd2, T_I32),
    mk_schema(16'd1, T_STRING, 16'd0, T_STOP),
    mk_schema(16'd1, T_STRING, 16'd2, T_STRING)
  };

  // Result structs (response path): field 0 is the "success" value.
  localparam schema_tab_t RESP_SCHEMAS = '{
    mk_schema(16'd0, T_I64,    16'd0, T_STOP),
    mk_schema(16'd0, T_STRING, 16'd0, T_STOP),
    mk_schema(16'd0, T_BOOL,   16'd0, T_STOP)
  };

  // Width in bytes of a scalar on the wire; 0 for strings and unknown types.
  function automatic logic [3:0] scalar_bytes(input logic [7:0] t);
    case (t)
      T_BOOL, T_BYTE:    return 4'd1;
      T_I16:             return 4'd2;
      T_I32:             return 4'd4;
      T_I64, T_DOUBLE:   return 4'd8;
      default:           return 4'd0;
    endcase
  endfunction

endpackage
