// arcalis_dispatch: method-name dispatch.
//
// Compares the method name parsed from an RPC header with the service's
// method table and returns the index of the matching recvFunction /
// respFunction pair. Purely combinational: one comparator per method, a
// priority encoder over the matches. Bytes beyond name_len are ignored.
//
// That dispatch selects the per-method block is the paper's; the name table
// itself (from arcalis_pkg) is this design's service description.
module arcalis_dispatch
  import arcalis_pkg::*;
#(
  parameter int unsigned N          = NUM_FUNCS,
  parameter name_tab_t   NAMES      = FUNC_NAMES,
  parameter len_tab_t    NAME_LENS  = FUNC_NAME_LENS
) (
  input  name_t             name,
  input  logic [7:0]        name_len,
  output logic              hit,
  output logic [FUNC_W-1:0] func_id
);
  logic [N-1:0] match;

  always_comb begin
    for (int f = 0; f < N; f++) begin
      match[f] = (name_len == NAME_LENS[f]);
      for (int b = 0; b < NAME_MAX; b++)
        if (b < int'(name_len) && name[b*8 +: 8] != NAMES[f][b*8 +: 8]) match[f] = 1'b0;
    end
    hit     = 1'b0;
    func_id = '0;
    for (int f = N - 1; f >= 0; f--)
      if (match[f]) begin
        hit     = 1'b1;
        func_id = FUNC_W'(f);
      end
  end
endmodule
