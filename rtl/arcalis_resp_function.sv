// arcalis_resp_function: response-side stub of one RPC method (respFunctionN).
//
// Enumerates the fields of the method's result struct for the serializer:
// entry idx gives the Thrift field id and type and the App. Resp slot that
// holds its value. Unused entries (type STOP) are skipped so the serializer
// sees the used entries packed from index 0, with `last` on the final one.
// Combinational. Because the schema is a compile-time table, most output
// bits are constants: with the default result structs (one field, id 0, in
// slot 0) only valid, last and the type vary. That is the intended result of
// specialising the stub to its service.
//
// The per-method respFunction block is the paper's; its schema is this
// design's.
module arcalis_resp_function
  import arcalis_pkg::*;
#(
  parameter schema_t SCHEMA = RESP_SCHEMAS[0]
) (
  input  logic [$clog2(MAX_FIELDS)-1:0] idx,
  output logic        valid,
  output logic        last,
  output logic [15:0] fid,
  output logic [7:0]  ftype,
  output logic [$clog2(MAX_FIELDS)-1:0] slot
);
  localparam int unsigned SW = $clog2(MAX_FIELDS);
  int unsigned n_used;

  always_comb begin
    valid  = 1'b0;
    last   = 1'b0;
    fid    = '0;
    ftype  = T_STOP;
    slot   = '0;
    n_used = 0;
    for (int k = 0; k < MAX_FIELDS; k++)
      if (SCHEMA[k].ttype != T_STOP) begin
        if (n_used == int'(idx)) begin
          valid = 1'b1;
          fid   = SCHEMA[k].fid;
          ftype = SCHEMA[k].ttype;
          slot  = SW'(k);
        end
        n_used = n_used + 1;
      end
    last = valid && (int'(idx) == n_used - 1);
  end
endmodule
