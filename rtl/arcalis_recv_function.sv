// arcalis_recv_function: receive-side stub of one RPC method (recvFunctionN).
//
// Holds the method's argument schema, as an IDL compiler would emit it: for
// each struct slot the expected Thrift field id and type. Given a field just
// read off the wire it reports whether the field belongs to the struct and in
// which slot of the App. Recv object it is stored. Fields that do not match
// (unknown id, or a type that differs from the schema) are skipped, as Thrift
// stubs do. Combinational.
//
// One instance per method, parameterized by the method's schema, stands for
// the paper's per-service reconfigurable block; the schema contents are this
// design's.
module arcalis_recv_function
  import arcalis_pkg::*;
#(
  parameter schema_t SCHEMA = RECV_SCHEMAS[0]
) (
  input  logic [15:0] fid,
  input  logic [7:0]  ftype,
  output logic        hit,
  output logic [$clog2(MAX_FIELDS)-1:0] slot
);
  always_comb begin
    hit  = 1'b0;
    slot = '0;
    for (int k = MAX_FIELDS - 1; k >= 0; k--)
      if (SCHEMA[k].ttype != T_STOP && SCHEMA[k].fid == fid && SCHEMA[k].ttype == ftype) begin
        hit  = 1'b1;
        slot = ($clog2(MAX_FIELDS))'(k);
      end
  end
endmodule
