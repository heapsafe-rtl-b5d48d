// hs_metadata_parser -- splits a HeapSafe safe_pointer into tag and address.
//
// A safe_pointer carries a buffer tag in its most significant bits and the
// ordinary address (raw_pointer) in the rest. The tag is TAG_W = log2(MT_SIZE)
// bits wide, so with the 256-row metadata table the tag is bits [63:56] and
// the raw_pointer bits [55:0]. Both follow the published bit allocation.
// raw_ptr is returned zero-extended to XLEN, so base and bound addresses in
// the metadata table are full-width values. Combinational, no state.
module hs_metadata_parser #(
  parameter int unsigned XLEN    = 64,
  parameter int unsigned MT_SIZE = 256,
  localparam int unsigned TAG_W  = $clog2(MT_SIZE)
) (
  input  logic [XLEN-1:0]  safe_ptr,
  output logic [TAG_W-1:0] tag,
  output logic [XLEN-1:0]  raw_ptr,
  output logic             tag_zero
);

  assign tag      = safe_ptr[XLEN-1 -: TAG_W];
  assign raw_ptr  = {{TAG_W{1'b0}}, safe_ptr[XLEN-TAG_W-1:0]};
  assign tag_zero = (tag == '0);

endmodule
