// hs_bound_adder -- precomputes the upper bound of a new heap buffer.
//
// On hs_store the coprocessor receives the buffer's base (raw_pointer) and
// its size in bytes. Rather than storing the size, it stores the exclusive
// upper bound, bound = raw_pointer + size, so that a later bounds check is
// two comparisons and no addition. Combinational; the sum wraps modulo
// 2^XLEN (wrap behaviour is this design's choice).
module hs_bound_adder #(
  parameter int unsigned XLEN = 64
) (
  input  logic [XLEN-1:0] raw_ptr,
  input  logic [XLEN-1:0] size,
  output logic [XLEN-1:0] bound
);

  assign bound = raw_ptr + size;

endmodule
