// hs_validation_engine -- bounds check for hs_validate.
//
// Given the raw address `ptr` of the pointer under test and the Base/Bound
// the metadata table returned for its tag, it computes
//     isOOB = (ptr < Base) || (ptr >= Bound)        (unsigned compare)
// i.e. Base is inclusive and Bound exclusive, as published. Two further
// cases complete the check: a pointer whose tag is 0 is an unprotected,
// ordinary pointer and is excluded from validation (isOOB = 0), and a
// non-zero tag with no valid row (never allocated, or already freed, the
// use-after-free case) is reported out of bounds (isOOB = 1).
// Combinational. With `en` low both outputs are 0. `rd_data` is isOOB
// zero-extended to XLEN bits, the value returned in the rd register.
module hs_validation_engine #(
  parameter int unsigned XLEN = 64
) (
  input  logic            en,
  input  logic [XLEN-1:0] ptr,
  input  logic            tag_zero,
  input  logic            hit,
  input  logic [XLEN-1:0] base,
  input  logic [XLEN-1:0] bound,
  output logic            is_oob,
  output logic [XLEN-1:0] rd_data
);

  always_comb begin
    if (!en || tag_zero) is_oob = 1'b0;
    else if (!hit)       is_oob = 1'b1;
    else                 is_oob = (ptr < base) || (ptr >= bound);
  end

  assign rd_data = XLEN'(is_oob);

endmodule
