// hs_cmd_decoder -- RoCC command decoder of the HeapSafe coprocessor.
//
// Purely combinational. It unpacks the 32-bit RoCC instruction into its
// fields and, for a custom0 instruction, turns funct7 into one of the three
// HeapSafe functions: hs_store (write metadata), hs_validate (bounds check,
// blocking) and hs_free (invalidate metadata). Any other opcode or funct7
// raises `illegal`, since the coprocessor is the party that must report
// illegal custom instructions; how the report is used is up to the tile.
// `wants_resp` is set when the core will wait for a result: xd = 1 and
// rd != 0. Field positions and codes follow the instruction format of the
// RoCC interface; the illegal flag and the op enum are this design's choice.
module hs_cmd_decoder
  import hs_pkg::*;
(
  input  logic [31:0] inst,
  output rocc_inst_t  fields,
  output hs_op_e      op,
  output logic        hs_store,
  output logic        hs_validate,
  output logic        hs_free,
  output logic        illegal,
  output logic        wants_resp
);

  assign fields = rocc_inst_t'(inst);

  always_comb begin
    hs_store    = 1'b0;
    hs_validate = 1'b0;
    hs_free     = 1'b0;
    if (fields.opcode == OPC_CUSTOM0) begin
      unique case (fields.funct7)
        F7_HS_STORE:    hs_store    = 1'b1;
        F7_HS_VALIDATE: hs_validate = 1'b1;
        F7_HS_FREE:     hs_free     = 1'b1;
        default: ;
      endcase
    end
  end

  assign illegal    = !(hs_store || hs_validate || hs_free);
  assign wants_resp = fields.xd && (fields.rd != 5'd0);

  always_comb begin
    if (hs_store)         op = OP_STORE;
    else if (hs_validate) op = OP_VALIDATE;
    else if (hs_free)     op = OP_FREE;
    else                  op = OP_NONE;
  end

endmodule
