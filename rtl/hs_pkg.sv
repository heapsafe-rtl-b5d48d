// hs_pkg -- constants and types shared by the HeapSafe coprocessor.
//
// HeapSafe is a RoCC coprocessor that keeps bounds metadata for heap buffers
// and checks tagged pointers against it. This package holds what every block
// agrees on: the RoCC instruction layout (opcode[6:0], rd[11:7], xs2[12],
// xs1[13], xd[14], rs1[19:15], rs2[24:20], funct7[31:25]), the custom0 major
// opcode, and the three funct7 codes the coprocessor implements:
// hs_store = 7'b0000000, hs_validate = 7'b0000001, hs_free = 7'b0000011.
// These encodings follow the published instruction definitions. The one-hot
// function enum and the metadata row struct are this design's own choices.
package hs_pkg;

  // RISC-V custom0 major opcode used by all HeapSafe instructions.
  localparam logic [6:0] OPC_CUSTOM0 = 7'b0001011;

  // funct7 codes.
  localparam logic [6:0] F7_HS_STORE    = 7'b0000000;
  localparam logic [6:0] F7_HS_VALIDATE = 7'b0000001;
  localparam logic [6:0] F7_HS_FREE     = 7'b0000011;

  // RoCC instruction word, most significant field first.
  typedef struct packed {
    logic [6:0] funct7;
    logic [4:0] rs2;
    logic [4:0] rs1;
    logic       xd;
    logic       xs1;
    logic       xs2;
    logic [4:0] rd;
    logic [6:0] opcode;
  } rocc_inst_t;

  // Decoded operation carried from the decoder to the control sequencer.
  typedef enum logic [1:0] {
    OP_NONE     = 2'd0,
    OP_STORE    = 2'd1,
    OP_VALIDATE = 2'd2,
    OP_FREE     = 2'd3
  } hs_op_e;

endpackage
