// hs_control -- command sequencer ("control signals") of HeapSafe.
//
// Two states. In IDLE the coprocessor is ready for a RoCC command
// (cmd_ready = 1) unless a response is still waiting in the response
// interface. When a command is accepted (cmd_valid && cmd_ready) the engine
// captures it (cmd_load) together with its decoded operation, and the
// sequencer moves to EXEC. EXEC lasts exactly one cycle and raises one
// strobe according to the operation:
//   hs_store    -> mt_write       (metadata table write)
//   hs_validate -> mt_read, ve_en (table search and bounds check)
//   hs_free     -> mt_invalidate  (clear the valid bit)
// plus resp_en when the instruction asks for a result (xd = 1, rd != 0),
// which loads the response register at the end of EXEC. An illegal command
// is consumed with no strobe and no response.
// Timing: a command accepted at clock edge k has its table update done and
// its response (if any) valid after edge k+1; the next command can be
// accepted at edge k+2. The published design only names the three control
// outputs (R/W, validation enable, response enable); the two-state sequence
// and the one-response-outstanding rule are this design's choices.
// Synchronous active-low reset.
module hs_control
  import hs_pkg::*;
(
  input  logic   clk_i,
  input  logic   rst_ni,
  // request handshake
  input  logic   cmd_valid,
  output logic   cmd_ready,
  input  hs_op_e cmd_op,
  input  logic   cmd_wants_resp,
  output logic   cmd_load,
  // response interface state
  input  logic   resp_pending,
  // strobes
  output logic   mt_write,
  output logic   mt_read,
  output logic   mt_invalidate,
  output logic   ve_en,
  output logic   resp_en,
  output logic   illegal,
  output logic   busy
);

  typedef enum logic {S_IDLE, S_EXEC} state_e;

  state_e state_q;
  hs_op_e op_q;
  logic   wants_q;

  assign cmd_ready = (state_q == S_IDLE) && !resp_pending;
  assign cmd_load  = cmd_valid && cmd_ready;

  always_ff @(posedge clk_i) begin
    if (!rst_ni) begin
      state_q <= S_IDLE;
      op_q    <= OP_NONE;
      wants_q <= 1'b0;
    end else begin
      unique case (state_q)
        S_IDLE: if (cmd_load) begin
          state_q <= S_EXEC;
          op_q    <= cmd_op;
          wants_q <= cmd_wants_resp;
        end
        S_EXEC: state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    logic exec;
    exec          = (state_q == S_EXEC);
    mt_write      = exec && (op_q == OP_STORE);
    mt_read       = exec && (op_q == OP_VALIDATE);
    mt_invalidate = exec && (op_q == OP_FREE);
    ve_en         = mt_read;
    resp_en       = exec && wants_q && (op_q != OP_NONE);
    illegal       = exec && (op_q == OP_NONE);
  end

  assign busy = (state_q != S_IDLE) || resp_pending;

  // Exactly one table operation per executed command.
  a_onehot: assert property (@(posedge clk_i) disable iff (!rst_ni)
                             $onehot0({mt_write, mt_read, mt_invalidate}));

endmodule
