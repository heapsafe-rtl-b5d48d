// heapsafe_tile -- the HeapSafe side of a RoCC tile: N_ENGINES coprocessors,
// one per hardware thread.
//
// Each HeapSafe engine protects the heap of one process. Engine i is built
// with HART_ID = i, so a system running several harts gets one metadata
// table per hart. A RoCC command arrives with the id of the hart that issued
// it (cmd_hart) and is steered to that hart's engine; the request is ready
// when that engine is. A command for a hart with no engine is consumed at
// once and flagged on bad_hart. Responses of the engines are merged by a
// fixed-priority arbiter (lowest hart first) onto the single response port;
// resp_hart tells which engine answered. With the default N_ENGINES = 1 the
// tile is one engine with a pass-through router. The engine-per-hart scheme
// follows the published configuration (n engines, engine i tied to hart i);
// the steering by cmd_hart, the bad_hart flag and the arbiter are this
// design's choices. Timing is that of hs_control plus nothing: routing is
// combinational.
module heapsafe_tile #(
  parameter int unsigned N_ENGINES = 1,
  parameter int unsigned XLEN      = 64,
  parameter int unsigned MT_SIZE   = 256
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  // RoCC request from the core
  input  logic                 cmd_valid,
  output logic                 cmd_ready,
  input  logic [31:0]          cmd_inst,
  input  logic [XLEN-1:0]      cmd_rs1,
  input  logic [XLEN-1:0]      cmd_rs2,
  input  logic [31:0]          cmd_hart,
  // RoCC response to the core
  output logic                 resp_valid,
  input  logic                 resp_ready,
  output logic [4:0]           resp_rd,
  output logic [XLEN-1:0]      resp_data,
  output logic [31:0]          resp_hart,
  // status
  output logic                 busy,
  output logic                 bad_hart,
  output logic [N_ENGINES-1:0] illegal,
  output logic [N_ENGINES-1:0] tag_error,
  output logic [N_ENGINES-1:0] mt_full,
  output logic [N_ENGINES-1:0] store_dropped
);

  logic [N_ENGINES-1:0] e_cmd_valid, e_cmd_ready, e_resp_valid, e_resp_ready, e_busy;
  logic [4:0]           e_resp_rd   [N_ENGINES];
  logic [XLEN-1:0]      e_resp_data [N_ENGINES];
  logic [31:0]          e_hart_id   [N_ENGINES];

  logic hart_ok;
  assign hart_ok = (cmd_hart < 32'(N_ENGINES));

  // Request steering.
  always_comb begin
    e_cmd_valid = '0;
    cmd_ready   = 1'b1;            // commands for a missing engine are dropped
    for (int i = 0; i < N_ENGINES; i++) begin
      if (hart_ok && cmd_hart == e_hart_id[i]) begin
        e_cmd_valid[i] = cmd_valid;
        cmd_ready      = e_cmd_ready[i];
      end
    end
  end

  assign bad_hart = cmd_valid && !hart_ok;

  // Response arbitration, lowest hart first.
  always_comb begin
    resp_valid   = 1'b0;
    resp_rd      = '0;
    resp_data    = '0;
    resp_hart    = '0;
    e_resp_ready = '0;
    for (int i = N_ENGINES - 1; i >= 0; i--) begin
      if (e_resp_valid[i]) begin
        resp_valid   = 1'b1;
        resp_rd      = e_resp_rd[i];
        resp_data    = e_resp_data[i];
        resp_hart    = e_hart_id[i];
        e_resp_ready = '0;
        e_resp_ready[i] = resp_ready;
      end
    end
  end

  assign busy = |e_busy;

  for (genvar g = 0; g < N_ENGINES; g++) begin : g_engine
    heapsafe #(.XLEN(XLEN), .MT_SIZE(MT_SIZE), .HART_ID(g)) u_hs (
      .clk_i         (clk_i),
      .rst_ni        (rst_ni),
      .cmd_valid     (e_cmd_valid[g]),
      .cmd_ready     (e_cmd_ready[g]),
      .cmd_inst      (cmd_inst),
      .cmd_rs1       (cmd_rs1),
      .cmd_rs2       (cmd_rs2),
      .resp_valid    (e_resp_valid[g]),
      .resp_ready    (e_resp_ready[g]),
      .resp_rd       (e_resp_rd[g]),
      .resp_data     (e_resp_data[g]),
      .hart_id       (e_hart_id[g]),
      .busy          (e_busy[g]),
      .illegal       (illegal[g]),
      .tag_error     (tag_error[g]),
      .mt_full       (mt_full[g]),
      .store_dropped (store_dropped[g])
    );
  end

  // RoCC request rule: a valid request with its payload is held until taken.
  a_cmd_hold: assert property (@(posedge clk_i) disable iff (!rst_ni)
                               (cmd_valid && !cmd_ready) |=> cmd_valid);

endmodule
