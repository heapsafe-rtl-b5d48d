// heapsafe -- one HeapSafe RoCC coprocessor (heap bounds and use-after-free
// checker).
//
// Software tags every protected heap pointer with a buffer tag in its top
// TAG_W = log2(MT_SIZE) bits (a "safe_pointer"). Three custom0 instructions
// drive this engine over the RoCC request interface:
//   hs_store    rs1 = safe_pointer, rs2 = size : record {tag, base, base+size}
//   hs_validate rs1 = safe_pointer, rd         : return 1 if out of bounds
//   hs_free     rs1 = safe_pointer             : invalidate the tag's row
// Structure, as in the published block diagram: command decoder ->
// control sequencer; rs1 -> metadata parser (tag, raw_pointer);
// raw_pointer + rs2 -> bound adder; {tag, raw_pointer, bound} -> metadata
// table (CAM); table {base, bound} -> validation engine -> rd data ->
// response interface.
// The accepted command is held in a command register for its one EXEC cycle
// (see hs_control for the timing: response valid two edges after the
// request handshake). hs_store and hs_free with tag 0 are ignored and pulse
// tag_error (tag 0 marks an unprotected pointer); hs_validate with tag 0
// returns 0. HART_ID is the hart this engine serves, reported on hart_id
// for the tile that steers commands. The status outputs (busy, illegal,
// tag_error, mt_full, store_dropped) are this design's additions.
module heapsafe
  import hs_pkg::*;
#(
  parameter int unsigned XLEN    = 64,
  parameter int unsigned MT_SIZE = 256,
  parameter int unsigned HART_ID = 0
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  // RoCC request
  input  logic            cmd_valid,
  output logic            cmd_ready,
  input  logic [31:0]     cmd_inst,
  input  logic [XLEN-1:0] cmd_rs1,
  input  logic [XLEN-1:0] cmd_rs2,
  // RoCC response
  output logic            resp_valid,
  input  logic            resp_ready,
  output logic [4:0]      resp_rd,
  output logic [XLEN-1:0] resp_data,
  // status
  output logic [31:0]     hart_id,
  output logic            busy,
  output logic            illegal,
  output logic            tag_error,
  output logic            mt_full,
  output logic            store_dropped
);

  localparam int unsigned TAG_W = $clog2(MT_SIZE);

  assign hart_id = 32'(HART_ID);

  // ---------------- command decode and sequencing ----------------
  rocc_inst_t dec_fields;
  hs_op_e     dec_op;
  logic       dec_store, dec_validate, dec_free, dec_illegal, dec_wants;

  hs_cmd_decoder u_dec (
    .inst        (cmd_inst),
    .fields      (dec_fields),
    .op          (dec_op),
    .hs_store    (dec_store),
    .hs_validate (dec_validate),
    .hs_free     (dec_free),
    .illegal     (dec_illegal),
    .wants_resp  (dec_wants)
  );

  logic cmd_load, mt_write, mt_read, mt_invalidate, ve_en, resp_en;

  hs_control u_ctrl (
    .clk_i          (clk_i),
    .rst_ni         (rst_ni),
    .cmd_valid      (cmd_valid),
    .cmd_ready      (cmd_ready),
    .cmd_op         (dec_op),
    .cmd_wants_resp (dec_wants),
    .cmd_load       (cmd_load),
    .resp_pending   (resp_valid),
    .mt_write       (mt_write),
    .mt_read        (mt_read),
    .mt_invalidate  (mt_invalidate),
    .ve_en          (ve_en),
    .resp_en        (resp_en),
    .illegal        (illegal),
    .busy           (busy)
  );

  // ---------------- command register ----------------
  logic [4:0]      rd_q;
  logic [XLEN-1:0] rs1_q, rs2_q;

  always_ff @(posedge clk_i) begin
    if (!rst_ni) begin
      rd_q  <= '0;
      rs1_q <= '0;
      rs2_q <= '0;
    end else if (cmd_load) begin
      rd_q  <= dec_fields.rd;
      rs1_q <= cmd_rs1;
      rs2_q <= cmd_rs2;
    end
  end

  // ---------------- datapath ----------------
  logic [TAG_W-1:0] tag;
  logic [XLEN-1:0]  raw_ptr, bound;
  logic             tag_zero;

  hs_metadata_parser #(.XLEN(XLEN), .MT_SIZE(MT_SIZE)) u_parser (
    .safe_ptr (rs1_q),
    .tag      (tag),
    .raw_ptr  (raw_ptr),
    .tag_zero (tag_zero)
  );

  hs_bound_adder #(.XLEN(XLEN)) u_adder (
    .raw_ptr (raw_ptr),
    .size    (rs2_q),
    .bound   (bound)
  );

  logic            hit;
  logic [XLEN-1:0] mt_base, mt_bound;
  logic [$clog2(MT_SIZE+1)-1:0] mt_used;

  hs_metadata_table #(.XLEN(XLEN), .MT_SIZE(MT_SIZE)) u_mt (
    .clk_i      (clk_i),
    .rst_ni     (rst_ni),
    .wr_en      (mt_write && !tag_zero),
    .wr_tag     (tag),
    .wr_base    (raw_ptr),
    .wr_bound   (bound),
    .wr_dropped (store_dropped),
    .rd_en      (mt_read),
    .rd_tag     (tag),
    .hit        (hit),
    .rd_base    (mt_base),
    .rd_bound   (mt_bound),
    .inv_en     (mt_invalidate && !tag_zero),
    .inv_tag    (tag),
    .full       (mt_full),
    .used       (mt_used)
  );

  assign tag_error = (mt_write || mt_invalidate) && tag_zero;

  logic            is_oob;
  logic [XLEN-1:0] ve_data;

  hs_validation_engine #(.XLEN(XLEN)) u_ve (
    .en       (ve_en),
    .ptr      (raw_ptr),
    .tag_zero (tag_zero),
    .hit      (hit),
    .base     (mt_base),
    .bound    (mt_bound),
    .is_oob   (is_oob),
    .rd_data  (ve_data)
  );

  // The decoder's one-hot strobes and its op code must agree.
  a_dec_consistent: assert property (@(posedge clk_i) disable iff (!rst_ni)
    cmd_valid |-> ($onehot0({dec_store, dec_validate, dec_free}) &&
                   (dec_illegal == (dec_op == OP_NONE)) &&
                   (dec_validate == (dec_op == OP_VALIDATE))));

  // A validation that finds the pointer out of bounds answers 1.
  a_oob_data: assert property (@(posedge clk_i) disable iff (!rst_ni)
    ve_en |-> (is_oob == ve_data[0]));

  hs_resp_if #(.XLEN(XLEN)) u_resp (
    .clk_i      (clk_i),
    .rst_ni     (rst_ni),
    .en         (resp_en),
    .rd_in      (rd_q),
    .data_in    (ve_data),
    .resp_valid (resp_valid),
    .resp_ready (resp_ready),
    .resp_rd    (resp_rd),
    .resp_data  (resp_data)
  );

endmodule
