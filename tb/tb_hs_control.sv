// tb_hs_control -- self-checking test of the command sequencer.
// Issues each operation with and without a requested response, and an
// illegal one; checks the strobes raised in the single EXEC cycle, the
// accept-to-accept spacing of two cycles, and that a pending response blocks
// the next command.
module tb_hs_control;
  import hs_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, wants, load, pend;
  hs_op_e op;
  logic w, r, inv, ve, re, ill, busy;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  hs_control dut (.clk_i(clk), .rst_ni(rst_n), .cmd_valid(cmd_valid), .cmd_ready(cmd_ready),
                  .cmd_op(op), .cmd_wants_resp(wants), .cmd_load(load), .resp_pending(pend),
                  .mt_write(w), .mt_read(r), .mt_invalidate(inv), .ve_en(ve), .resp_en(re),
                  .illegal(ill), .busy(busy));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic expect_strobes(input logic ew, er, ei, eve, ere, eill, input string what);
    checks++;
    if ({w, r, inv, ve, re, ill} !== {ew, er, ei, eve, ere, eill}) begin
      failures++;
      $display("FAIL %s strobes w r inv ve re ill = %b%b%b%b%b%b", what, w, r, inv, ve, re, ill);
    end
  endtask

  task automatic issue(input hs_op_e o, input logic want);
    // at negedge: present the command, it is accepted at the next posedge
    cmd_valid = 1; op = o; wants = want; #1;
    checks++;
    if (!cmd_ready || !load) begin failures++; $display("FAIL not ready for %s", o.name()); end
    expect_strobes(0, 0, 0, 0, 0, 0, "idle");
    @(negedge clk);
    cmd_valid = 0; op = OP_NONE;
    checks++;
    if (cmd_ready || !busy) begin failures++; $display("FAIL ready during EXEC"); end
    expect_strobes(o == OP_STORE, o == OP_VALIDATE, o == OP_FREE, o == OP_VALIDATE,
                   want && o != OP_NONE, o == OP_NONE, o.name());
    @(negedge clk);
    expect_strobes(0, 0, 0, 0, 0, 0, "after EXEC");
  endtask

  initial begin
    cmd_valid = 0; op = OP_NONE; wants = 0; pend = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int k = 0; k < 50; k++) begin
      issue(OP_STORE, 0);
      issue(OP_VALIDATE, 1);
      issue(OP_VALIDATE, 0);
      issue(OP_FREE, 0);
      issue(OP_NONE, 1);
      issue(OP_STORE, 1);
    end
    // A pending response holds off the next command.
    pend = 1; cmd_valid = 1; op = OP_STORE; wants = 0; #1;
    repeat (3) begin
      checks++;
      if (cmd_ready || load || !busy) begin failures++; $display("FAIL accepted while response pending"); end
      @(negedge clk);
    end
    expect_strobes(0, 0, 0, 0, 0, 0, "blocked");
    pend = 0; #1;
    checks++;
    if (!cmd_ready) begin failures++; $display("FAIL not ready after response left"); end
    @(negedge clk);
    cmd_valid = 0;
    expect_strobes(1, 0, 0, 0, 0, 0, "store after block");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
