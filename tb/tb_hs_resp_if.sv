// tb_hs_resp_if -- self-checking test of the one-entry response register.
// Loads responses, holds resp_ready low for random stretches (stall) and
// checks that each response appears one cycle after `en`, stays stable while
// stalled, and leaves after the cycle in which it is taken.
module tb_hs_resp_if;
  logic clk = 0, rst_n = 0;
  logic en, rv, rr;
  logic [4:0] rd_in, rd;
  logic [63:0] din, dout;
  int checks = 0, failures = 0, stalls = 0;

  always #5 clk = ~clk;

  hs_resp_if dut (.clk_i(clk), .rst_ni(rst_n), .en(en), .rd_in(rd_in), .data_in(din),
                  .resp_valid(rv), .resp_ready(rr), .resp_rd(rd), .resp_data(dout));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [4:0] erd; logic [63:0] ed; int wait_n;
    en = 0; rr = 0; rd_in = 0; din = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++; if (rv) begin failures++; $display("FAIL valid after reset"); end
    for (int i = 0; i < 300; i++) begin
      erd = 5'($urandom); ed = {$urandom, $urandom};
      en = 1; rd_in = erd; din = ed;
      @(negedge clk);
      en = 0; rd_in = ~erd; din = ~ed;
      wait_n = $urandom % 4;
      for (int w = 0; w < wait_n; w++) begin
        checks++;
        if (!rv || rd != erd || dout != ed) begin failures++; $display("FAIL hold %0d", i); end
        stalls++;
        @(negedge clk);
      end
      checks++;
      if (!rv || rd != erd || dout != ed) begin failures++; $display("FAIL resp %0d rv=%b rd=%0d", i, rv, rd); end
      rr = 1;
      @(negedge clk);
      rr = 0;
      checks++;
      if (rv) begin failures++; $display("FAIL not emptied %0d", i); end
    end
    checks++; if (stalls == 0) begin failures++; $display("FAIL no stall exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
