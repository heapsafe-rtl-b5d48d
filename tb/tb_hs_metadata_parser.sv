// tb_hs_metadata_parser -- self-checking test of the safe_pointer parser.
// Default instance (64-bit, 256-row table: tag = bits 63:56) and a 16-row
// instance (tag = bits 63:60); random and corner pointers.
module tb_hs_metadata_parser;
  logic [63:0] p;
  logic [7:0]  tag8;  logic [63:0] raw8;  logic z8;
  logic [3:0]  tag4;  logic [63:0] raw4;  logic z4;
  int checks = 0, failures = 0;

  hs_metadata_parser dut8 (.safe_ptr(p), .tag(tag8), .raw_ptr(raw8), .tag_zero(z8));
  hs_metadata_parser #(.XLEN(64), .MT_SIZE(16)) dut4 (.safe_ptr(p), .tag(tag4), .raw_ptr(raw4), .tag_zero(z4));

  task automatic check(input logic [63:0] v);
    p = v; #1;
    checks++;
    if (tag8 != v[63:56] || raw8 != (v & 64'h00FF_FFFF_FFFF_FFFF) || z8 != (v[63:56] == 0) ||
        tag4 != v[63:60] || raw4 != (v & 64'h0FFF_FFFF_FFFF_FFFF) || z4 != (v[63:60] == 0)) begin
      failures++; $display("FAIL p=%h tag8=%h raw8=%h tag4=%h raw4=%h", v, tag8, raw8, tag4, raw4);
    end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    check(64'h0);
    check('1);
    check(64'h0100_0000_8000_1000);
    check(64'hFF00_0000_0000_0000);
    check(64'h00FF_FFFF_FFFF_FFFF);
    for (int i = 0; i < 2000; i++) check({$urandom, $urandom});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
