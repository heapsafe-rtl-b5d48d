// tb_hs_bound_adder -- self-checking test of bound = raw_pointer + size,
// including carries across every 32-bit boundary and 64-bit wrap.
module tb_hs_bound_adder;
  logic [63:0] a, b, y;
  int checks = 0, failures = 0;

  hs_bound_adder dut (.raw_ptr(a), .size(b), .bound(y));

  task automatic check(input logic [63:0] x, input logic [63:0] s);
    logic [64:0] ref_sum;
    a = x; b = s; #1;
    ref_sum = {1'b0, x} + {1'b0, s};
    checks++;
    if (y != ref_sum[63:0]) begin failures++; $display("FAIL %h + %h = %h", x, s, y); end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    check(64'h0000_0000_8000_0000, 64'd64);
    check(64'h0000_0000_FFFF_FFFF, 64'd1);
    check('1, 64'd1);
    for (int i = 0; i < 2000; i++) check({8'h0, 24'($urandom), $urandom}, {32'h0, $urandom});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
