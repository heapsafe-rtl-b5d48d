// tb_hs_validation_engine -- self-checking test of the bounds check.
// For random buffers it probes base-1, base, bound-1, bound and random
// addresses, and covers the tag-0 bypass, the miss (freed tag) case and en=0.
module tb_hs_validation_engine;
  import hs_tb_pkg::*;
  logic        en, tz, hit, oob;
  logic [63:0] ptr, base, bound, data;
  int checks = 0, failures = 0;

  hs_validation_engine dut (.en(en), .ptr(ptr), .tag_zero(tz), .hit(hit), .base(base),
                            .bound(bound), .is_oob(oob), .rd_data(data));

  task automatic check(input logic e, input logic z, input logic h, input logic [63:0] p,
                       input logic [63:0] lo, input logic [63:0] hi, input logic exp);
    en = e; tz = z; hit = h; ptr = p; base = lo; bound = hi; #1;
    checks++;
    if (oob !== exp || data != {63'd0, exp}) begin
      failures++; $display("FAIL en=%b tz=%b hit=%b p=%h [%h,%h) oob=%b exp=%b", e, z, h, p, lo, hi, oob, exp);
    end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [63:0] b, s, r;
    for (int i = 0; i < 500; i++) begin
      b = {32'h0, $urandom | 32'h1};
      s = 64'(urand_below(4096) + 1);
      check(1, 0, 1, b - 1,     b, b + s, 1);
      check(1, 0, 1, b,         b, b + s, 0);
      check(1, 0, 1, b + s - 1, b, b + s, 0);
      check(1, 0, 1, b + s,     b, b + s, 1);
      r = {32'h0, $urandom};
      check(1, 0, 1, r,         b, b + s, (r < b) || (r >= b + s));
      check(1, 1, 0, r,         b, b + s, 0);   // tag 0: not validated
      check(1, 0, 0, b,         b, b + s, 1);   // no valid row: freed / unknown tag
      check(0, 0, 1, b - 1,     b, b + s, 0);   // disabled
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
