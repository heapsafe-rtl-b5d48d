// tb_hs_cmd_decoder -- self-checking test of the RoCC command decoder.
// Drives the three HeapSafe instructions, every other funct7 under custom0,
// other opcodes and random words, and checks fields, function strobes,
// illegal and wants_resp against values computed here from the bit layout.
module tb_hs_cmd_decoder;
  import hs_pkg::*;

  logic [31:0] inst;
  rocc_inst_t  fields;
  hs_op_e      op;
  logic        st, va, fr, ill, wr;
  int checks = 0, failures = 0;

  hs_cmd_decoder dut (.inst(inst), .fields(fields), .op(op), .hs_store(st),
                      .hs_validate(va), .hs_free(fr), .illegal(ill), .wants_resp(wr));

  task automatic check(input logic [31:0] w);
    logic e_st, e_va, e_fr, e_wr;
    inst = w;
    #1;
    e_st = (w[6:0] == 7'h0B) && (w[31:25] == 7'd0);
    e_va = (w[6:0] == 7'h0B) && (w[31:25] == 7'd1);
    e_fr = (w[6:0] == 7'h0B) && (w[31:25] == 7'd3);
    e_wr = w[14] && (w[11:7] != 0);
    checks++;
    if (st !== e_st || va !== e_va || fr !== e_fr || ill !== !(e_st||e_va||e_fr) || wr !== e_wr ||
        fields.rd != w[11:7] || fields.rs1 != w[19:15] || fields.rs2 != w[24:20] ||
        fields.xd != w[14] || fields.xs1 != w[13] || fields.xs2 != w[12] ||
        fields.opcode != w[6:0] || fields.funct7 != w[31:25] ||
        op != (e_st ? OP_STORE : e_va ? OP_VALIDATE : e_fr ? OP_FREE : OP_NONE)) begin
      failures++;
      $display("FAIL inst=%h st=%b va=%b fr=%b ill=%b wr=%b", w, st, va, fr, ill, wr);
    end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    // HS_STORE x0 <- (a0=x10, a1=x11), xs1 xs2
    check({7'd0, 5'd11, 5'd10, 1'b0, 1'b1, 1'b1, 5'd0, 7'h0B});
    // HS_VALIDATE a2 <- a0, xs1 xd
    check({7'd1, 5'd0, 5'd10, 1'b1, 1'b1, 1'b0, 5'd12, 7'h0B});
    // HS_FREE a0, xs1
    check({7'd3, 5'd0, 5'd10, 1'b0, 1'b1, 1'b0, 5'd0, 7'h0B});
    for (int f = 0; f < 128; f++) check({7'(f), 5'd3, 5'd4, 3'b111, 5'd5, 7'h0B});
    for (int o = 0; o < 128; o++) check({7'd1, 5'd3, 5'd4, 3'b111, 5'd5, 7'(o)});
    for (int i = 0; i < 2000; i++) check($urandom);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
