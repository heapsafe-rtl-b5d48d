// tb_heapsafe_tile -- end-to-end test of the HeapSafe tile with two engines
// (harts 0 and 1) and a 16-row table (4-bit tags), so that every mechanism
// can be reached quickly. Each hart runs its own protected-heap program
// against its own reference model: allocations (hs_store), in-bounds and
// out-of-bounds checks below the base and at/after the bound (hs_validate),
// frees and use-after-free checks (hs_free + hs_validate), unprotected tag-0
// pointers, tag-0 store/free errors, illegal instructions, a full table with
// a dropped store, a command for a hart with no engine, request stalls,
// response back-pressure and two engines holding responses at once
// (arbitration). Each mechanism is counted and one that never happened is a
// failure.
module tb_heapsafe_tile;
  import hs_tb_pkg::*;
  localparam int NE = 2, MT = 16;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, resp_valid, resp_ready, busy, bad_hart;
  logic [31:0] inst, cmd_hart, resp_hart;
  logic [63:0] rs1, rs2, resp_data;
  logic [4:0]  resp_rd;
  logic [NE-1:0] illegal, tag_error, mt_full, dropped;
  int checks = 0, failures = 0;
  hs_model m[NE];

  typedef enum int {M_STORE, M_INB, M_OOB_LOW, M_OOB_HIGH, M_UAF, M_TAG0, M_TAGERR, M_ILLEGAL,
                    M_FULL_DROP, M_BADHART, M_CMD_STALL, M_RESP_STALL, M_ARBITRATE, M_HART1, M_NUM} mech_e;
  int cnt[M_NUM];

  always #5 clk = ~clk;

  heapsafe_tile #(.N_ENGINES(NE), .XLEN(64), .MT_SIZE(MT)) dut (
    .clk_i(clk), .rst_ni(rst_n), .cmd_valid(cmd_valid), .cmd_ready(cmd_ready), .cmd_inst(inst),
    .cmd_rs1(rs1), .cmd_rs2(rs2), .cmd_hart(cmd_hart), .resp_valid(resp_valid),
    .resp_ready(resp_ready), .resp_rd(resp_rd), .resp_data(resp_data), .resp_hart(resp_hart),
    .busy(busy), .bad_hart(bad_hart), .illegal(illegal), .tag_error(tag_error), .mt_full(mt_full),
    .store_dropped(dropped));

  // Count status pulses as they happen.
  always @(posedge clk) if (rst_n) begin
    if (|illegal)   cnt[M_ILLEGAL]++;
    if (|tag_error) cnt[M_TAGERR]++;
    if (|dropped)   cnt[M_FULL_DROP]++;
    if (bad_hart)   cnt[M_BADHART]++;
    if (cmd_valid && !cmd_ready) cnt[M_CMD_STALL]++;
    if (resp_valid && !resp_ready) cnt[M_RESP_STALL]++;
    if (dut.e_resp_valid == '1) cnt[M_ARBITRATE]++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic issue(input int h, input logic [31:0] i, input logic [63:0] a, input logic [63:0] s);
    cmd_valid = 1; cmd_hart = h; inst = i; rs1 = a; rs2 = s;
    do @(posedge clk); while (!cmd_ready);
    #1 cmd_valid = 0; inst = 0;
    if (h == 1) cnt[M_HART1]++;
  endtask

  task automatic take_resp(input int h, input logic [4:0] rd, input logic [63:0] exp);
    int n = 0;
    while (!resp_valid && n < 20) begin @(posedge clk); #1; n++; end
    repeat ($urandom % 2) begin @(posedge clk); #1; end
    resp_ready = 1;
    checks++;
    if (!resp_valid || resp_hart != h || resp_rd != rd || resp_data != exp) begin
      failures++;
      $display("FAIL resp hart %0d/%0d rd %0d/%0d data %0d/%0d v=%b", resp_hart, h, resp_rd, rd, resp_data, exp, resp_valid);
    end
    @(posedge clk); #1 resp_ready = 0;
  endtask

  task automatic validate(input int h, input logic [63:0] p);
    logic [63:0] e;
    logic [4:0] rd;
    e = m[h].validate(p);
    rd = 5'($urandom % 31 + 1);
    issue(h, inst_validate(rd), p, 0);
    take_resp(h, rd, e);
  endtask

  initial begin
    logic [63:0] p[NE][$];
    logic [63:0] ps[NE][$];
    logic [63:0] q, raw, sz;
    for (int h = 0; h < NE; h++) m[h] = new(MT);
    foreach (cnt[i]) cnt[i] = 0;
    cmd_valid = 0; resp_ready = 0; inst = 0; rs1 = 0; rs2 = 0; cmd_hart = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    for (int round = 0; round < 30; round++) begin
      for (int h = 0; h < NE; h++) begin
        // allocate five buffers of 16..79 bytes
        for (int k = 0; k < 5; k++) begin
          raw = 64'h1000_0000 + 64'(h) * 64'h100_0000 + 64'(round * 4096 + k * 256);
          q   = m[h].make_ptr(64'(urand_below(MT - 1) + 1), raw);
          sz  = 64'(16 + urand_below(64));
          void'(m[h].store(q, sz));
          issue(h, inst_store(), q, sz);
          cnt[M_STORE]++;
          p[h].push_back(q);
          ps[h].push_back(sz);
        end
        // bounds checks on every live pointer: first byte, last byte,
        // one below the base, one at the bound
        foreach (p[h][j]) begin
          q = p[h][j]; sz = ps[h][j];
          if (m[h].validate(q) == 0) cnt[M_INB]++;
          validate(h, q);
          validate(h, q + sz - 1);
          if (m[h].validate(q - 1) == 1) cnt[M_OOB_LOW]++;
          validate(h, q - 1);
          if (m[h].validate(q + sz) == 1) cnt[M_OOB_HIGH]++;
          validate(h, q + sz);
        end
        // free two and use the dangling pointers
        repeat (2) if (p[h].size() > 0) begin
          q = p[h].pop_front(); void'(ps[h].pop_front());
          m[h].free(q);
          issue(h, inst_free(), q, 0);
          if (m[h].validate(q) == 1) cnt[M_UAF]++;
          validate(h, q + 4);
        end
        // unprotected pointer and a tag-0 store
        cnt[M_TAG0]++;
        validate(h, 64'h0000_0000_2000_0040);
        issue(h, inst_store(), 64'h0000_0000_2000_0040, 64'd32);
        // illegal instruction
        issue(h, {7'h7F, 5'd1, 5'd2, 3'b011, 5'd0, 7'h0B}, 0, 0);
      end
      // command for a hart with no engine
      issue(NE + 3, inst_store(), 64'hF000_0000_0000_1000, 64'd8);
      // two engines holding responses at once: hart 0 answers, is not taken,
      // then hart 1 is asked; both wait and the arbiter returns hart 0 first.
      if (p[0].size() > 0 && p[1].size() > 0) begin
        logic [63:0] e0, e1;
        e0 = m[0].validate(p[0][0]);
        e1 = m[1].validate(p[1][0] + 64'd100);
        issue(0, inst_validate(5'd5), p[0][0], 0);
        issue(1, inst_validate(5'd6), p[1][0] + 64'd100, 0);
        repeat (2) @(posedge clk);
        #1;
        take_resp(0, 5'd5, e0);
        take_resp(1, 5'd6, e1);
      end
    end
    // after many stores the tables have filled; check full flags and model
    for (int h = 0; h < NE; h++) begin
      checks++;
      if (mt_full[h] != (m[h].used() == MT)) begin failures++; $display("FAIL full flag hart %0d", h); end
    end
    for (int i = 0; i < M_NUM; i++) begin
      checks++;
      if (cnt[i] == 0) begin failures++; $display("FAIL mechanism %s never happened", mech_e'(i)); end
    end
    for (int i = 0; i < M_NUM; i++) $display("mechanism %-13s %0d", mech_e'(i), cnt[i]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
