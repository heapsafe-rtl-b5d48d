// tb_heapsafe_tile_full -- the HeapSafe tile at its default configuration
// (one engine, 256-row metadata table, 8-bit tags in bits 63:56), driven with
// the instruction streams a protected program produces.
//  1. String upper-casing into a protected heap buffer: safe_malloc of an
//     LEN-byte buffer (hs_store), then one hs_validate per character written
//     through a pointer advanced by one byte each step. Copying a string
//     longer than the buffer must be flagged at exactly the first byte past
//     the end, and nowhere before.
//  2. Heap buffer copies: NBUF buffers allocated, each filled by a copy loop
//     validated element by element, then freed; a dangling pointer used after
//     the free must be flagged.
//  3. Capacity: all 255 non-zero tags allocated plus one more row (256 rows),
//     then a further store is dropped and flagged; every row is checked.
// The cycles spent per blocking validation are measured and reported.
module tb_heapsafe_tile_full;
  import hs_tb_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, resp_valid, resp_ready, busy, bad_hart;
  logic [31:0] inst, cmd_hart, resp_hart;
  logic [63:0] rs1, rs2, resp_data;
  logic [4:0]  resp_rd;
  logic [0:0]  illegal, tag_error, mt_full, dropped;
  int checks = 0, failures = 0, n_val = 0, val_cycles = 0, n_drop = 0;
  hs_model m;

  always #5 clk = ~clk;
  always @(posedge clk) if (dropped[0]) n_drop++;

  heapsafe_tile dut (
    .clk_i(clk), .rst_ni(rst_n), .cmd_valid(cmd_valid), .cmd_ready(cmd_ready), .cmd_inst(inst),
    .cmd_rs1(rs1), .cmd_rs2(rs2), .cmd_hart(cmd_hart), .resp_valid(resp_valid),
    .resp_ready(resp_ready), .resp_rd(resp_rd), .resp_data(resp_data), .resp_hart(resp_hart),
    .busy(busy), .bad_hart(bad_hart), .illegal(illegal), .tag_error(tag_error), .mt_full(mt_full),
    .store_dropped(dropped));

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic issue(input logic [31:0] i, input logic [63:0] a, input logic [63:0] s);
    cmd_valid = 1; inst = i; rs1 = a; rs2 = s;
    do @(posedge clk); while (!cmd_ready);
    #1 cmd_valid = 0;
  endtask

  // Blocking validation as the library performs it; returns isOOB.
  task automatic validate(input logic [63:0] p, output logic [63:0] oob);
    int n = 0;
    resp_ready = 1;
    issue(inst_validate(5'd12), p, 0);
    while (!resp_valid && n < 20) begin @(posedge clk); #1; n++; end
    oob = resp_data;
    checks++;
    if (!resp_valid || resp_rd != 5'd12 || resp_data != m.validate(p)) begin
      failures++; $display("FAIL validate %h got %0d exp %0d", p, resp_data, m.validate(p));
    end
    @(posedge clk); #1;
    n_val++; val_cycles += n + 2;
  endtask

  initial begin
    logic [63:0] upper, q, oob;
    logic [63:0] bufs[$];
    int first_oob, exp_drop;
    m = new(256);
    exp_drop = 0;
    cmd_valid = 0; resp_ready = 1; inst = 0; rs1 = 0; rs2 = 0; cmd_hart = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    // ---- 1. upper-casing, LEN = 32, source strings of 20 and 45 chars ----
    for (int s = 0; s < 2; s++) begin
      int len_src;
      len_src = (s == 0) ? 20 : 45;
      upper = m.make_ptr(64'(s + 1), 64'h8000_2000 + 64'(s * 64));
      void'(m.store(upper, 64'd32));
      issue(inst_store(), upper, 64'd32);
      first_oob = -1;
      for (int c = 0; c < len_src; c++) begin
        validate(upper, oob);
        if (oob == 1 && first_oob < 0) first_oob = c;
        upper = upper + 1;          // pointer arithmetic keeps the tag
      end
      checks++;
      if (first_oob != ((len_src > 32) ? 32 : -1)) begin
        failures++; $display("FAIL overflow detected at %0d for length %0d", first_oob, len_src);
      end
    end

    // ---- 2. heap buffer copies ----
    for (int b = 0; b < 40; b++) begin
      q = m.make_ptr(64'(10 + b), 64'h9000_0000 + 64'(b * 1024));
      void'(m.store(q, 64'd64));
      issue(inst_store(), q, 64'd64);
      bufs.push_back(q);
    end
    foreach (bufs[b]) for (int e = 0; e < 64; e += 8) validate(bufs[b] + 64'(e), oob);
    foreach (bufs[b]) begin
      m.free(bufs[b]);
      issue(inst_free(), bufs[b], 0);
    end
    validate(bufs[3] + 8, oob);
    checks++;
    if (oob != 1) begin failures++; $display("FAIL use-after-free not flagged"); end

    // ---- 3. capacity ----
    for (int t = 1; t <= 255; t++) begin
      q = m.make_ptr(64'(t), 64'hA000_0000 + 64'(t * 128));
      exp_drop += m.store(q, 64'd100);
      issue(inst_store(), q, 64'd100);
    end
    // tags 1 and 2 of part 1 are still live, so the table fills during
    // this loop and its last store is dropped; the loop below tops up
    // the table if it is not yet full.
    while (m.used() < 256) begin
      q = m.make_ptr(64'd200, 64'hB000_0000);
      void'(m.store(q, 64'd4));
      issue(inst_store(), q, 64'd4);
    end
    @(posedge clk); #1;
    checks++;
    if (!mt_full[0]) begin failures++; $display("FAIL table not full"); end
    exp_drop += m.store(m.make_ptr(64'd9, 64'hC000_0000), 64'd4);
    issue(inst_store(), m.make_ptr(64'd9, 64'hC000_0000), 64'd4);
    @(posedge clk); #1;
    checks++;
    if (n_drop != exp_drop || exp_drop == 0) begin failures++; $display("FAIL drop count %0d exp %0d", n_drop, exp_drop); end
    for (int t = 1; t <= 255; t++) begin
      validate(m.make_ptr(64'(t), 64'hA000_0000 + 64'(t * 128)) + 99, oob);
    end
    checks++;
    if (val_cycles != 3 * n_val) begin
      failures++; $display("FAIL validation took %0d cycles for %0d", val_cycles, n_val);
    end
    $display("validations %0d, %0d cycles each (request to response taken)", n_val, val_cycles / n_val);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
