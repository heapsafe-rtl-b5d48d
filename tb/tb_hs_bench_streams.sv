// tb_hs_bench_streams -- replays, at the default configuration, the HeapSafe
// instruction streams of the benchmark kernels median, multiply, vvadd,
// rsort and qsort, and of a stack/heap buffer-copy sweep.
// There is no processor here: each kernel is reduced to what the coprocessor
// sees. Its arrays are allocated on the protected heap (one hs_store each),
// every element written to an output array is checked with a blocking
// hs_validate, and the arrays are freed (hs_free) at the end. Array sizes are
// those of the usual RISC-V benchmark data sets (median 400, multiply 100,
// vvadd 1000, rsort and qsort 2048 elements), and each output element is
// written once, which is a lower bound for the sorts. The copy sweep copies
// 64 buffers of 32 bytes, of which 0, 25, 50, 75 and 100 percent are heap
// buffers checked element by element. All results must be in bounds; a final
// write one element past each output array must be flagged. Cycles spent in
// the coprocessor per stream are printed.
module tb_hs_bench_streams;
  import hs_tb_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, resp_valid, resp_ready, busy, bad_hart;
  logic [31:0] inst, cmd_hart, resp_hart;
  logic [63:0] rs1, rs2, resp_data;
  logic [4:0]  resp_rd;
  logic [0:0]  illegal, tag_error, mt_full, dropped;
  int checks = 0, failures = 0;
  longint cyc = 0;
  hs_model m;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  heapsafe_tile dut (
    .clk_i(clk), .rst_ni(rst_n), .cmd_valid(cmd_valid), .cmd_ready(cmd_ready), .cmd_inst(inst),
    .cmd_rs1(rs1), .cmd_rs2(rs2), .cmd_hart(cmd_hart), .resp_valid(resp_valid),
    .resp_ready(resp_ready), .resp_rd(resp_rd), .resp_data(resp_data), .resp_hart(resp_hart),
    .busy(busy), .bad_hart(bad_hart), .illegal(illegal), .tag_error(tag_error), .mt_full(mt_full),
    .store_dropped(dropped));

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic issue(input logic [31:0] i, input logic [63:0] a, input logic [63:0] s);
    cmd_valid = 1; inst = i; rs1 = a; rs2 = s;
    do @(posedge clk); while (!cmd_ready);
    #1 cmd_valid = 0;
  endtask

  task automatic validate(input logic [63:0] p, input logic [63:0] exp);
    int n = 0;
    issue(inst_validate(5'd12), p, 0);
    while (!resp_valid && n < 20) begin @(posedge clk); #1; n++; end
    checks++;
    if (!resp_valid || resp_data != exp || m.validate(p) != exp) begin
      failures++; $display("FAIL validate %h got %0d exp %0d", p, resp_data, exp);
    end
    @(posedge clk); #1;
  endtask

  // One kernel: n_arr arrays of n elements of esz bytes; the last array is
  // the output, written element by element.
  task automatic kernel(input string name, input int n_arr, input int n, input int esz);
    logic [63:0] arr[$];
    longint c0 = cyc;
    for (int a = 0; a < n_arr; a++) begin
      logic [63:0] p;
      p = m.make_ptr(64'(a + 1), 64'h8000_0000 + 64'(a) * 64'h10_0000);
      void'(m.store(p, 64'(n * esz)));
      issue(inst_store(), p, 64'(n * esz));
      arr.push_back(p);
    end
    for (int i = 0; i < n; i++) validate(arr[n_arr - 1] + 64'(i * esz), 0);
    validate(arr[n_arr - 1] + 64'(n * esz), 1);   // one past the end
    foreach (arr[a]) begin m.free(arr[a]); issue(inst_free(), arr[a], 0); end
    while (busy) begin @(posedge clk); #1; end
    checks++;
    if (dut.g_engine[0].u_hs.u_mt.used != 0) begin failures++; $display("FAIL %s left rows", name); end
    $display("%-9s arrays=%0d elements=%0d coprocessor cycles=%0d", name, n_arr, n, cyc - c0);
  endtask

  initial begin
    m = new(256);
    cmd_valid = 0; resp_ready = 1; inst = 0; rs1 = 0; rs2 = 0; cmd_hart = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    kernel("median",   2,  400, 4);
    kernel("multiply", 3,  100, 4);
    kernel("vvadd",    3, 1000, 4);
    kernel("rsort",    2, 2048, 4);
    kernel("qsort",    1, 2048, 4);
    // stack/heap copy sweep
    for (int pct = 0; pct <= 100; pct += 25) begin
      longint c0;
      int nheap;
      c0 = cyc;
      nheap = 64 * pct / 100;
      for (int b = 0; b < nheap; b++) begin
        logic [63:0] p;
        p = m.make_ptr(64'(b + 1), 64'h9000_0000 + 64'(b * 64));
        void'(m.store(p, 64'd32));
        issue(inst_store(), p, 64'd32);
        for (int e = 0; e < 32; e += 8) validate(p + 64'(e), 0);
        m.free(p);
        issue(inst_free(), p, 0);
      end
      $display("copy sweep heap=%0d%% heap buffers=%0d coprocessor cycles=%0d", pct, nheap, cyc - c0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
