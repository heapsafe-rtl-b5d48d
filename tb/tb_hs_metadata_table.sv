// tb_hs_metadata_table -- self-checking test of the metadata CAM at its
// default size (256 rows). A behavioural reference (arrays searched
// sequentially) is kept alongside. Random store / free / search traffic,
// then filling the table to full, a dropped write, and re-use of freed rows.
module tb_hs_metadata_table;
  localparam int N = 256;
  logic clk = 0, rst_n = 0;
  logic wr_en, rd_en, inv_en, dropped, hit, full;
  logic [7:0] wr_tag, rd_tag, inv_tag;
  logic [63:0] wr_base, wr_bound, rd_base, rd_bound;
  logic [8:0] used;
  int checks = 0, failures = 0, drops = 0;

  // reference model
  logic        m_v [N];
  logic [7:0]  m_t [N];
  logic [63:0] m_b [N], m_u [N];

  always #5 clk = ~clk;

  hs_metadata_table dut (.clk_i(clk), .rst_ni(rst_n), .wr_en(wr_en), .wr_tag(wr_tag),
    .wr_base(wr_base), .wr_bound(wr_bound), .wr_dropped(dropped), .rd_en(rd_en), .rd_tag(rd_tag),
    .hit(hit), .rd_base(rd_base), .rd_bound(rd_bound), .inv_en(inv_en), .inv_tag(inv_tag),
    .full(full), .used(used));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic int ref_count();
    int c = 0;
    for (int i = 0; i < N; i++) c += m_v[i];
    return c;
  endfunction

  task automatic do_write(input logic [7:0] t, input logic [63:0] b, input logic [63:0] u);
    int slot = -1;
    wr_en = 1; wr_tag = t; wr_base = b; wr_bound = u;
    for (int i = 0; i < N; i++) if (!m_v[i] && slot < 0) slot = i;
    #1;
    checks++;
    if (dropped != (slot < 0) || full != (slot < 0)) begin failures++; $display("FAIL drop/full"); end
    if (slot < 0) drops++;
    @(negedge clk);
    wr_en = 0;
    if (slot >= 0) begin m_v[slot] = 1; m_t[slot] = t; m_b[slot] = b; m_u[slot] = u; end
  endtask

  task automatic do_free(input logic [7:0] t);
    inv_en = 1; inv_tag = t;
    @(negedge clk);
    inv_en = 0;
    for (int i = 0; i < N; i++) if (m_v[i] && m_t[i] == t) m_v[i] = 0;
  endtask

  task automatic do_search(input logic [7:0] t);
    int slot = -1;
    rd_en = 1; rd_tag = t; #1;
    for (int i = 0; i < N; i++) if (m_v[i] && m_t[i] == t && slot < 0) slot = i;
    checks++;
    if (hit != (slot >= 0) || (slot >= 0 && (rd_base != m_b[slot] || rd_bound != m_u[slot]))) begin
      failures++; $display("FAIL search tag=%0d hit=%b exp_slot=%0d", t, hit, slot);
    end
    checks++;
    if (used != 9'(ref_count())) begin failures++; $display("FAIL used=%0d ref=%0d", used, ref_count()); end
    rd_en = 0; #1;
    checks++;
    if (hit) begin failures++; $display("FAIL hit with rd_en low"); end
    @(negedge clk);
  endtask

  initial begin
    logic [7:0] t;
    wr_en = 0; rd_en = 0; inv_en = 0; wr_tag = 0; rd_tag = 0; inv_tag = 0; wr_base = 0; wr_bound = 0;
    for (int i = 0; i < N; i++) begin m_v[i] = 0; m_t[i] = 0; m_b[i] = 0; m_u[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int k = 0; k < 3000; k++) begin
      t = 8'($urandom % 40);
      case ($urandom % 3)
        0: do_write(t, {32'h0, $urandom}, {32'h1, $urandom});
        1: do_free(t);
        default: ;
      endcase
      do_search(8'($urandom % 40));
    end
    // Fill to full with distinct tags, then one more write is dropped.
    for (int i = 0; i < N; i++) do_free(8'(i));
    for (int i = 0; i < N; i++) do_write(8'(i), 64'(i * 64), 64'(i * 64 + 32));
    checks++; if (!full) begin failures++; $display("FAIL not full"); end
    do_write(8'd7, 64'h1234, 64'h2000);
    for (int i = 0; i < N; i++) do_search(8'(i));
    // Free a middle row and reuse it.
    do_free(8'd100);
    do_search(8'd100);
    do_write(8'd100, 64'hABC0, 64'hAC00);
    do_search(8'd100);
    checks++; if (drops == 0) begin failures++; $display("FAIL no dropped write"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
