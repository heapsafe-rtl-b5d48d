// tb_heapsafe -- self-checking test of one HeapSafe engine at its default
// size (256-row table, 8-bit tags). A RoCC driver issues random hs_store /
// hs_validate / hs_free / illegal commands with random response back-
// pressure; every response is compared with the reference model, and the
// response latency (two clock edges from request handshake to resp_valid)
// and the command spacing are checked.
module tb_heapsafe;
  import hs_tb_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, resp_valid, resp_ready;
  logic [31:0] inst, hart;
  logic [63:0] rs1, rs2, resp_data;
  logic [4:0]  resp_rd;
  logic busy, illegal, tag_error, mt_full, dropped;
  int checks = 0, failures = 0, cycle = 0;
  int n_oob = 0, n_inb = 0, n_uaf = 0, n_tag0 = 0, n_ill = 0, n_stall = 0;
  hs_model m;

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  heapsafe dut (.clk_i(clk), .rst_ni(rst_n), .cmd_valid(cmd_valid), .cmd_ready(cmd_ready),
    .cmd_inst(inst), .cmd_rs1(rs1), .cmd_rs2(rs2), .resp_valid(resp_valid), .resp_ready(resp_ready),
    .resp_rd(resp_rd), .resp_data(resp_data), .hart_id(hart), .busy(busy), .illegal(illegal),
    .tag_error(tag_error), .mt_full(mt_full), .store_dropped(dropped));

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // Send one command; wait for and check its response if one is expected.
  task automatic send(input logic [31:0] i, input logic [63:0] a, input logic [63:0] s,
                      input bit want, input logic [63:0] exp);
    int t_acc;
    cmd_valid = 1; inst = i; rs1 = a; rs2 = s;
    do @(posedge clk); while (!cmd_ready);
    #1 cmd_valid = 0; inst = $urandom; rs1 = {$urandom, $urandom}; rs2 = {$urandom, $urandom};
    if (want) begin
      resp_ready = 0;
      t_acc = 0;   // clock edges after the accepting edge
      do begin @(posedge clk); #1; t_acc++; end while (!resp_valid && t_acc < 10);
      checks++;
      if (t_acc != 1) begin failures++; $display("FAIL latency %0d", t_acc); end
      // random back-pressure
      repeat ($urandom % 3) begin
        @(posedge clk); n_stall++;
        checks++;
        if (!resp_valid || cmd_ready) begin failures++; $display("FAIL stall hold"); end
      end
      #1 resp_ready = 1;
      checks++;
      if (!resp_valid || resp_rd != i[11:7] || resp_data != exp) begin
        failures++;
        $display("FAIL validate p=%h got v=%b rd=%0d d=%0d exp %0d", a, resp_valid, resp_rd, resp_data, exp);
      end
      @(posedge clk); #1 resp_ready = 0;
    end else begin
      @(posedge clk); #1;
      checks++;
      if (resp_valid) begin failures++; $display("FAIL unexpected response"); end
    end
  endtask

  initial begin
    logic [63:0] p, sz, raw, e;
    logic [63:0] live[$];
    m = new(256);
    cmd_valid = 0; resp_ready = 0; inst = 0; rs1 = 0; rs2 = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    checks++; if (hart != 0) begin failures++; $display("FAIL hart id"); end
    for (int k = 0; k < 4000; k++) begin
      case ($urandom % 6)
        0, 1: begin   // safe_malloc
          raw = {40'h0, 24'($urandom) & 24'hFFFFF0};
          sz  = 64'(urand_below(256) + 1);
          p   = m.make_ptr(64'(urand_below(255) + 1), raw);
          if (m.used() < 200) begin
            void'(m.store(p, sz));
            send(inst_store(), p, sz, 0, 0);
            live.push_back(p);
          end
        end
        2, 3: begin   // validate a live pointer at a random offset
          if (live.size() > 0) begin
            p = live[$urandom % live.size()];
            p = p + 64'($signed(($urandom % 600) - 100));
            e = m.validate(p);
            if (e == 1) n_oob++; else n_inb++;
            send(inst_validate(5'($urandom % 31 + 1)), p, 0, 1, e);
          end
        end
        4: begin      // free a live pointer, then validate through the dangling pointer
          if (live.size() > 0) begin
            int j;
            j = int'(urand_below(live.size()));
            p = live[j]; live.delete(j);
            m.free(p);
            send(inst_free(), p, 0, 0, 0);
            e = m.validate(p);
            if (e == 1) n_uaf++;
            send(inst_validate(), p, 0, 1, e);
          end
        end
        default: begin
          if (urand_below(2) == 1) begin // unprotected pointer (tag 0)
            n_tag0++;
            send(inst_validate(), {8'h0, 24'h0, $urandom}, 0, 1, 0);
          end else begin          // illegal funct7, with xd set: no response
            n_ill++;
            send({7'h55, 5'd0, 5'd10, 3'b110, 5'd12, 7'h0B}, 0, 0, 0, 0);
          end
        end
      endcase
    end
    checks++;
    if (n_oob == 0 || n_inb == 0 || n_uaf == 0 || n_tag0 == 0 || n_ill == 0 || n_stall == 0) begin
      failures++; $display("FAIL coverage oob=%0d inb=%0d uaf=%0d tag0=%0d ill=%0d stall=%0d",
                           n_oob, n_inb, n_uaf, n_tag0, n_ill, n_stall);
    end
    $display("coverage oob=%0d inb=%0d uaf=%0d tag0=%0d ill=%0d stall=%0d", n_oob, n_inb, n_uaf, n_tag0, n_ill, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
