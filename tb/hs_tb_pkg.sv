// hs_tb_pkg -- testbench helpers for the HeapSafe coprocessor: builders for
// the three RoCC instructions and a behavioural reference model of one
// engine's metadata table and bounds check, written independently of the RTL
// (plain arrays searched in order).
package hs_tb_pkg;

  localparam logic [6:0] CUSTOM0 = 7'b0001011;

  // Uniform random number in 0 .. n-1.
  function automatic int unsigned urand_below(input int unsigned n);
    return $urandom % n;
  endfunction

  // HS_STORE: rs1 = safe_pointer, rs2 = size, xs1 = xs2 = 1, no result.
  function automatic logic [31:0] inst_store(input logic [4:0] rs1 = 5'd10, input logic [4:0] rs2 = 5'd11);
    return {7'b0000000, rs2, rs1, 1'b0, 1'b1, 1'b1, 5'd0, CUSTOM0};
  endfunction

  // HS_VALIDATE: rs1 = pointer, result in rd, xs1 = xd = 1.
  function automatic logic [31:0] inst_validate(input logic [4:0] rd = 5'd12, input logic [4:0] rs1 = 5'd10);
    return {7'b0000001, 5'd0, rs1, 1'b1, 1'b1, 1'b0, rd, CUSTOM0};
  endfunction

  // HS_FREE: rs1 = safe_pointer, xs1 = 1, no result.
  function automatic logic [31:0] inst_free(input logic [4:0] rs1 = 5'd10);
    return {7'b0000011, 5'd0, rs1, 1'b0, 1'b1, 1'b0, 5'd0, CUSTOM0};
  endfunction

  class hs_model;
    int          rows;
    int          tag_w;
    bit          v[];
    logic [63:0] t[], b[], u[];

    function new(int mt_size);
      rows  = mt_size;
      tag_w = $clog2(mt_size);
      v = new[rows]; t = new[rows]; b = new[rows]; u = new[rows];
      foreach (v[i]) v[i] = 0;
    endfunction

    function logic [63:0] tag_of(logic [63:0] p);
      return p >> (64 - tag_w);
    endfunction

    function logic [63:0] raw_of(logic [63:0] p);
      return (p << tag_w) >> tag_w;
    endfunction

    function logic [63:0] make_ptr(logic [63:0] tag, logic [63:0] raw);
      return (tag << (64 - tag_w)) | raw_of(raw);
    endfunction

    function int used();
      int c = 0;
      foreach (v[i]) c += v[i];
      return c;
    endfunction

    // returns 1 if the store was dropped (table full)
    function bit store(logic [63:0] p, logic [63:0] size);
      if (tag_of(p) == 0) return 0;
      foreach (v[i]) if (!v[i]) begin
        v[i] = 1; t[i] = tag_of(p); b[i] = raw_of(p); u[i] = raw_of(p) + size;
        return 0;
      end
      return 1;
    endfunction

    function void free(logic [63:0] p);
      if (tag_of(p) == 0) return;
      foreach (v[i]) if (v[i] && t[i] == tag_of(p)) v[i] = 0;
    endfunction

    function logic [63:0] validate(logic [63:0] p);
      logic [63:0] a;
      if (tag_of(p) == 0) return 0;
      a = raw_of(p);
      foreach (v[i]) if (v[i] && t[i] == tag_of(p)) return (a < b[i] || a >= u[i]) ? 64'd1 : 64'd0;
      return 1;
    endfunction
  endclass

endpackage
