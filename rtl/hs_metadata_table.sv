// hs_metadata_table -- content-addressable bounds table of HeapSafe.
//
// MT_SIZE rows, each {V, Tag, Base, Bound}. Tag, Base and Bound are XLEN-bit
// fields as published; the tag is zero-extended into its field. Three
// operations, at most one per cycle in normal use:
//   write      (hs_store)    : the row goes to the lowest-index row with V=0,
//                              which then gets V=1. If no row is free the write
//                              is dropped and `wr_dropped` pulses.
//   read       (hs_validate) : every valid row compares its Tag with rd_tag in
//                              parallel; `hit` and the Base/Bound of the
//                              lowest-index match are returned combinationally
//                              in the same cycle.
//   invalidate (hs_free)     : V is cleared in every valid row whose Tag
//                              matches. Tag/Base/Bound stay as they were.
// Writes and invalidates take effect at the rising clock edge. rst_ni
// (synchronous, active low) clears all valid bits; data fields are not reset.
// The parallel search and the valid-bit scheme follow the published design;
// lowest-index choice, full handling and duplicate-tag handling are this
// design's own.
module hs_metadata_table #(
  parameter int unsigned XLEN    = 64,
  parameter int unsigned MT_SIZE = 256,
  localparam int unsigned TAG_W  = $clog2(MT_SIZE)
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  // hs_store
  input  logic             wr_en,
  input  logic [TAG_W-1:0] wr_tag,
  input  logic [XLEN-1:0]  wr_base,
  input  logic [XLEN-1:0]  wr_bound,
  output logic             wr_dropped,
  // hs_validate
  input  logic             rd_en,
  input  logic [TAG_W-1:0] rd_tag,
  output logic             hit,
  output logic [XLEN-1:0]  rd_base,
  output logic [XLEN-1:0]  rd_bound,
  // hs_free
  input  logic             inv_en,
  input  logic [TAG_W-1:0] inv_tag,
  // status
  output logic             full,
  output logic [$clog2(MT_SIZE+1)-1:0] used
);

  logic [MT_SIZE-1:0]  valid_q;
  logic [XLEN-1:0]     tag_q   [MT_SIZE];
  logic [XLEN-1:0]     base_q  [MT_SIZE];
  logic [XLEN-1:0]     bound_q [MT_SIZE];

  // Parallel compare of every row against the search and free tags.
  logic [MT_SIZE-1:0] rd_match, inv_match;
  always_comb begin
    for (int i = 0; i < MT_SIZE; i++) begin
      rd_match[i]  = rd_en && valid_q[i] && (tag_q[i] == XLEN'(rd_tag));
      inv_match[i] = valid_q[i] && (tag_q[i] == XLEN'(inv_tag));
    end
  end

  // Lowest-index match selects the row that is read out.
  always_comb begin
    hit      = 1'b0;
    rd_base  = '0;
    rd_bound = '0;
    for (int i = MT_SIZE - 1; i >= 0; i--) begin
      if (rd_match[i]) begin
        hit      = 1'b1;
        rd_base  = base_q[i];
        rd_bound = bound_q[i];
      end
    end
  end

  // Lowest-index free row receives the next write.
  logic [$clog2(MT_SIZE)-1:0] free_idx;
  always_comb begin
    free_idx = '0;
    for (int i = MT_SIZE - 1; i >= 0; i--) begin
      if (!valid_q[i]) free_idx = $clog2(MT_SIZE)'(i);
    end
  end

  assign full       = &valid_q;
  assign wr_dropped = wr_en && full;

  always_comb begin
    used = '0;
    for (int i = 0; i < MT_SIZE; i++) used += $clog2(MT_SIZE+1)'(valid_q[i]);
  end

  always_ff @(posedge clk_i) begin
    if (!rst_ni) begin
      valid_q <= '0;
    end else begin
      if (inv_en) valid_q <= valid_q & ~inv_match;
      if (wr_en && !full) valid_q[free_idx] <= 1'b1;
    end
  end

  always_ff @(posedge clk_i) begin
    if (wr_en && !full) begin
      tag_q[free_idx]   <= XLEN'(wr_tag);
      base_q[free_idx]  <= wr_base;
      bound_q[free_idx] <= wr_bound;
    end
  end

endmodule
