// hs_resp_if -- RoCC response interface of the HeapSafe coprocessor.
//
// A one-entry output register for the response bundle {rd[4:0], data}.
// Pulsing `en` loads a response and raises resp_valid; it stays valid, with
// rd and data held stable, until the core takes it with resp_ready. `en` is
// only pulsed when the register is empty or being emptied in the same cycle
// (the control sequencer guarantees this; an assertion checks it). The
// signal names follow the RoCC response interface; the single-entry depth
// is this design's choice. Synchronous active-low reset empties it.
module hs_resp_if #(
  parameter int unsigned XLEN = 64
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic            en,
  input  logic [4:0]      rd_in,
  input  logic [XLEN-1:0] data_in,
  output logic            resp_valid,
  input  logic            resp_ready,
  output logic [4:0]      resp_rd,
  output logic [XLEN-1:0] resp_data
);

  always_ff @(posedge clk_i) begin
    if (!rst_ni) begin
      resp_valid <= 1'b0;
    end else if (en) begin
      resp_valid <= 1'b1;
    end else if (resp_ready) begin
      resp_valid <= 1'b0;
    end
  end

  always_ff @(posedge clk_i) begin
    if (!rst_ni) begin
      resp_rd   <= '0;
      resp_data <= '0;
    end else if (en) begin
      resp_rd   <= rd_in;
      resp_data <= data_in;
    end
  end

  // A held response must not be overwritten before the core has taken it.
  a_no_overwrite: assert property (@(posedge clk_i) disable iff (!rst_ni)
                                   en |-> (!resp_valid || resp_ready));
  // A response stays stable while it waits.
  a_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
                             (resp_valid && !resp_ready) |=> (resp_valid && $stable(resp_rd) && $stable(resp_data)));

endmodule
