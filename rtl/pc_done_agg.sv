// pc_done_agg -- completion aggregator: one done pulse once every unit has
// reported done for the current tick.
//
// Each bit of done_in is a one-cycle completion pulse from one unit (a
// neural core inside a layer, or a layer inside the network). Units finish
// at different cycles, so each pulse is latched in a per-unit flag. In the
// cycle in which every flag is set (counting pulses arriving in that same
// cycle), done_out is raised for exactly one cycle, starting on the next
// clock edge, and all flags are cleared, so the aggregator is ready for the
// next tick. clear (the tick's start pulse) also discards stale flags.
//
// Latching per-unit completion and emitting a one-shot pulse follows the
// source description of the layer and network modules; the one-cycle
// registered output and the clear input are this design's own choices.
module pc_done_agg #(
  parameter int unsigned WIDTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic [WIDTH-1:0] done_in,
  output logic             done_out
);

  logic [WIDTH-1:0] seen;
  logic             all_done;

  assign all_done = &(seen | done_in);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seen     <= '0;
      done_out <= 1'b0;
    end else begin
      done_out <= all_done && !clear;
      if (clear || all_done) seen <= '0;
      else                   seen <= seen | done_in;
    end
  end

  // done_out is a single-cycle pulse.
  assert property (@(posedge clk) disable iff (!rst_n) done_out |=> !done_out)
    else $error("done_out held for more than one cycle");

endmodule
