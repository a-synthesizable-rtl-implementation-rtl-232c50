// pc_tick_ctrl -- turns tick requests into start pulses for the network.
//
// start_tick is a request from outside the network (a pulse, or held high
// for back-to-back ticks). The request is remembered in a pending flag
// until the network is idle; then start is raised for one cycle and the
// controller counts the network as busy until net_done, the network-level
// completion pulse, arrives. A request made while a tick is running is
// therefore deferred, never lost, and never overlaps the running tick. A
// request arriving in the same cycle as net_done starts the next tick one
// cycle later.
//
// Converting a global request into an internal start pulse once the
// network is idle follows the source description; the pending flag, the
// one-cycle registered start and the busy output are this design's own.
module pc_tick_ctrl (
  input  logic clk,
  input  logic rst_n,
  input  logic start_tick,
  input  logic net_done,
  output logic start,
  output logic busy
);

  logic pending;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending <= 1'b0;
      busy    <= 1'b0;
      start   <= 1'b0;
    end else begin
      start <= 1'b0;
      if (!busy && (pending || start_tick)) begin
        start   <= 1'b1;
        busy    <= 1'b1;
        pending <= 1'b0;
      end else begin
        if (start_tick) pending <= 1'b1;
        if (net_done)   busy    <= 1'b0;
      end
    end
  end

  // The network only reports completion of a tick it was started on.
  assert property (@(posedge clk) disable iff (!rst_n) net_done |-> busy)
    else $error("net_done while idle");

endmodule
