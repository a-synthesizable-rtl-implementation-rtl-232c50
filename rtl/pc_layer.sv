// pc_layer -- one layer of neural cores with its hardwired neighbour links.
//
// The layer holds N_OWN cores (pc_neural_core). Every core receives the same
// raw states pre_x[0..N_IN-1] of the layer above, the shared rates and the
// broadcast start pulse, and its own clamp enable and observation. The back
// products arrive as the lower layer's back_out array, indexed
// back_in[k][i] = theta_ki * eps_k of lower neuron k for this layer's neuron
// i; core i is wired to column i (its N_BACK products). Each core's
// back_out row (one product per upper neuron j) leaves the layer in
// back_out[i][j]. There is no arbitration: every link is a point-to-point
// wire.
//
// A pc_done_agg collects the cores' done pulses and pulses done once when
// the slowest core has finished (all cores of a layer have the same fan-in,
// so they finish together). busy is high while any core runs.
//
// Weight port: w_wr_neuron selects the core written, w_rd_neuron the core
// read; the lane index is passed to that core.
//
// The layer composition follows the source description; the port layout is
// this design's own.
module pc_layer
  import pc_pkg::*;
#(
  parameter int unsigned N_OWN      = 4,
  parameter int unsigned N_IN       = 2,
  parameter int unsigned N_BACK     = 3,
  parameter act_e        ACT_IN     = ACT_LINEAR,
  parameter act_e        ACT_OWN    = ACT_RELU,
  parameter bit          CLAMP_HARD = 1'b1,
  localparam int unsigned NI_P = (N_IN   > 0) ? N_IN   : 1,
  localparam int unsigned NB_P = (N_BACK > 0) ? N_BACK : 1,
  localparam int unsigned IW   = $clog2(((N_IN > N_BACK) ? N_IN : N_BACK) + 2),
  localparam int unsigned NW   = (N_OWN > 1) ? $clog2(N_OWN) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  fp32_t         alpha,
  input  fp32_t         alpha_bias,
  input  fp32_t         gamma,
  input  logic          x_set_en [N_OWN],
  input  fp32_t         x_obs    [N_OWN],
  input  fp32_t         pre_x    [NI_P],
  input  fp32_t         back_in  [NB_P][N_OWN],
  input  logic          w_wr_en,
  input  logic [NW-1:0] w_wr_neuron,
  input  logic [IW-1:0] w_wr_idx,
  input  fp32_t         w_wr_data,
  input  logic [NW-1:0] w_rd_neuron,
  input  logic [IW-1:0] w_rd_idx,
  output fp32_t         w_rd_data,
  output fp32_t         x_out    [N_OWN],
  output fp32_t         x_state  [N_OWN],
  output fp32_t         eps_out  [N_OWN],
  output fp32_t         back_out [N_OWN][NI_P],
  output logic          busy,
  output logic          done
);

  logic [N_OWN-1:0] core_busy, core_done;
  fp32_t            rd_data [N_OWN];

  for (genvar i = 0; i < N_OWN; i++) begin : g_core
    fp32_t bin [NB_P];
    for (genvar k = 0; k < NB_P; k++) begin : g_bin
      assign bin[k] = back_in[k][i];
    end

    pc_neural_core #(
      .N_IN      (N_IN),
      .N_BACK    (N_BACK),
      .ACT_IN    (ACT_IN),
      .ACT_OWN   (ACT_OWN),
      .CLAMP_HARD(CLAMP_HARD)
    ) u_core (
      .clk       (clk),
      .rst_n     (rst_n),
      .start     (start),
      .alpha     (alpha),
      .alpha_bias(alpha_bias),
      .gamma     (gamma),
      .x_set_en  (x_set_en[i]),
      .x_obs     (x_obs[i]),
      .pre_x     (pre_x),
      .back_in   (bin),
      .w_wr_en   (w_wr_en && (int'(w_wr_neuron) == i)),
      .w_wr_idx  (w_wr_idx),
      .w_wr_data (w_wr_data),
      .w_rd_idx  (w_rd_idx),
      .w_rd_data (rd_data[i]),
      .x_out     (x_out[i]),
      .x_state   (x_state[i]),
      .eps_out   (eps_out[i]),
      .back_out  (back_out[i]),
      .busy      (core_busy[i]),
      .done      (core_done[i])
    );
  end

  assign w_rd_data = rd_data[(int'(w_rd_neuron) < N_OWN) ? w_rd_neuron : '0];
  assign busy      = |core_busy;

  pc_done_agg #(.WIDTH(N_OWN)) u_done (
    .clk     (clk),
    .rst_n   (rst_n),
    .clear   (start),
    .done_in (core_done),
    .done_out(done)
  );

endmodule
