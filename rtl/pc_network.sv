// pc_network -- a multi-layer predictive-coding network (top level).
//
// Layers are numbered from the bottom: layer 0 is the output layer and layer
// NUM_LAYERS-1 the input layer, which has no layer above it. Layer l predicts
// its own state from the states of layer l+1 (fan-in N = LAYER_SIZE[l+1]) and
// receives back products from layer l-1 (fan-in M = LAYER_SIZE[l-1]). The
// default is the 2 -> 4 -> 3 network with a ReLU hidden layer:
// LAYER_SIZE = '{3, 4, 2} (output, hidden, input) and linear input and
// output layers. LAYER_ACT[l] is the activation applied to layer l's state
// where the layer below consumes it, and whose derivative gates layer l's
// own bottom-up term.
//
// Tick protocol: a start_tick request is turned by pc_tick_ctrl into one
// start pulse once the network is idle; the pulse reaches every core of
// every layer in the same cycle. Each layer pulses done when all its cores
// have finished, a pc_done_agg over the layers pulses the network done, and
// that frees the tick controller for the next request. From start_tick on an
// idle network to done takes max_l(3*N_l + M_l + 4) + 4 cycles (request,
// core schedule, core, layer and network done registers); for the default
// network, 16 + 4 = 20 cycles, counting the cycle in which start_tick is
// raised as cycle 0 and the cycle in which done is high as the last.
//
// Boundary conditions: x_set_en[l][i] / x_obs[l][i] clamp neuron i of
// layer l for the next tick (sampled on the start pulse). Supervised
// learning clamps the input and output layers; inference clamps only the
// input layer and reads x_state of the output layer after a number of ticks.
// alpha = 0 makes a tick inference-only; alpha_bias is the bias lane's own
// learning rate (0 freezes the biases); gamma is the state step size. All
// three are shared by every core and must be stable while busy.
//
// Weight port: w_wr_en writes w_wr_data to lane w_wr_idx of neuron
// w_wr_neuron in layer w_wr_layer (lane N_l is the bias); w_rd_* reads one
// weight combinationally. Used to load initial weights and to inspect them.
//
// The layer structure, clamping, the start-on-idle rule and the two-level
// done aggregation follow the source description. The layer numbering
// follows its figures (layer 0 output, highest layer input). One shared set
// of rates, the weight port and the output of every state and error are this
// design's own choices.
module pc_network
  import pc_pkg::*;
#(
  parameter int unsigned NUM_LAYERS = 3,
  parameter int unsigned LAYER_SIZE [NUM_LAYERS] = '{3, 4, 2},
  parameter act_e        LAYER_ACT  [NUM_LAYERS] = '{ACT_LINEAR, ACT_RELU, ACT_LINEAR},
  parameter bit          CLAMP_HARD = 1'b1,
  localparam int unsigned MAX_N = max_size(LAYER_SIZE),
  localparam int unsigned LW    = (NUM_LAYERS > 1) ? $clog2(NUM_LAYERS) : 1,
  localparam int unsigned NW    = (MAX_N > 1) ? $clog2(MAX_N) : 1,
  localparam int unsigned IW    = $clog2(MAX_N + 2)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start_tick,
  input  fp32_t         alpha,
  input  fp32_t         alpha_bias,
  input  fp32_t         gamma,
  input  logic          x_set_en [NUM_LAYERS][MAX_N],
  input  fp32_t         x_obs    [NUM_LAYERS][MAX_N],
  input  logic          w_wr_en,
  input  logic [LW-1:0] w_wr_layer,
  input  logic [NW-1:0] w_wr_neuron,
  input  logic [IW-1:0] w_wr_idx,
  input  fp32_t         w_wr_data,
  input  logic [LW-1:0] w_rd_layer,
  input  logic [NW-1:0] w_rd_neuron,
  input  logic [IW-1:0] w_rd_idx,
  output fp32_t         w_rd_data,
  output fp32_t         x_state  [NUM_LAYERS][MAX_N],
  output fp32_t         eps      [NUM_LAYERS][MAX_N],
  output logic          busy,
  output logic          done
);

  function automatic int unsigned max_size(input int unsigned s [NUM_LAYERS]);
    int unsigned m = 1;
    for (int l = 0; l < NUM_LAYERS; l++) if (s[l] > m) m = s[l];
    return m;
  endfunction

  logic                  start;
  logic [NUM_LAYERS-1:0] layer_done, layer_busy;
  fp32_t                 rd_data  [NUM_LAYERS];
  fp32_t                 x_pub    [NUM_LAYERS][MAX_N];
  fp32_t                 back_all [NUM_LAYERS][MAX_N][MAX_N];

  for (genvar l = 0; l < NUM_LAYERS; l++) begin : g_layer
    localparam int unsigned NO   = LAYER_SIZE[l];
    localparam int unsigned NI   = (l < NUM_LAYERS - 1) ? LAYER_SIZE[(l < NUM_LAYERS - 1) ? l + 1 : l] : 0;
    localparam int unsigned NB   = (l > 0) ? LAYER_SIZE[(l > 0) ? l - 1 : 0] : 0;
    localparam int unsigned NI_P = (NI > 0) ? NI : 1;
    localparam int unsigned NB_P = (NB > 0) ? NB : 1;
    localparam int unsigned LIW  = $clog2(((NI > NB) ? NI : NB) + 2);
    localparam int unsigned LNW  = (NO > 1) ? $clog2(NO) : 1;
    localparam act_e        A_IN = (l < NUM_LAYERS - 1) ? LAYER_ACT[(l < NUM_LAYERS - 1) ? l + 1 : l] : ACT_LINEAR;

    logic  set_en [NO];
    fp32_t obs    [NO];
    fp32_t pre    [NI_P];
    fp32_t bin    [NB_P][NO];
    fp32_t xo     [NO];
    fp32_t xs     [NO];
    fp32_t eo     [NO];
    fp32_t bo     [NO][NI_P];   // unread in the input layer, which has no layer above

    for (genvar i = 0; i < NO; i++) begin : g_n
      assign set_en[i] = x_set_en[l][i];
      assign obs[i]    = x_obs[l][i];
    end

    // Raw states of the layer above (none for the input layer).
    for (genvar j = 0; j < NI_P; j++) begin : g_pre
      if (NI > 0) begin : g_link
        assign pre[j] = x_pub[(l < NUM_LAYERS - 1) ? l + 1 : l][j];
      end else begin : g_none
        assign pre[j] = FP_POS_ZERO;
      end
    end

    // Back products of the layer below (none for the output layer).
    for (genvar k = 0; k < NB_P; k++) begin : g_bk
      for (genvar i = 0; i < NO; i++) begin : g_bi
        if (NB > 0) begin : g_link
          assign bin[k][i] = back_all[(l > 0) ? l - 1 : 0][k][i];
        end else begin : g_none
          assign bin[k][i] = FP_POS_ZERO;
        end
      end
    end

    pc_layer #(
      .N_OWN     (NO),
      .N_IN      (NI),
      .N_BACK    (NB),
      .ACT_IN    (A_IN),
      .ACT_OWN   (LAYER_ACT[l]),
      .CLAMP_HARD(CLAMP_HARD)
    ) u_layer (
      .clk        (clk),
      .rst_n      (rst_n),
      .start      (start),
      .alpha      (alpha),
      .alpha_bias (alpha_bias),
      .gamma      (gamma),
      .x_set_en   (set_en),
      .x_obs      (obs),
      .pre_x      (pre),
      .back_in    (bin),
      .w_wr_en    (w_wr_en && (int'(w_wr_layer) == l)),
      .w_wr_neuron(LNW'(w_wr_neuron)),
      .w_wr_idx   (LIW'(w_wr_idx)),
      .w_wr_data  (w_wr_data),
      .w_rd_neuron(LNW'(w_rd_neuron)),
      .w_rd_idx   (LIW'(w_rd_idx)),
      .w_rd_data  (rd_data[l]),
      .x_out      (xo),
      .x_state    (xs),
      .eps_out    (eo),
      .back_out   (bo),
      .busy       (layer_busy[l]),
      .done       (layer_done[l])
    );

    // Flatten into network-wide arrays; unused slots read as zero.
    for (genvar i = 0; i < MAX_N; i++) begin : g_out
      if (i < NO) begin : g_used
        assign x_pub[l][i]   = xo[i];
        assign x_state[l][i] = xs[i];
        assign eps[l][i]     = eo[i];
        for (genvar j = 0; j < MAX_N; j++) begin : g_b
          if (j < NI) begin : g_used_b
            assign back_all[l][i][j] = bo[i][j];
          end else begin : g_pad_b
            assign back_all[l][i][j] = FP_POS_ZERO;
          end
        end
      end else begin : g_pad
        assign x_pub[l][i]   = FP_POS_ZERO;
        assign x_state[l][i] = FP_POS_ZERO;
        assign eps[l][i]     = FP_POS_ZERO;
        for (genvar j = 0; j < MAX_N; j++) begin : g_b
          assign back_all[l][i][j] = FP_POS_ZERO;
        end
      end
    end
  end

  assign w_rd_data = rd_data[(int'(w_rd_layer) < NUM_LAYERS) ? w_rd_layer : '0];

  logic net_done;

  pc_done_agg #(.WIDTH(NUM_LAYERS)) u_net_done (
    .clk     (clk),
    .rst_n   (rst_n),
    .clear   (start),
    .done_in (layer_done),
    .done_out(net_done)
  );

  pc_tick_ctrl u_tick (
    .clk       (clk),
    .rst_n     (rst_n),
    .start_tick(start_tick),
    .net_done  (net_done),
    .start     (start),
    .busy      (busy)
  );

  assign done = net_done;

  // The start pulse only reaches layers that are all idle.
  assert property (@(posedge clk) disable iff (!rst_n) start |-> (layer_busy == '0))
    else $error("tick started while a layer is busy");

endmodule
