// pc_net_lockstep -- reusable lockstep harness for one pc_network
// configuration, used by the workload testbench.
//
// Instantiates pc_network with the given NUM_LAYERS / LAYER_SIZE /
// LAYER_ACT, loads random weights through the weight port and runs N_TICKS
// ticks against the network reference model: the input layer is always
// clamped, every other neuron is clamped or free at random, and ticks
// alternate between inference (alpha = 0) and learning. After each tick all
// states, errors and weights must match the model within a relative 1e-5,
// (TOL: the model evaluates tanh exactly, the hardware through its table,
// so a tanh network is compared with a looser TOL), and the request-to-done latency must be max_l(3N+M+4) + 4 cycles. The
// harness has its own clock; it raises `finished` when done and reports its
// counts through `checks` / `failures`. Mechanism counters (clamped, free,
// inference, learning ticks) must each be non-zero. With EPOCHS > 0 a
// three-layer network is then trained on a teacher-student task (see the
// task train) and its test error must fall.
module pc_net_lockstep
  import pc_pkg::*;
  import fp_ref_pkg::*;
  import pc_net_model_pkg::*;
#(
  parameter string       NAME       = "net",
  parameter int unsigned NUM_LAYERS = 3,
  parameter int unsigned LAYER_SIZE [NUM_LAYERS] = '{3, 4, 2},
  parameter act_e        LAYER_ACT  [NUM_LAYERS] = '{ACT_LINEAR, ACT_RELU, ACT_LINEAR},
  parameter int          N_TICKS    = 20,
  parameter real         TOL        = 1.0e-5,
  parameter int          EPOCHS     = 0,
  parameter int          SAMPLES    = 16
) (
  output int checks,
  output int failures,
  output bit finished
);
  function automatic int max_n();
    int m = 1;
    for (int l = 0; l < NUM_LAYERS; l++) if (LAYER_SIZE[l] > m) m = LAYER_SIZE[l];
    return m;
  endfunction

  // Expected latency: max over layers of 3N+M+4, plus 4.
  function automatic int tick_cycles();
    int c = 0, n, mm;
    for (int l = 0; l < NUM_LAYERS; l++) begin
      n  = (l < NUM_LAYERS - 1) ? LAYER_SIZE[l + 1] : 0;
      mm = (l > 0) ? LAYER_SIZE[l - 1] : 0;
      if (3 * n + mm + 4 > c) c = 3 * n + mm + 4;
    end
    return c + 4;
  endfunction

  localparam int MAXN = max_n();
  localparam int LW   = (NUM_LAYERS > 1) ? $clog2(NUM_LAYERS) : 1;
  localparam int NW   = (MAXN > 1) ? $clog2(MAXN) : 1;
  localparam int IW   = $clog2(MAXN + 2);

  logic clk = 0, rst_n = 0, start_tick = 0;
  always #5 clk = ~clk;

  fp32_t alpha, alpha_bias, gamma;
  logic  x_set_en [NUM_LAYERS][MAXN];
  fp32_t x_obs    [NUM_LAYERS][MAXN];
  logic  w_wr_en;
  logic [LW-1:0] w_wr_layer, w_rd_layer;
  logic [NW-1:0] w_wr_neuron, w_rd_neuron;
  logic [IW-1:0] w_wr_idx, w_rd_idx;
  fp32_t w_wr_data, w_rd_data;
  fp32_t x_state [NUM_LAYERS][MAXN];
  fp32_t eps     [NUM_LAYERS][MAXN];
  logic  busy, done;

  pc_network #(.NUM_LAYERS(NUM_LAYERS), .LAYER_SIZE(LAYER_SIZE), .LAYER_ACT(LAYER_ACT)) dut (
    .clk, .rst_n, .start_tick, .alpha, .alpha_bias, .gamma, .x_set_en, .x_obs,
    .w_wr_en, .w_wr_layer, .w_wr_neuron, .w_wr_idx, .w_wr_data,
    .w_rd_layer, .w_rd_neuron, .w_rd_idx, .w_rd_data,
    .x_state, .eps, .busy, .done);

  task automatic near(input fp32_t got, input real want, input string what);
    real g, tol;
    g   = from_fp32(got);
    tol = TOL * ((want > 1.0 || want < -1.0) ? ((want > 0) ? want : -want) : 1.0);
    checks++;
    if (!(g - want <= tol && want - g <= tol)) begin
      failures++;
      if (failures < 10) $display("FAIL %s %s: got %f want %f", NAME, what, g, want);
    end
  endtask

  function automatic real rnd(real lo, real hi);
    return q32(lo + (hi - lo) * real'($urandom_range(1000000)) / 1000000.0);
  endfunction

  task automatic run_tick();
    @(negedge clk); start_tick = 1;
    @(negedge clk); start_tick = 0;
    while (!done) @(negedge clk);
  endtask

  // Teacher-student training of a three-layer network: teacher
  // y = A f(B x + b1) + b2 with f the hidden activation and fixed random
  // A, B, b1, b2; input dimension d drawn from [-(1.2 - 0.1 d), 1.2 - 0.1 d].
  // Each epoch presents every sample with input and output clamped, 10
  // inference ticks then 10 learning ticks (alpha = 0.05, gamma = 0.1);
  // the test error is measured with only the input clamped after 40
  // inference ticks. The error after EPOCHS epochs must be below 0.7 times
  // the error before training.
  task automatic train(inout int n_infer, inout int n_learn);
    localparam int NO = LAYER_SIZE[0], NH = LAYER_SIZE[1], NX = LAYER_SIZE[2];
    real A [NO][NH], B [NH][NX], b1 [NH], b2 [NO];
    real xin [SAMPLES][NX], yt [SAMPLES][NO];
    real mse, mse0, d, h, hf;
    for (int r = 0; r < NO; r++) begin
      b2[r] = rnd(-0.5, 0.5);
      for (int c = 0; c < NH; c++) A[r][c] = rnd(-1.0, 1.0);
    end
    for (int r = 0; r < NH; r++) begin
      b1[r] = rnd(-0.5, 0.5);
      for (int c = 0; c < NX; c++) B[r][c] = rnd(-1.0, 1.0);
    end
    for (int s = 0; s < SAMPLES; s++) begin
      for (int c = 0; c < NX; c++) xin[s][c] = rnd(-(1.2 - 0.1 * c), 1.2 - 0.1 * c);
      for (int r = 0; r < NO; r++) begin
        yt[s][r] = b2[r];
        for (int c = 0; c < NH; c++) begin
          h = b1[c];
          for (int e = 0; e < NX; e++) h += B[c][e] * xin[s][e];
          if (LAYER_ACT[1] == ACT_TANH)      hf = $tanh(h);
          else if (LAYER_ACT[1] == ACT_RELU) hf = (h > 0.0) ? h : 0.0;
          else                               hf = h;
          yt[s][r] += A[r][c] * hf;
        end
      end
    end
    for (int l = 0; l < 3; l++)
      for (int i = 0; i < LAYER_SIZE[l]; i++)
        for (int j = 0; j <= ((l < 2) ? LAYER_SIZE[l + 1] : 0); j++) begin
          @(negedge clk);
          w_wr_en = 1; w_wr_layer = LW'(l); w_wr_neuron = NW'(i); w_wr_idx = IW'(j);
          w_wr_data = to_fp32(rnd(-0.5, 0.5));
        end
    @(negedge clk); w_wr_en = 0;
    gamma = to_fp32(0.1);
    mse0 = 0.0;
    for (int ep = 0; ep <= EPOCHS; ep++) begin
      mse = 0.0;
      alpha = 0; alpha_bias = 0;
      for (int s = 0; s < SAMPLES; s++) begin
        for (int l = 0; l < 3; l++) for (int i = 0; i < MAXN; i++) x_set_en[l][i] = 0;
        for (int c = 0; c < NX; c++) begin x_set_en[2][c] = 1; x_obs[2][c] = to_fp32(xin[s][c]); end
        for (int t = 0; t < 40; t++) begin run_tick(); n_infer++; end
        for (int r = 0; r < NO; r++) begin
          d = from_fp32(x_state[0][r]) - yt[s][r];
          mse += d * d / real'(SAMPLES * NO);
        end
      end
      $display("%s: epoch %0d test MSE %f", NAME, ep, mse);
      if (ep == 0) mse0 = mse;
      if (ep == EPOCHS) break;
      for (int s = 0; s < SAMPLES; s++) begin
        for (int c = 0; c < NX; c++) begin x_set_en[2][c] = 1; x_obs[2][c] = to_fp32(xin[s][c]); end
        for (int r = 0; r < NO; r++) begin x_set_en[0][r] = 1; x_obs[0][r] = to_fp32(yt[s][r]); end
        alpha = 0; alpha_bias = 0;
        for (int t = 0; t < 10; t++) begin run_tick(); n_infer++; end
        alpha = to_fp32(0.05); alpha_bias = to_fp32(0.05);
        for (int t = 0; t < 10; t++) begin run_tick(); n_learn++; end
      end
    end
    checks++;
    if (!(mse < 0.7 * mse0)) begin
      failures++;
      $display("FAIL %s training: test MSE %f -> %f", NAME, mse0, mse);
    end
  endtask

  initial begin
    pc_net_model m;
    int  acts[], sizes[];
    bit  se[][];
    real ob[][];
    real al, alb;
    int  lat, n_clamped, n_free, n_infer, n_learn;
    checks = 0; failures = 0; finished = 0;
    n_clamped = 0; n_free = 0; n_infer = 0; n_learn = 0;
    acts = new[NUM_LAYERS]; sizes = new[NUM_LAYERS];
    for (int l = 0; l < NUM_LAYERS; l++) begin acts[l] = int'(LAYER_ACT[l]); sizes[l] = LAYER_SIZE[l]; end
    m = new(sizes, acts, 1'b1);
    se = new[NUM_LAYERS]; ob = new[NUM_LAYERS];
    for (int l = 0; l < NUM_LAYERS; l++) begin se[l] = new[sizes[l]]; ob[l] = new[sizes[l]]; end
    alpha = 0; alpha_bias = 0; gamma = 0; w_wr_en = 0; w_wr_layer = 0; w_wr_neuron = 0;
    w_wr_idx = 0; w_wr_data = 0; w_rd_layer = 0; w_rd_neuron = 0; w_rd_idx = 0;
    for (int l = 0; l < NUM_LAYERS; l++) for (int i = 0; i < MAXN; i++) begin
      x_set_en[l][i] = 0; x_obs[l][i] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;

    for (int l = 0; l < NUM_LAYERS; l++)
      for (int i = 0; i < sizes[l]; i++)
        for (int j = 0; j <= ((l < NUM_LAYERS - 1) ? sizes[l + 1] : 0); j++) begin
          m.n[l][i].w[j] = rnd(-0.8, 0.8);
          @(negedge clk);
          w_wr_en = 1; w_wr_layer = LW'(l); w_wr_neuron = NW'(i); w_wr_idx = IW'(j);
          w_wr_data = to_fp32(m.n[l][i].w[j]);
        end
    @(negedge clk); w_wr_en = 0;

    for (int t = 0; t < N_TICKS; t++) begin
      al  = (t % 2 == 1) ? 0.05 : 0.0;
      alb = (t % 2 == 1) ? 0.02 : 0.0;
      alpha = to_fp32(al); alpha_bias = to_fp32(alb); gamma = to_fp32(0.1);
      if (al == 0.0) n_infer++; else n_learn++;
      for (int l = 0; l < NUM_LAYERS; l++)
        for (int i = 0; i < sizes[l]; i++) begin
          se[l][i] = (l == NUM_LAYERS - 1) ? 1'b1 : ($urandom_range(2) == 0);
          ob[l][i] = rnd(-2.0, 2.0);
          x_set_en[l][i] = se[l][i];
          x_obs[l][i] = to_fp32(ob[l][i]);
          if (se[l][i]) n_clamped++; else n_free++;
        end
      m.tick(se, ob, al, alb, 0.1);
      @(negedge clk); start_tick = 1;
      @(negedge clk); start_tick = 0;
      lat = 1;
      while (!done && lat < 1000) begin @(negedge clk); lat++; end
      checks++;
      if (lat != tick_cycles()) begin
        failures++;
        $display("FAIL %s tick latency %0d, expected %0d", NAME, lat, tick_cycles());
      end
      @(negedge clk);
      for (int l = 0; l < NUM_LAYERS; l++)
        for (int i = 0; i < sizes[l]; i++) begin
          near(x_state[l][i], m.n[l][i].x, "state");
          near(eps[l][i], m.n[l][i].eps, "error");
          for (int j = 0; j <= ((l < NUM_LAYERS - 1) ? sizes[l + 1] : 0); j++) begin
            w_rd_layer = LW'(l); w_rd_neuron = NW'(i); w_rd_idx = IW'(j); #1;
            near(w_rd_data, m.n[l][i].w[j], "weight");
          end
        end
    end
    checks++; if (n_clamped == 0) begin failures++; $display("FAIL %s no clamping", NAME); end
    checks++; if (n_free    == 0) begin failures++; $display("FAIL %s no free neuron", NAME); end
    checks++; if (n_infer   == 0) begin failures++; $display("FAIL %s no inference tick", NAME); end
    checks++; if (n_learn   == 0) begin failures++; $display("FAIL %s no learning tick", NAME); end
    if (EPOCHS > 0 && NUM_LAYERS == 3) train(n_infer, n_learn);
    $display("%s: latency %0d cycles, %0d checks, %0d failures", NAME, tick_cycles(), checks, failures);
    finished = 1;
  end
endmodule
