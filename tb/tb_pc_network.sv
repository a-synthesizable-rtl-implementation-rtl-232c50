// tb_pc_network -- end-to-end test of the default 2 -> 4 -> 3 network
// (ReLU hidden layer), instantiated with its default parameters.
//
// Part 1, lockstep: random weights are loaded through the weight port and
// 40 ticks are run with random boundary conditions (each neuron clamped or
// free at random), alternating inference ticks (alpha = 0) and learning
// ticks (alpha, alpha_bias > 0). After every tick all states, errors and
// weights are compared with the network reference model (relative
// tolerance 1e-5), and the request-to-done latency is checked against
// max_l(3N+M+4) + 4 cycles. A tick requested while another runs must be
// deferred and then run.
//
// Part 2, learning: a teacher y = A*relu(B*x) with fixed random A (3x4) and
// B (4x2) gives 16 samples. Each epoch presents every sample with input and
// output clamped, 10 inference ticks then 10 learning ticks; the test MSE
// is measured with only the input clamped after 40 inference ticks. The
// MSE after 6 epochs must be below half the MSE before training.
//
// Every mechanism is counted and must occur: hard clamping, free neurons,
// inference ticks, learning ticks, deferred requests, hidden neurons cut
// off by the ReLU.
module tb_pc_network;
  import pc_pkg::*;
  import fp_ref_pkg::*;
  import pc_net_model_pkg::*;

  localparam int L = 3, MAXN = 4;
  localparam int SZ [L] = '{3, 4, 2};
  localparam int TICK_CYC = 16 + 4;   // max_l(3N+M+4) = 3*4+0+4 (output layer), plus 4

  logic clk = 0, rst_n = 0, start_tick = 0;
  always #5 clk = ~clk;

  fp32_t alpha, alpha_bias, gamma;
  logic  x_set_en [L][MAXN];
  fp32_t x_obs    [L][MAXN];
  logic  w_wr_en;
  logic [1:0] w_wr_layer, w_rd_layer, w_wr_neuron, w_rd_neuron;
  logic [2:0] w_wr_idx, w_rd_idx;
  fp32_t w_wr_data, w_rd_data;
  fp32_t x_state [L][MAXN];
  fp32_t eps     [L][MAXN];
  logic  busy, done;

  pc_network dut (
    .clk, .rst_n, .start_tick, .alpha, .alpha_bias, .gamma, .x_set_en, .x_obs,
    .w_wr_en, .w_wr_layer, .w_wr_neuron, .w_wr_idx, .w_wr_data,
    .w_rd_layer, .w_rd_neuron, .w_rd_idx, .w_rd_data,
    .x_state, .eps, .busy, .done);

  int checks = 0, failures = 0;
  int n_clamped = 0, n_free = 0, n_infer = 0, n_learn = 0, n_deferred = 0, n_relu_cut = 0;

  task automatic near(input fp32_t got, input real want, input string what);
    real g, tol;
    g   = from_fp32(got);
    tol = 1.0e-5 * ((want > 1.0 || want < -1.0) ? ((want > 0) ? want : -want) : 1.0);
    checks++;
    if (!(g - want <= tol && want - g <= tol)) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %f want %f", what, g, want);
    end
  endtask

  function automatic real rnd(real lo, real hi);
    return q32(lo + (hi - lo) * real'($urandom_range(1000000)) / 1000000.0);
  endfunction

  // One tick: request, wait for done, return the latency in cycles.
  task automatic run_tick(output int lat);
    @(negedge clk);
    start_tick = 1;
    @(negedge clk);
    start_tick = 0;
    lat = 1;
    while (!done) begin @(negedge clk); lat++; end
  endtask

  task automatic write_w(input int l, input int i, input int j, input real v);
    @(negedge clk);
    w_wr_en = 1; w_wr_layer = 2'(l); w_wr_neuron = 2'(i); w_wr_idx = 3'(j); w_wr_data = to_fp32(v);
    @(negedge clk);
    w_wr_en = 0;
  endtask

  task automatic read_w(input int l, input int i, input int j, output fp32_t v);
    w_rd_layer = 2'(l); w_rd_neuron = 2'(i); w_rd_idx = 3'(j);
    #1;
    v = w_rd_data;
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pc_net_model m;
    int  acts[] = '{0, 1, 0};
    int  sizes[] = '{3, 4, 2};
    bit  se[][];
    real ob[][];
    real al, alb, ga;
    int  lat;
    real A [3][4], B [4][2], xin [16][2], yt [16][3];
    real mse0, mse1;

    m = new(sizes, acts, 1'b1);
    se = new[L]; ob = new[L];
    for (int l = 0; l < L; l++) begin se[l] = new[SZ[l]]; ob[l] = new[SZ[l]]; end
    alpha = 0; alpha_bias = 0; gamma = 0; w_wr_en = 0; w_wr_layer = 0; w_wr_neuron = 0;
    w_wr_idx = 0; w_wr_data = 0; w_rd_layer = 0; w_rd_neuron = 0; w_rd_idx = 0;
    for (int l = 0; l < L; l++) for (int i = 0; i < MAXN; i++) begin
      x_set_en[l][i] = 0; x_obs[l][i] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---------------- Part 1: lockstep with the model ----------------
    for (int l = 0; l < L; l++)
      for (int i = 0; i < SZ[l]; i++)
        for (int j = 0; j <= ((l < L - 1) ? SZ[l + 1] : 0); j++) begin
          m.n[l][i].w[j] = rnd(-0.8, 0.8);
          write_w(l, i, j, m.n[l][i].w[j]);
        end

    for (int t = 0; t < 40; t++) begin
      al  = (t % 2 == 1) ? 0.05 : 0.0;
      alb = (t % 2 == 1) ? 0.02 : 0.0;
      ga  = 0.1;
      alpha = to_fp32(al); alpha_bias = to_fp32(alb); gamma = to_fp32(ga);
      if (al == 0.0) n_infer++; else n_learn++;
      for (int l = 0; l < L; l++)
        for (int i = 0; i < SZ[l]; i++) begin
          se[l][i] = (l == L - 1) ? 1'b1 : ($urandom_range(2) == 0);
          ob[l][i] = rnd(-1.2, 1.2);
          x_set_en[l][i] = se[l][i];
          x_obs[l][i] = to_fp32(ob[l][i]);
          if (se[l][i]) n_clamped++; else n_free++;
        end
      for (int i = 0; i < SZ[1]; i++)
        if ((se[1][i] ? ob[1][i] : m.n[1][i].x) <= 0.0) n_relu_cut++;
      m.tick(se, ob, al, alb, ga);
      run_tick(lat);
      checks++;
      if (lat != TICK_CYC) begin
        failures++;
        $display("FAIL tick latency %0d, expected %0d", lat, TICK_CYC);
      end
      @(negedge clk);
      for (int l = 0; l < L; l++)
        for (int i = 0; i < SZ[l]; i++) begin
          near(x_state[l][i], m.n[l][i].x, "state");
          near(eps[l][i], m.n[l][i].eps, "error");
          for (int j = 0; j <= ((l < L - 1) ? SZ[l + 1] : 0); j++) begin
            fp32_t wv;
            read_w(l, i, j, wv);
            near(wv, m.n[l][i].w[j], "weight");
          end
        end
    end

    // Deferred request: a second request while a tick runs.
    alpha = 0; alpha_bias = 0;
    @(negedge clk); start_tick = 1;
    @(negedge clk); start_tick = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (!busy) begin failures++; $display("FAIL network not busy"); end
    start_tick = 1;
    @(negedge clk); start_tick = 0;
    while (!done) @(negedge clk);
    @(negedge clk);
    lat = 0;
    while (!done && lat < 100) begin @(negedge clk); lat++; end
    checks++;
    if (lat >= 100) begin failures++; $display("FAIL deferred request never ran"); end
    else n_deferred++;

    // ---------------- Part 2: teacher-student learning ----------------
    for (int r = 0; r < 3; r++) for (int c = 0; c < 4; c++) A[r][c] = rnd(-1.0, 1.0);
    for (int r = 0; r < 4; r++) for (int c = 0; c < 2; c++) B[r][c] = rnd(-1.0, 1.0);
    for (int s = 0; s < 16; s++) begin
      xin[s][0] = rnd(-1.2, 1.2);
      xin[s][1] = rnd(-1.1, 1.1);
      for (int r = 0; r < 3; r++) begin
        yt[s][r] = 0.0;
        for (int c = 0; c < 4; c++) begin
          real h;
          h = B[c][0] * xin[s][0] + B[c][1] * xin[s][1];
          yt[s][r] += A[r][c] * ((h > 0.0) ? h : 0.0);
        end
      end
    end
    for (int l = 0; l < L; l++)
      for (int i = 0; i < SZ[l]; i++)
        for (int j = 0; j <= ((l < L - 1) ? SZ[l + 1] : 0); j++)
          write_w(l, i, j, rnd(-0.5, 0.5));
    gamma = to_fp32(0.1);
    for (int ep = 0; ep <= 6; ep++) begin
      real mse;
      // Evaluation: input clamped, everything else free.
      mse = 0.0;
      alpha = 0; alpha_bias = 0;
      for (int s = 0; s < 16; s++) begin
        for (int l = 0; l < L; l++) for (int i = 0; i < MAXN; i++) x_set_en[l][i] = 0;
        for (int i = 0; i < 2; i++) begin x_set_en[2][i] = 1; x_obs[2][i] = to_fp32(xin[s][i]); end
        for (int t = 0; t < 40; t++) begin run_tick(lat); n_infer++; end
        for (int r = 0; r < 3; r++) begin
          real d;
          d = from_fp32(x_state[0][r]) - yt[s][r];
          mse += d * d / 48.0;
        end
      end
      $display("epoch %0d test MSE %f", ep, mse);
      if (ep == 0) mse0 = mse;
      mse1 = mse;
      if (ep == 6) break;
      // Training: input and output clamped.
      for (int s = 0; s < 16; s++) begin
        for (int i = 0; i < 2; i++) begin x_set_en[2][i] = 1; x_obs[2][i] = to_fp32(xin[s][i]); end
        for (int r = 0; r < 3; r++) begin x_set_en[0][r] = 1; x_obs[0][r] = to_fp32(yt[s][r]); end
        alpha = 0; alpha_bias = 0;
        for (int t = 0; t < 10; t++) begin run_tick(lat); n_infer++; end
        alpha = to_fp32(0.05); alpha_bias = to_fp32(0.05);
        for (int t = 0; t < 10; t++) begin run_tick(lat); n_learn++; end
      end
    end
    checks++;
    if (!(mse1 < 0.5 * mse0)) begin
      failures++;
      $display("FAIL MSE did not halve: %f -> %f", mse0, mse1);
    end

    $display("clamped %0d free %0d inference %0d learning %0d deferred %0d relu-cut %0d",
             n_clamped, n_free, n_infer, n_learn, n_deferred, n_relu_cut);
    checks++; if (n_clamped  == 0) begin failures++; $display("FAIL no clamping"); end
    checks++; if (n_free     == 0) begin failures++; $display("FAIL no free neuron"); end
    checks++; if (n_infer    == 0) begin failures++; $display("FAIL no inference tick"); end
    checks++; if (n_learn    == 0) begin failures++; $display("FAIL no learning tick"); end
    checks++; if (n_deferred == 0) begin failures++; $display("FAIL no deferred request"); end
    checks++; if (n_relu_cut == 0) begin failures++; $display("FAIL no ReLU cut-off"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
