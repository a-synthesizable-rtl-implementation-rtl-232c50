// tb_pc_neural_core -- self-checking test of the neural core against the
// reference model.
//
// Two cores run side by side: core A (N_IN=3, N_BACK=2, ReLU inputs, ReLU
// own derivative, hard clamping) and core B (N_IN=2, N_BACK=0, linear
// inputs, tanh layer, soft clamping: the observation only enters the error).
// Weights are loaded through the weight port, then 60 ticks are run with
// random presynaptic states, back products, clamp enables and observations,
// alternating inference (alpha = 0) and learning (alpha > 0). After each
// tick the stored state, error and every weight are compared with the model
// (relative tolerance 1e-5), the busy time is checked against 3N+M+4 cycles,
// and on the next start the published state and back vector are checked.
// Counts of clamped ticks, learning ticks and inference ticks must be > 0.
module tb_pc_neural_core;
  import pc_pkg::*;
  import fp_ref_pkg::*;
  import pc_core_model_pkg::*;

  localparam int NA = 3, MA = 2, NB = 2, MB = 0;

  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;

  fp32_t alpha, alpha_bias, gamma;
  logic  set_a, set_b;
  fp32_t obs_a, obs_b;
  fp32_t pre_a [NA], back_a [MA], pre_b [NB], back_b [1];
  logic  wr_a, wr_b;
  logic [2:0] wr_idx_a, rd_idx_a;
  logic [1:0] wr_idx_b, rd_idx_b;
  fp32_t wr_data, rd_a, rd_b;
  fp32_t xo_a, xs_a, eps_a, bo_a [NA], xo_b, xs_b, eps_b, bo_b [NB];
  logic  busy_a, done_a, busy_b, done_b;

  pc_neural_core #(.N_IN(NA), .N_BACK(MA), .ACT_IN(ACT_RELU), .ACT_OWN(ACT_RELU), .CLAMP_HARD(1'b1)) dut_a (
    .clk, .rst_n, .start, .alpha, .alpha_bias, .gamma,
    .x_set_en(set_a), .x_obs(obs_a), .pre_x(pre_a), .back_in(back_a),
    .w_wr_en(wr_a), .w_wr_idx(wr_idx_a), .w_wr_data(wr_data), .w_rd_idx(rd_idx_a), .w_rd_data(rd_a),
    .x_out(xo_a), .x_state(xs_a), .eps_out(eps_a), .back_out(bo_a), .busy(busy_a), .done(done_a));

  pc_neural_core #(.N_IN(NB), .N_BACK(MB), .ACT_IN(ACT_LINEAR), .ACT_OWN(ACT_TANH), .CLAMP_HARD(1'b0)) dut_b (
    .clk, .rst_n, .start, .alpha, .alpha_bias, .gamma,
    .x_set_en(set_b), .x_obs(obs_b), .pre_x(pre_b), .back_in(back_b),
    .w_wr_en(wr_b), .w_wr_idx(wr_idx_b), .w_wr_data(wr_data), .w_rd_idx(rd_idx_b), .w_rd_data(rd_b),
    .x_out(xo_b), .x_state(xs_b), .eps_out(eps_b), .back_out(bo_b), .busy(busy_b), .done(done_b));

  int checks = 0, failures = 0;
  int n_clamped = 0, n_learn = 0, n_infer = 0;
  int cyc_a, cyc_b;

  always @(posedge clk) begin
    if (busy_a) cyc_a++;
    if (busy_b) cyc_b++;
  end

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

  task automatic expect_int(input int got, input int want, input string what);
    checks++;
    if (got != want) begin
      failures++;
      $display("FAIL %s: got %0d want %0d", what, got, want);
    end
  endtask

  function automatic real rnd(real lo, real hi);
    return q32(lo + (hi - lo) * real'($urandom_range(1000000)) / 1000000.0);
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pc_core_model ma, mb;
    real pa[], ba[], pb[], bb[];
    real prev_back_a[], prev_back_b[];
    real prev_x_a, prev_x_b, al, alb, ga, oa, ob;
    ma = new(NA, MA, 1, 1, 1'b1);
    mb = new(NB, MB, 0, 2, 1'b0);
    pa = new[NA]; ba = new[MA]; pb = new[NB]; bb = new[1];
    prev_back_a = new[NA]; prev_back_b = new[NB];
    wr_a = 0; wr_b = 0; wr_idx_a = 0; wr_idx_b = 0; rd_idx_a = 0; rd_idx_b = 0; wr_data = 0;
    alpha = 0; alpha_bias = 0; gamma = 0; set_a = 0; set_b = 0; obs_a = 0; obs_b = 0;
    foreach (pre_a[j]) pre_a[j] = 0;
    foreach (back_a[j]) back_a[j] = 0;
    foreach (pre_b[j]) pre_b[j] = 0;
    back_b[0] = 0;
    cyc_a = 0; cyc_b = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    // Load random weights.
    for (int j = 0; j <= NA; j++) begin
      ma.w[j] = rnd(-1.0, 1.0);
      @(negedge clk); wr_a = 1; wr_idx_a = 3'(j); wr_data = to_fp32(ma.w[j]);
    end
    @(negedge clk); wr_a = 0;
    for (int j = 0; j <= NB; j++) begin
      mb.w[j] = rnd(-1.0, 1.0);
      @(negedge clk); wr_b = 1; wr_idx_b = 2'(j); wr_data = to_fp32(mb.w[j]);
    end
    @(negedge clk); wr_b = 0;
    foreach (prev_back_a[j]) prev_back_a[j] = 0.0;
    foreach (prev_back_b[j]) prev_back_b[j] = 0.0;
    prev_x_a = 0.0; prev_x_b = 0.0;

    for (int t = 0; t < 60; t++) begin
      // Stimulus for this tick
      foreach (pa[j]) begin pa[j] = rnd(-1.5, 1.5); pre_a[j] = to_fp32(pa[j]); end
      foreach (ba[j]) begin ba[j] = rnd(-0.5, 0.5); back_a[j] = to_fp32(ba[j]); end
      foreach (pb[j]) begin pb[j] = rnd(-1.5, 1.5); pre_b[j] = to_fp32(pb[j]); end
      al  = (t % 2 == 1) ? 0.05 : 0.0;
      alb = (t % 2 == 1) ? 0.02 : 0.0;
      ga  = 0.1;
      oa  = rnd(-1.0, 1.0); ob = rnd(-1.0, 1.0);
      alpha = to_fp32(al); alpha_bias = to_fp32(alb); gamma = to_fp32(ga);
      set_a = ($urandom_range(2) == 0); set_b = ($urandom_range(2) == 0);
      obs_a = to_fp32(oa); obs_b = to_fp32(ob);
      if (set_a || set_b) n_clamped++;
      if (al != 0.0) n_learn++; else n_infer++;

      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      // Published values are last tick's.
      near(xo_a, prev_x_a, "A published x");
      near(xo_b, prev_x_b, "B published x");
      for (int j = 0; j < NA; j++) near(bo_a[j], prev_back_a[j], "A published back");
      for (int j = 0; j < NB; j++) near(bo_b[j], prev_back_b[j], "B published back");
      cyc_a = 0; cyc_b = 0;
      ma.tick(pa, ba, set_a, oa, al, alb, ga);
      mb.tick(pb, bb, set_b, ob, al, alb, ga);
      fork
        begin @(posedge done_a); end
        begin @(posedge done_b); end
      join
      @(negedge clk);
      expect_int(cyc_a, 3 * NA + MA + 4, "A cycles per tick");
      expect_int(cyc_b, 3 * NB + MB + 4, "B cycles per tick");
      near(xs_a, ma.x, "A state");
      near(eps_a, ma.eps, "A error");
      near(xs_b, mb.x, "B state");
      near(eps_b, mb.eps, "B error");
      for (int j = 0; j <= NA; j++) begin
        rd_idx_a = 3'(j); #1; near(rd_a, ma.w[j], "A weight");
      end
      for (int j = 0; j <= NB; j++) begin
        rd_idx_b = 2'(j); #1; near(rd_b, mb.w[j], "B weight");
      end
      foreach (prev_back_a[j]) prev_back_a[j] = ma.back[j];
      foreach (prev_back_b[j]) prev_back_b[j] = mb.back[j];
      prev_x_a = ma.x; prev_x_b = mb.x;
    end

    checks++; if (n_clamped == 0) begin failures++; $display("FAIL no clamped tick"); end
    checks++; if (n_learn == 0)   begin failures++; $display("FAIL no learning tick"); end
    checks++; if (n_infer == 0)   begin failures++; $display("FAIL no inference tick"); end
    $display("clamped ticks %0d, learning ticks %0d, inference ticks %0d", n_clamped, n_learn, n_infer);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
