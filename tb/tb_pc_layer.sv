// tb_pc_layer -- self-checking test of one layer of neural cores.
//
// A layer of 3 cores with fan-in 2 (ReLU inputs), back fan-in 2 and a
// linear own activation is driven with random upper-layer states and a
// random back_in array for 40 ticks, with random clamping and alternating
// inference and learning. Each core is compared with its own reference
// model; this checks the routing of back_in column i to core i, of the
// weight port to the addressed core, and of each core's back_out row. The
// layer's done must pulse exactly once per tick, high in cycle 3N+M+4+2
// when the cycle in which start is high is cycle 0 (the core schedule, the
// core's done register and the aggregator's register).
module tb_pc_layer;
  import pc_pkg::*;
  import fp_ref_pkg::*;
  import pc_core_model_pkg::*;

  localparam int NO = 3, NI = 2, NB = 2;
  localparam int LAT = 3 * NI + NB + 4 + 2;

  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;

  fp32_t alpha, alpha_bias, gamma;
  logic  x_set_en [NO];
  fp32_t x_obs [NO], pre_x [NI], back_in [NB][NO];
  logic  w_wr_en;
  logic [1:0] w_wr_neuron, w_rd_neuron;
  logic [2:0] w_wr_idx, w_rd_idx;
  fp32_t w_wr_data, w_rd_data;
  fp32_t x_out [NO], x_state [NO], eps_out [NO], back_out [NO][NI];
  logic  busy, done;

  pc_layer #(.N_OWN(NO), .N_IN(NI), .N_BACK(NB), .ACT_IN(ACT_RELU), .ACT_OWN(ACT_LINEAR), .CLAMP_HARD(1'b1)) dut (
    .clk, .rst_n, .start, .alpha, .alpha_bias, .gamma, .x_set_en, .x_obs, .pre_x, .back_in,
    .w_wr_en, .w_wr_neuron, .w_wr_idx, .w_wr_data, .w_rd_neuron, .w_rd_idx, .w_rd_data,
    .x_out, .x_state, .eps_out, .back_out, .busy, .done);

  int checks = 0, failures = 0, n_clamped = 0, n_learn = 0, n_infer = 0;

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

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pc_core_model m [NO];
    real pre[], bin[], prev_back [NO][NI];
    real al, ob [NO];
    int  lat, pulses;
    pre = new[NI]; bin = new[NB];
    for (int i = 0; i < NO; i++) m[i] = new(NI, NB, 1, 0, 1'b1);
    alpha = 0; alpha_bias = 0; gamma = 0; w_wr_en = 0; w_wr_neuron = 0; w_wr_idx = 0;
    w_wr_data = 0; w_rd_neuron = 0; w_rd_idx = 0;
    foreach (x_set_en[i]) begin x_set_en[i] = 0; x_obs[i] = 0; end
    foreach (pre_x[j]) pre_x[j] = 0;
    foreach (back_in[k, i]) back_in[k][i] = 0;
    foreach (prev_back[i, j]) prev_back[i][j] = 0.0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < NO; i++)
      for (int j = 0; j <= NI; j++) begin
        m[i].w[j] = rnd(-1.0, 1.0);
        @(negedge clk);
        w_wr_en = 1; w_wr_neuron = 2'(i); w_wr_idx = 3'(j); w_wr_data = to_fp32(m[i].w[j]);
      end
    @(negedge clk); w_wr_en = 0;

    for (int t = 0; t < 40; t++) begin
      al = (t % 2 == 1) ? 0.05 : 0.0;
      if (al == 0.0) n_infer++; else n_learn++;
      alpha = to_fp32(al); alpha_bias = to_fp32(al); gamma = to_fp32(0.1);
      foreach (pre[j]) begin pre[j] = rnd(-1.5, 1.5); pre_x[j] = to_fp32(pre[j]); end
      foreach (back_in[k, i]) back_in[k][i] = to_fp32(rnd(-0.5, 0.5));
      for (int i = 0; i < NO; i++) begin
        x_set_en[i] = ($urandom_range(2) == 0);
        ob[i] = rnd(-1.0, 1.0);
        x_obs[i] = to_fp32(ob[i]);
        if (x_set_en[i]) n_clamped++;
      end
      for (int i = 0; i < NO; i++) begin
        for (int k = 0; k < NB; k++) bin[k] = from_fp32(back_in[k][i]);
        m[i].tick(pre, bin, x_set_en[i], ob[i], al, al, 0.1);
      end
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      for (int i = 0; i < NO; i++)
        for (int j = 0; j < NI; j++) near(back_out[i][j], prev_back[i][j], "published back");
      lat = 1; pulses = 0;
      while (!done && lat < 100) begin @(negedge clk); lat++; end
      checks++;
      if (lat != LAT) begin failures++; $display("FAIL layer latency %0d, expected %0d", lat, LAT); end
      repeat (5) begin @(negedge clk); if (done) pulses++; end
      checks++;
      if (pulses != 0) begin failures++; $display("FAIL done pulsed more than once"); end
      for (int i = 0; i < NO; i++) begin
        near(x_state[i], m[i].x, "state");
        near(eps_out[i], m[i].eps, "error");
        for (int j = 0; j <= NI; j++) begin
          w_rd_neuron = 2'(i); w_rd_idx = 3'(j); #1;
          near(w_rd_data, m[i].w[j], "weight");
        end
        for (int j = 0; j < NI; j++) prev_back[i][j] = m[i].back[j];
      end
    end
    checks++; if (n_clamped == 0) begin failures++; $display("FAIL no clamped neuron"); end
    checks++; if (n_learn == 0)   begin failures++; $display("FAIL no learning tick"); end
    checks++; if (n_infer == 0)   begin failures++; $display("FAIL no inference tick"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
