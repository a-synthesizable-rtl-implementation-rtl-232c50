// tb_pc_network_workloads -- the network sizes other than the default that
// the source experiments use, each run in lockstep with the reference model.
//
//   * 2 -> 2 -> 1 with a tanh hidden layer (the nonlinear-activation
//     experiment): LAYER_SIZE '{1, 2, 2}, hidden activation tanh.
//   * 4 -> 8 -> 4 and 8 -> 16 -> 8 with a ReLU hidden layer (the scaling
//     study): LAYER_SIZE '{4, 8, 4} and '{8, 16, 8}.
//
// The tanh network is compared with a relative tolerance of 3e-3 because
// the model uses the exact tanh and the hardware a 1/16-step table with
// interpolation (about 4e-4 error), which the ticks accumulate.
//
// Each configuration is a pc_net_lockstep harness (own clock, random
// weights, random clamping, alternating inference and learning ticks,
// states / errors / weights compared after every tick, latency checked
// against max_l(3N+M+4) + 4), followed by 4 epochs of teacher-student
// training on 16 samples (teacher y = A f(Bx + b1) + b2 with the hidden
// activation f) whose test error must fall below 0.7 of its initial value.
// The test passes when all three finish with no failures.
module tb_pc_network_workloads;
  import pc_pkg::*;

  int c [3], f [3];
  bit fin [3];

  pc_net_lockstep #(.NAME("2-2-1 tanh"), .NUM_LAYERS(3), .LAYER_SIZE('{1, 2, 2}),
                    .LAYER_ACT('{ACT_LINEAR, ACT_TANH, ACT_LINEAR}), .N_TICKS(40), .TOL(3.0e-3), .EPOCHS(4), .SAMPLES(16))
    u_tanh (.checks(c[0]), .failures(f[0]), .finished(fin[0]));

  pc_net_lockstep #(.NAME("4-8-4 relu"), .NUM_LAYERS(3), .LAYER_SIZE('{4, 8, 4}),
                    .LAYER_ACT('{ACT_LINEAR, ACT_RELU, ACT_LINEAR}), .N_TICKS(20), .EPOCHS(4), .SAMPLES(16))
    u_s8 (.checks(c[1]), .failures(f[1]), .finished(fin[1]));

  pc_net_lockstep #(.NAME("8-16-8 relu"), .NUM_LAYERS(3), .LAYER_SIZE('{8, 16, 8}),
                    .LAYER_ACT('{ACT_LINEAR, ACT_RELU, ACT_LINEAR}), .N_TICKS(12), .EPOCHS(4), .SAMPLES(16))
    u_s16 (.checks(c[2]), .failures(f[2]), .finished(fin[2]));

  int checks = 0, failures = 0;

  initial begin
    #50000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c[0] + c[1] + c[2], f[0] + f[1] + f[2] + 1);
    $finish;
  end

  initial begin
    wait (fin[0] && fin[1] && fin[2]);
    for (int k = 0; k < 3; k++) begin checks += c[k]; failures += f[k]; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
