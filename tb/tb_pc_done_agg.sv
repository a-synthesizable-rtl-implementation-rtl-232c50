// tb_pc_done_agg -- self-checking test of the completion aggregator.
//
// Four units each pulse done once per round, at random cycles 0..12 after
// the round's clear (several may coincide). done_out must be high for
// exactly one cycle, in the cycle after the last unit's pulse, and never
// otherwise. A round in which a stale pulse arrives before clear checks
// that clear discards it.
module tb_pc_done_agg;
  localparam int W = 4;

  logic clk = 0, rst_n = 0, clear = 0;
  logic [W-1:0] done_in = '0;
  logic done_out;
  always #5 clk = ~clk;

  pc_done_agg #(.WIDTH(W)) dut (.clk, .rst_n, .clear, .done_in, .done_out);

  int checks = 0, failures = 0, n_coincide = 0, n_stale = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int when [W];
    int last, pulses, first_at;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 200; r++) begin
      // Stale pulse from one unit before the round starts, then clear.
      if (r % 10 == 3) begin
        @(negedge clk); done_in = 4'b0001; n_stale++;
        @(negedge clk); done_in = '0;
      end
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      last = 0;
      for (int u = 0; u < W; u++) begin
        when[u] = $urandom_range(12);
        if (when[u] > last) last = when[u];
      end
      for (int u = 1; u < W; u++) if (when[u] == when[0]) n_coincide++;
      pulses = 0; first_at = -1;
      for (int c = 0; c <= last + 3; c++) begin
        for (int u = 0; u < W; u++) done_in[u] = (when[u] == c);
        @(negedge clk);
        done_in = '0;
        if (done_out) begin pulses++; if (first_at < 0) first_at = c; end
      end
      checks++;
      if (pulses != 1 || first_at != last) begin
        failures++;
        if (failures < 10) $display("FAIL round %0d: %0d pulses, first after cycle %0d, last unit at %0d",
                                    r, pulses, first_at, last);
      end
    end
    checks++; if (n_coincide == 0) begin failures++; $display("FAIL no coinciding pulses"); end
    checks++; if (n_stale == 0)    begin failures++; $display("FAIL no stale pulse"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
