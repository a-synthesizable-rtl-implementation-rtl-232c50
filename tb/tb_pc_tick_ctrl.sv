// tb_pc_tick_ctrl -- self-checking test of the tick controller.
//
// A small stand-in for the network answers each start pulse with net_done
// a random 3..15 cycles later. Requests are made at random cycles, some
// while a tick runs. Checked: a start pulse never overlaps a running tick
// and lasts one cycle, busy is high while a tick runs, and every request is
// served: a request made while busy is deferred and its tick starts within
// two cycles of the controller becoming idle. Requests made during one
// tick may merge into a single later tick, so ticks <= requests.
module tb_pc_tick_ctrl;
  logic clk = 0, rst_n = 0, start_tick = 0, net_done = 0;
  logic start, busy;
  always #5 clk = ~clk;

  pc_tick_ctrl dut (.clk, .rst_n, .start_tick, .net_done, .start, .busy);

  int checks = 0, failures = 0;
  int ticks = 0, n_deferred = 0;
  bit running = 0;
  int remain = 0;

  // Network stand-in: runs a tick for a random time after each start.
  always @(posedge clk) begin
    net_done <= 1'b0;
    if (start) begin
      checks++;
      if (running) begin failures++; $display("FAIL start while a tick runs"); end
      running <= 1'b1;
      remain  <= 3 + $urandom_range(12);
      ticks++;
    end else if (running) begin
      if (remain == 1) begin running <= 1'b0; net_done <= 1'b1; end
      remain <= remain - 1;
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit prev_start, outstanding;
    int idle_wait, n_req;
    repeat (2) @(negedge clk);
    rst_n = 1;
    prev_start = 0; outstanding = 0; idle_wait = 0; n_req = 0;
    for (int c = 0; c < 5000; c++) begin
      @(negedge clk);
      checks++;
      if (running && !busy) begin failures++; $display("FAIL busy low during a tick"); end
      checks++;
      if (start && prev_start) begin failures++; $display("FAIL start longer than one cycle"); end
      prev_start = start;
      // A start seen now serves every request made at an earlier negedge.
      if (start) outstanding = 0;
      // An outstanding request must start within two cycles of the
      // controller becoming idle.
      if (outstanding && !busy) idle_wait++; else idle_wait = 0;
      checks++;
      if (idle_wait > 2) begin failures++; $display("FAIL request not served"); idle_wait = 0; end
      start_tick = ($urandom_range(9) == 0);
      if (start_tick) begin
        n_req++;
        if (busy) n_deferred++;
        outstanding = 1;
      end
    end
    start_tick = 0;
    repeat (60) @(negedge clk) if (start) outstanding = 0;
    checks++;
    if (outstanding) begin failures++; $display("FAIL last request never served"); end
    checks++;
    if (ticks > n_req || ticks == 0) begin
      failures++;
      $display("FAIL %0d ticks for %0d requests", ticks, n_req);
    end
    checks++; if (n_deferred == 0) begin failures++; $display("FAIL no deferred request"); end
    $display("requests %0d ticks %0d deferred %0d", n_req, ticks, n_deferred);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
