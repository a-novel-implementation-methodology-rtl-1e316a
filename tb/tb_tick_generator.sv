// tb_tick_generator: self-checking test of the tick generator.
//
// Uses 4 cores and MIN_GAP = 2. Checks that no tick is raised while run is
// low, while any core is busy or while the network holds packets; that
// tick is a one-cycle pulse; that with everything idle the ticks come
// exactly MIN_GAP + 2 cycles apart (one cycle of pulse, MIN_GAP cycles for
// the cores to see the tick and drop done, one cycle to register the next
// pulse); and that tick_count counts the pulses.
module tb_tick_generator;

  localparam int NC = 4, GAP = 2;

  logic clk = 0, rst_n = 0, run = 0, net_idle = 1;
  logic [NC-1:0] core_done = '1;
  logic tick;
  logic [31:0] tick_count;

  int checks = 0, failures = 0, pulses = 0, last_tick = -100, cyc = 0;
  logic tick_q = 0;

  tick_generator #(.NUM_CORES(NC), .MIN_GAP(GAP)) dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) begin
    cyc++;
    if (tick) begin
      pulses++;
      checks++;
      if (!rst_n || !run) begin failures++; $display("FAIL: tick while stopped"); end
      if (tick_q) begin failures++; $display("FAIL: tick longer than one cycle"); end
      if (cyc - last_tick < GAP + 2) begin failures++; $display("FAIL: ticks %0d cycles apart", cyc - last_tick); end
      last_tick = cyc;
    end
    tick_q <= tick;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (10) @(negedge clk);
    checks++; if (pulses != 0) begin failures++; $display("FAIL: tick without run"); end

    // free running: period GAP + 2
    run = 1;
    @(posedge clk iff tick);
    for (int i = 0; i < 10; i++) begin
      int c0;
      c0 = cyc;
      @(posedge clk iff tick);
      checks++;
      if (cyc - c0 != GAP + 2) begin failures++; $display("FAIL: period %0d", cyc - c0); end
    end

    // held by a busy core or a busy network
    core_done = '0; net_idle = 1;
    repeat (3) @(negedge clk);
    begin
      int p0;
      p0 = pulses;
      repeat (20) @(negedge clk);
      checks++; if (pulses != p0) begin failures++; $display("FAIL: tick while a core is busy"); end
      core_done = '1; net_idle = 0;
      repeat (20) @(negedge clk);
      checks++; if (pulses != p0) begin failures++; $display("FAIL: tick while network busy"); end
      net_idle = 1;
      repeat (20) @(negedge clk);
      checks++; if (pulses == p0) begin failures++; $display("FAIL: no tick once idle"); end
    end
    checks++;
    if (tick_count != 32'(pulses)) begin failures++; $display("FAIL: tick_count %0d, pulses %0d", tick_count, pulses); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
