// tb_gab_decoder_full: end-to-end test of the GaB decoder at the full
// size of the design (5 x 5 grid of 256-axon, 256-neuron cores, 65,537
// cycles per tick, MAX_ITER = 100) with no parameter overrides. It decodes
// the worked example of the text (r = 10001100 must give 10001101 with zero
// in tick 8), one codeword (zero in tick 6) and one word that never meets
// the checks (done without zero in tick 205, from the iteration counter),
// then checks that every mechanism ran. The reference decoder is
// gab_ref_pkg. This run takes a few minutes of simulation.
module tb_gab_decoder_full;
  import gab_ref_pkg::*;

  localparam int MAXIT = 100;
  localparam int WATCHDOG = 40_000_000;

  logic        clk = 0, rst_n = 0, run = 0;
  logic        in_valid = 0;
  logic [7:0]  in_axon = '0;
  logic [3:0]  in_delay = 4'd1;
  logic        out_valid, loaded, tick;
  logic [7:0]  out_axon;
  logic [31:0] tick_count, dropped;

  int checks = 0, failures = 0;
  int n_iter0 = 0, n_corrected = 0, n_limit = 0, n_xor = 0, n_delay3 = 0, n_majority = 0;

  gab_decoder dut (
    .clk, .rst_n, .run, .in_valid, .in_axon, .in_delay,
    .out_valid, .out_axon, .loaded, .tick, .tick_count, .dropped
  );

  always #5 clk = ~clk;

  // Mechanism counters, observed inside the design.
  always @(posedge clk) begin
    // CNU core (2) evaluates an XOR neuron that fires
    if (dut.u_grid.g_node[2].u_core.u_ctrl.pot_we && dut.u_grid.g_node[2].u_core.u_ctrl.nb_spike
        && dut.u_grid.g_node[2].u_core.u_ctrl.out_addr != 0) n_xor++;
    // Parity core relays with delay 3
    if (dut.u_grid.g_node[3].u_core.spike_out_valid && dut.u_grid.g_node[3].u_core.spike_out_ready
        && dut.u_grid.g_node[3].u_core.spike_out.delay == 4'd3) n_delay3++;
    // VNU x' neurons (18..25) fire from a majority vote
    if (dut.u_grid.g_node[1].u_core.u_ctrl.pot_we && dut.u_grid.g_node[1].u_core.u_ctrl.nb_spike
        && dut.u_grid.g_node[1].u_core.u_ctrl.out_addr >= 18) n_majority++;
  end

  // Spikes seen by the host, per tick since the word started.
  bit [9:0] seen [int];
  int       base;

  always @(posedge clk) begin
    if (out_valid) begin
      int t;
      t = int'(tick_count) - base;
      if (!seen.exists(t)) seen[t] = '0;
      seen[t][out_axon] = 1'b1;
    end
  end

  task automatic inject(int axon);
    @(negedge clk);
    in_valid = 1; in_axon = 8'(axon);
    @(negedge clk);
    in_valid = 0;
  endtask

  task automatic wait_ticks(int k);
    repeat (k) @(posedge clk iff tick);
  endtask

  task automatic decode(bit [7:0] r, string tag);
    gab_result_t exp;
    int t_done;
    exp = expected(r, MAXIT);
    // stop between ticks, inject the word
    run = 0;
    @(negedge clk);
    base = int'(tick_count);
    seen.delete();
    inject(1);                                   // en
    for (int n = 0; n < 8; n++) if (r[n]) inject(2 + n);
    run = 1;
    t_done = -1;
    // each tick pulse means the previous tick is complete
    while (t_done < 0 && int'(tick_count) - base <= 2 * MAXIT + 8) begin
      wait_ticks(1);
      foreach (seen[k]) if (t_done < 0 && seen[k][1]) t_done = k;
    end
    checks++;
    if (t_done != exp.tick) begin
      failures++;
      $display("FAIL %s r=%b: done in tick %0d, expected %0d", tag, r, t_done, exp.tick);
    end else begin
      bit [7:0] got;
      bit       z;
      for (int n = 0; n < 8; n++) got[n] = seen[t_done][2 + n];
      z = seen[t_done][0];
      checks += 2;
      if (got != exp.word) begin
        failures++;
        $display("FAIL %s r=%b: word %b, expected %b", tag, r, got, exp.word);
      end
      if (z != exp.zero) begin
        failures++;
        $display("FAIL %s r=%b: zero %0b, expected %0b", tag, r, z, exp.zero);
      end
    end
    if (exp.iter == 0) n_iter0++;
    else if (exp.iter > 0) n_corrected++;
    else n_limit++;
    // reset the decoder: rst_in in two consecutive ticks, then drain
    @(negedge clk);
    in_valid = 1; in_axon = 8'd0; in_delay = 4'd1;
    @(negedge clk);
    in_delay = 4'd2;
    @(negedge clk);
    in_valid = 0; in_delay = 4'd1;
    wait_ticks(12);
  endtask

  gab_result_t ex0;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (loaded);
    // the worked example of the text
    // r0..r7 = 1 0 0 0 1 1 0 0 decodes to 1 0 0 0 1 1 0 1 in iteration 1
    checks++;
    ex0 = expected(8'b0011_0001, MAXIT);
    if (ex0.word != 8'b1011_0001 || !ex0.zero || ex0.tick != 8 || ex0.iter != 1) begin
      failures++;
      $display("FAIL: reference model disagrees with the worked example");
    end
    decode(8'b0011_0001, "example");
    decode(8'b0000_0000, "codeword");
    decode(8'b0000_0100, "limit");
    $display("mechanisms: iter0=%0d corrected=%0d limit=%0d xor_spikes=%0d delay3=%0d majority=%0d",
             n_iter0, n_corrected, n_limit, n_xor, n_delay3, n_majority);
    checks++;
    if (n_iter0 == 0 || n_corrected == 0 || n_limit == 0 || n_xor == 0 || n_delay3 == 0 || n_majority == 0) begin
      failures++;
      $display("FAIL: a mechanism never ran");
    end
    checks++;
    if (dropped != 0) begin failures++; $display("FAIL: %0d packets dropped", dropped); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
