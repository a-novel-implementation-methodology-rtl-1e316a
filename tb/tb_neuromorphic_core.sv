// tb_neuromorphic_core: self-checking test of one neuromorphic core (core
// memory, scheduler, controller and neuron block together).
//
// Uses a 16-axon, 8-neuron core. Random neurons (LIF and XOR, random
// crossbar rows, axon types, weights, leak and thresholds) are loaded
// through the configuration port. For 60 ticks the host writes random
// axon spikes with delay 1 (used in the next tick) or 2, a tick is given,
// and the test checks against a model of the core:
//   - the outgoing packets (destination offset, axon, delay) of exactly the
//     neurons that fire, in neuron order;
//   - every neuron's stored potential after the tick;
//   - the processing time: one clock per synapse, so a tick takes
//     NUM_NEURONS * NUM_AXONS + 1 cycles from tick to done when the output
//     is never blocked (the paper's rate of one synapse per clock).
// In some ticks spike_out_ready is held low for a while; the core must stall
// without losing or duplicating a packet.
module tb_neuromorphic_core;
  import ranc_pkg::*;

  localparam int A = 16, N = 8;

  logic clk = 0, rst_n = 0, tick = 0;
  logic cfg_neuron_we = 0, cfg_axon_we = 0;
  logic [$clog2(N)-1:0] cfg_neuron = '0;
  neuron_params_t cfg_params = '0;
  logic [A-1:0] cfg_xbar = '0;
  pot_t cfg_pot = '0;
  logic [$clog2(A)-1:0] cfg_axon = '0;
  axon_type_t cfg_type = '0;
  logic net_valid = 0, host_valid = 0;
  logic [$clog2(A)-1:0] net_axon = '0, host_axon = '0;
  delay_t net_delay = '0, host_delay = '0;
  logic spike_out_valid, spike_out_ready = 1, done;
  spike_pkt_t spike_out;

  neuron_params_t mp [N];
  logic [A-1:0]   mx [N];
  pot_t           mv [N];
  axon_type_t     mt [A];
  logic [A-1:0]   pending [int];
  spike_pkt_t     exp_pkts [$];

  int checks = 0, failures = 0, ticks = 0, stalls = 0, xor_fired = 0;
  bit last_fired;

  neuromorphic_core #(.NUM_AXONS(A), .NUM_NEURONS(N), .NUM_SLOTS(16)) dut (.*);

  always #5 clk = ~clk;

  // collect packets
  always @(posedge clk) if (rst_n && spike_out_valid && spike_out_ready) begin
    checks++;
    if (exp_pkts.size() == 0 || spike_out != exp_pkts[0]) begin
      failures++; $display("FAIL tick %0d: unexpected packet %p", ticks, spike_out);
    end else void'(exp_pkts.pop_front());
  end
  always @(posedge clk) if (rst_n && spike_out_valid && !spike_out_ready) stalls++;

  // model of one tick
  task automatic model_tick(logic [A-1:0] sp);
    for (int j = 0; j < N; j++) begin
      pot_t c, a, lk;
      bit s;
      for (int i = 0; i < A; i++) begin
        a = (mx[j][i] && sp[i]) ? pot_t'(mp[j].weights[mt[i]]) : '0;
        if (mp[j].op_sel == OP_XOR) c = pot_t'({1'b0, a[0] ^ ((i == 0) ? mv[j][0] : c[0])});
        else                        c = a + ((i == 0) ? mv[j] : c);
      end
      lk = c + pot_t'(mp[j].leak);
      s  = (lk >= mp[j].thr_pos);
      mv[j] = s ? mp[j].rst_pos : ((lk <= mp[j].thr_neg) ? mp[j].rst_neg : lk);
      if (j == N - 1) last_fired = s;
      if (s) begin
        exp_pkts.push_back('{dx: mp[j].dx, dy: mp[j].dy, axon: mp[j].dest_axon, delay: mp[j].delay});
        if (mp[j].op_sel == OP_XOR) xor_fired++;
      end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int j = 0; j < N; j++) begin
      @(negedge clk);
      cfg_neuron_we = 1; cfg_neuron = j;
      for (int k = 0; k < NUM_TYPES; k++) cfg_params.weights[k] = weight_t'($urandom_range(0, 8)) - 3;
      cfg_params.leak      = weight_t'($urandom_range(0, 2)) - 1;
      cfg_params.thr_pos   = pot_t'($urandom_range(1, 6));
      cfg_params.thr_neg   = -pot_t'($urandom_range(0, 6));
      cfg_params.rst_pos   = '0;
      cfg_params.rst_neg   = '0;
      cfg_params.op_sel    = (j % 3 == 2) ? OP_XOR : OP_LIF;
      cfg_params.dx        = offset_t'($urandom_range(0, 6)) - 3;
      cfg_params.dy        = offset_t'($urandom_range(0, 6)) - 3;
      cfg_params.dest_axon = axon_idx_t'($urandom);
      cfg_params.delay     = delay_t'($urandom_range(1, 15));
      cfg_xbar = A'($urandom);
      cfg_pot  = '0;
      mp[j] = cfg_params; mx[j] = cfg_xbar; mv[j] = '0;
    end
    for (int i = 0; i < A; i++) begin
      @(negedge clk);
      cfg_neuron_we = 0; cfg_axon_we = 1; cfg_axon = i; cfg_type = axon_type_t'($urandom);
      mt[i] = cfg_type;
    end
    @(negedge clk);
    cfg_axon_we = 0;

    for (int t = 1; t <= 60; t++) begin
      int cyc;
      bit block;
      // host writes spikes for this tick (delay 1) and the next (delay 2)
      for (int k = 0; k < 6; k++) begin
        int d;
        d = $urandom_range(1, 2);
        @(negedge clk);
        host_valid = 1; host_axon = $urandom_range(0, A - 1); host_delay = delay_t'(d);
        if (!pending.exists(ticks + d)) pending[ticks + d] = '0;
        pending[ticks + d][host_axon] = 1'b1;
      end
      @(negedge clk);
      host_valid = 0;
      block = (t % 4 == 0);
      model_tick(pending.exists(ticks + 1) ? pending[ticks + 1] : '0);
      tick = 1;
      @(negedge clk);
      tick = 0;
      ticks++;
      cyc = 1;
      if (block) begin
        spike_out_ready = 0;
        repeat (3 * A) begin @(negedge clk); cyc++; end
        spike_out_ready = 1;
      end
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      // cyc counts the clock edges from the one that samples tick to the
      // one at which done is seen high: N * A accumulate cycles, one cycle
      // for the last neuron's output stage, one to return to idle, and one
      // more if the last neuron's packet still has to leave
      if (!block) begin
        checks++;
        if (cyc != N * A + 2 + int'(last_fired)) begin
          failures++; $display("FAIL tick %0d: %0d cycles, expected %0d", ticks, cyc, N * A + 2 + int'(last_fired));
        end
      end
      checks++;
      if (exp_pkts.size() != 0) begin failures++; $display("FAIL tick %0d: %0d packets missing", ticks, exp_pkts.size()); exp_pkts.delete(); end
      for (int j = 0; j < N; j++) begin
        checks++;
        if (dut.u_sram.pot_mem[j] !== mv[j]) begin
          failures++; $display("FAIL tick %0d neuron %0d: v=%0d expected %0d", ticks, j, dut.u_sram.pot_mem[j], mv[j]);
        end
      end
    end
    checks++;
    if (stalls == 0 || xor_fired == 0) begin failures++; $display("FAIL: stall (%0d) or XOR spike (%0d) never seen", stalls, xor_fired); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
