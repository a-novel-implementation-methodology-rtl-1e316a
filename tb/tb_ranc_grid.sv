// tb_ranc_grid: self-checking test of the core array.
//
// Uses a 2 x 3 grid of 16-axon, 8-neuron cores. In every core, neuron j
// listens to axon j alone and fires whenever it spikes (a relay); its
// packet goes to a random core of the grid (any distance, including
// itself), out of the east edge, or off the west edge (dropped), with a
// random destination axon and a delay of 1..3 ticks. The host injects
// random spikes into core 0 between ticks. A tick-level model propagates
// the spikes: a relay that fires in tick t delivers to its target axon in
// tick t + delay. The test checks, per tick, the packets leaving the east
// edge (row and axon), the count of dropped packets, and that tick_count
// advances once per tick. The east outputs apply random back-pressure;
// the next tick must wait until the network has drained.
module tb_ranc_grid;
  import ranc_pkg::*;

  localparam int ROWS = 2, COLS = 3, A = 16, N = 8, NC = ROWS * COLS, CW = 3;
  localparam int TICKS = 40;

  logic clk = 0, rst_n = 0, run = 0;
  logic [CW-1:0] cfg_core = '0, host_core = '0;
  logic cfg_neuron_we = 0, cfg_axon_we = 0, host_valid = 0;
  logic [$clog2(N)-1:0] cfg_neuron = '0;
  neuron_params_t cfg_params = '0;
  logic [A-1:0] cfg_xbar = '0;
  pot_t cfg_pot = '0;
  logic [$clog2(A)-1:0] cfg_axon = '0, host_axon = '0;
  axon_type_t cfg_type = '0;
  delay_t host_delay = 4'd1;
  logic [ROWS-1:0] out_valid, out_ready = '1;
  spike_pkt_t [ROWS-1:0] out_pkt;
  logic tick;
  logic [31:0] tick_count, dropped;

  // relay table: target kind (0 core, 1 east, 2 west), core, axon, delay
  int tgt_kind [NC][N], tgt_core [NC][N], tgt_axon [NC][N], tgt_delay [NC][N];
  bit [N-1:0] due [int][NC];   // [tick][core] axons due
  int exp_out [int], got_out [int];
  int exp_drop = 0, checks = 0, failures = 0, east_total = 0, internal = 0;

  ranc_grid #(.ROWS(ROWS), .COLS(COLS), .NUM_AXONS(A), .NUM_NEURONS(N), .NUM_SLOTS(16), .FIFO_DEPTH(4)) dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) begin
    for (int r = 0; r < ROWS; r++) if (rst_n && out_valid[r] && out_ready[r]) begin
      int key;
      key = int'(tick_count) * 1000 + r * 100 + int'(out_pkt[r].axon);
      got_out[key] = got_out.exists(key) ? got_out[key] + 1 : 1;
    end
  end

  function automatic void add_due(int t, int k, int a);
    if (!due.exists(t)) for (int c = 0; c < NC; c++) due[t][c] = '0;
    due[t][k][a] = 1'b1;
  endfunction

  function automatic void model_tick(int t);
    if (!due.exists(t)) return;
    for (int k = 0; k < NC; k++)
      for (int j = 0; j < N; j++) if (due[t][k][j]) begin
        case (tgt_kind[k][j])
          0: begin add_due(t + tgt_delay[k][j], tgt_core[k][j], tgt_axon[k][j]); internal++; end
          1: begin
            int key;
            key = t * 1000 + (k / COLS) * 100 + tgt_axon[k][j];
            exp_out[key] = exp_out.exists(key) ? exp_out[key] + 1 : 1;
            east_total++;
          end
          default: exp_drop++;
        endcase
      end
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    // configure relays
    for (int k = 0; k < NC; k++) begin
      for (int j = 0; j < N; j++) begin
        int x, y, r;
        x = k % COLS; y = k / COLS;
        @(negedge clk);
        r = $urandom_range(0, 9);
        tgt_kind[k][j]  = (r < 7) ? 0 : (r < 9) ? 1 : 2;
        tgt_core[k][j]  = $urandom_range(0, NC - 1);
        tgt_axon[k][j]  = $urandom_range(0, N - 1);
        tgt_delay[k][j] = $urandom_range(1, 3);
        cfg_params = '0;
        cfg_params.weights[0] = 9'sd1;
        cfg_params.thr_pos    = 9'sd1;
        cfg_params.thr_neg    = -9'sd256;
        cfg_params.dest_axon  = axon_idx_t'(tgt_axon[k][j]);
        cfg_params.delay      = delay_t'(tgt_delay[k][j]);
        case (tgt_kind[k][j])
          0: begin
            cfg_params.dx = offset_t'(tgt_core[k][j] % COLS - x);
            cfg_params.dy = offset_t'(tgt_core[k][j] / COLS - y);
          end
          1: cfg_params.dx = offset_t'(COLS - x);
          default: cfg_params.dx = offset_t'(-(x + 1));
        endcase
        cfg_core = CW'(k); cfg_neuron_we = 1; cfg_neuron = j;
        cfg_xbar = A'(1) << j; cfg_pot = '0;
      end
      @(negedge clk);
      cfg_neuron_we = 0;
      for (int i = 0; i < A; i++) begin
        @(negedge clk);
        cfg_axon_we = 1; cfg_axon = i; cfg_type = '0;
      end
      @(negedge clk);
      cfg_axon_we = 0;
    end

    // run, injecting into core 0 between ticks
    run = 1;
    while (int'(tick_count) < TICKS) begin
      @(negedge clk);
      out_ready = ROWS'($urandom);
      host_valid = 0;
      if (!tick && $urandom_range(0, 59) == 0 && int'(tick_count) < TICKS - 5) begin
        host_valid = 1;
        host_axon  = $urandom_range(0, N - 1);
        host_delay = delay_t'($urandom_range(1, 2));
        add_due(int'(tick_count) + int'(host_delay), 0, host_axon);
      end
    end
    host_valid = 0;
    @(negedge clk);
    run = 0;
    out_ready = '1;
    repeat (3 * N * A) @(negedge clk);

    for (int t = 1; t <= TICKS; t++) model_tick(t);
    foreach (exp_out[key]) begin
      checks++;
      if (!got_out.exists(key) || got_out[key] != exp_out[key]) begin
        failures++; $display("FAIL: tick %0d row %0d axon %0d: %0d packets, expected %0d",
                             key / 1000, (key / 100) % 10, key % 100, got_out.exists(key) ? got_out[key] : 0, exp_out[key]);
      end
    end
    foreach (got_out[key]) if (!exp_out.exists(key)) begin
      checks++; failures++;
      $display("FAIL: unexpected packet tick %0d row %0d axon %0d", key / 1000, (key / 100) % 10, key % 100);
    end
    checks++;
    if (int'(dropped) != exp_drop) begin failures++; $display("FAIL: dropped %0d, expected %0d", dropped, exp_drop); end
    checks++;
    if (tick_count != 32'(TICKS)) begin failures++; $display("FAIL: tick_count %0d", tick_count); end
    checks++;
    if (east_total == 0 || internal == 0 || exp_drop == 0) begin
      failures++; $display("FAIL: traffic too thin (east %0d internal %0d dropped %0d)", east_total, internal, exp_drop);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #50_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
