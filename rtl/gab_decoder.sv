// gab_decoder: a Gallager-B LDPC decoder running on the neuromorphic chip.
//
// The chip is a ROWS x COLS mesh of cores whose neurons can either integrate
// and fire or, with the XOR-integrated neuron block, compute a multi-input
// XOR in one neuron and one tick. After reset the configuration loader
// writes the eight-core GaB mapping (Input, VNU, CNU, Parity, Syndrome,
// Iteration Counter, OR, Output) into the grid; loaded then rises and ticks
// start whenever run is high.
//
// Host side, spike in: in_valid with in_axon (and in_delay, normally 1)
// places one spike on an Input Core axon: 0 rst_in, 1 en, 2..9 the received
// bits r0..r7 (a spike for a 1). Spikes given before tick t is issued are
// used in tick t when their delay is 1 and they arrive while the array is
// idle between ticks.
// Spike out: out_valid/out_axon report each spike of the Output Core, in the
// tick it fires: axon 0 zero (the decoded word meets every parity check),
// 1 done, 2..9 decoded bits x'0..x'7 (only sent together with done). The
// Output Core sits in row 1 of the mesh, so only that row's east port
// carries results. tick and tick_count mark tick boundaries.
//
// With the default sizes (5 x 5 grid of 256-axon, 256-neuron cores) a tick
// takes 65,537 clocks; a word that is already a codeword is reported in
// tick 6, one corrected by iteration i in tick 6 + 2i, and a word that never
// meets the checks gets done without zero in tick 2 * MAX_ITER + 5. The
// word sent with that late done is the decision of iteration MAX_ITER - 1
// (the VNU's odd-tick decisions lag by one iteration), so use MAX_ITER >= 2.
//
// Between words the host resets the decoder by sending rst_in (axon 0) in
// two consecutive ticks (delays 1 and 2), which stops the enable token
// circulating between the VNU and CNU cores, then lets about ten ticks pass
// so that the remaining spikes die out.
//
// The mapping and the architecture are the paper's; the host ports stand in
// for the AXI4 glue of the FPGA platform, which the paper does not describe.
module gab_decoder
  import ranc_pkg::*;
#(
  parameter int unsigned ROWS        = 5,
  parameter int unsigned COLS        = 5,
  parameter int unsigned NUM_AXONS   = 256,
  parameter int unsigned NUM_NEURONS = 256,
  parameter int unsigned NUM_SLOTS   = 16,
  parameter int unsigned FIFO_DEPTH  = 4,
  parameter int unsigned MAX_ITER    = 100
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         run,
  input  logic                         in_valid,
  input  logic [$clog2(NUM_AXONS)-1:0] in_axon,
  input  delay_t                       in_delay,
  output logic                         out_valid,
  output logic [7:0]                   out_axon,
  output logic                         loaded,
  output logic                         tick,
  output logic [31:0]                  tick_count,
  output logic [31:0]                  dropped
);

  localparam int unsigned NUM_CORES = ROWS * COLS;
  localparam int unsigned CW        = (NUM_CORES > 1) ? $clog2(NUM_CORES) : 1;
  localparam int unsigned OUT_ROW   = gab_map_pkg::CORE_OUTPUT / COLS;

  logic [CW-1:0]                  cfg_core;
  logic                           cfg_neuron_we, cfg_axon_we;
  logic [$clog2(NUM_NEURONS)-1:0] cfg_neuron;
  neuron_params_t                 cfg_params;
  logic [NUM_AXONS-1:0]           cfg_xbar;
  pot_t                           cfg_pot;
  logic [$clog2(NUM_AXONS)-1:0]   cfg_axon;
  axon_type_t                     cfg_type;
  logic       [ROWS-1:0]          edge_valid;
  spike_pkt_t [ROWS-1:0]          edge_pkt;

  gab_config_loader #(
    .ROWS(ROWS), .COLS(COLS), .NUM_AXONS(NUM_AXONS), .NUM_NEURONS(NUM_NEURONS),
    .MAX_ITER(MAX_ITER)
  ) u_loader (
    .clk, .rst_n, .cfg_core, .cfg_neuron_we, .cfg_neuron, .cfg_params, .cfg_xbar,
    .cfg_pot, .cfg_axon_we, .cfg_axon, .cfg_type, .loaded
  );

  ranc_grid #(
    .ROWS(ROWS), .COLS(COLS), .NUM_AXONS(NUM_AXONS), .NUM_NEURONS(NUM_NEURONS),
    .NUM_SLOTS(NUM_SLOTS), .FIFO_DEPTH(FIFO_DEPTH)
  ) u_grid (
    .clk, .rst_n,
    .run        (run && loaded),
    .cfg_core, .cfg_neuron_we, .cfg_neuron, .cfg_params, .cfg_xbar, .cfg_pot,
    .cfg_axon_we, .cfg_axon, .cfg_type,
    .host_valid (in_valid),
    .host_core  (CW'(gab_map_pkg::CORE_INPUT)),
    .host_axon  (in_axon),
    .host_delay (in_delay),
    .out_valid  (edge_valid),
    .out_pkt    (edge_pkt),
    .out_ready  ({ROWS{1'b1}}),
    .tick, .tick_count, .dropped
  );

  assign out_valid = edge_valid[OUT_ROW];
  assign out_axon  = edge_pkt[OUT_ROW].axon;

endmodule
