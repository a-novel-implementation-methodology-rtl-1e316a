// neuromorphic_core: one core of the neuromorphic chip.
//
// NUM_AXONS axons feed NUM_NEURONS leaky integrate-and-fire neurons through a
// configurable synaptic crossbar. Spikes for the core arrive from the local
// router (net_*) or from the host (host_*) and wait in the scheduler until
// their tick. On each tick pulse the controller runs every neuron over every
// axon through the single time-shared XOR-integrated neuron block (one clock
// per synapse, NUM_NEURONS * NUM_AXONS + 1 clocks per tick), writes the new
// potentials back and sends a packet for every neuron that fired to the
// local router (spike_out_*, valid/ready). done is high when the core has
// finished its tick and has no packet waiting.
//
// The configuration port writes one neuron (crossbar row, parameters,
// initial potential) or one axon type per cycle; it is meant to be used
// while the core is idle, before the first tick.
//
// Core organisation (axons, crossbar, neurons, Table I parameters, one
// neuron block per core) follows the paper; the split into memory, scheduler
// and controller and all interfaces are this design's choices.
module neuromorphic_core
  import ranc_pkg::*;
#(
  parameter int unsigned NUM_AXONS   = 256,
  parameter int unsigned NUM_NEURONS = 256,
  parameter int unsigned NUM_SLOTS   = 16
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           tick,
  // configuration
  input  logic                           cfg_neuron_we,
  input  logic [$clog2(NUM_NEURONS)-1:0] cfg_neuron,
  input  neuron_params_t                 cfg_params,
  input  logic [NUM_AXONS-1:0]           cfg_xbar,
  input  pot_t                           cfg_pot,
  input  logic                           cfg_axon_we,
  input  logic [$clog2(NUM_AXONS)-1:0]   cfg_axon,
  input  axon_type_t                     cfg_type,
  // spikes in
  input  logic                           net_valid,
  input  logic [$clog2(NUM_AXONS)-1:0]   net_axon,
  input  delay_t                         net_delay,
  input  logic                           host_valid,
  input  logic [$clog2(NUM_AXONS)-1:0]   host_axon,
  input  delay_t                         host_delay,
  // spikes out
  output logic                           spike_out_valid,
  output spike_pkt_t                     spike_out,
  input  logic                           spike_out_ready,
  output logic                           done
);

  localparam int unsigned NW = $clog2(NUM_NEURONS);
  localparam int unsigned AW = $clog2(NUM_AXONS);

  logic [NUM_AXONS-1:0] spikes, acc_xbar;
  logic [NW-1:0]        acc_addr, out_addr;
  logic [AW-1:0]        axon_addr;
  neuron_params_t       acc_params, out_params;
  pot_t                 acc_pot, pot_data, nb_v_next;
  axon_type_t           axon_type;
  logic                 pot_we, nb_step, nb_process_spike, nb_new_neuron, nb_spike;

  core_sram #(.NUM_AXONS(NUM_AXONS), .NUM_NEURONS(NUM_NEURONS)) u_sram (
    .clk, .cfg_neuron_we, .cfg_neuron, .cfg_params, .cfg_xbar, .cfg_pot,
    .cfg_axon_we, .cfg_axon, .cfg_type,
    .acc_addr, .acc_xbar, .acc_params, .acc_pot,
    .out_addr, .out_params, .axon_addr, .axon_type,
    .pot_we, .pot_addr(out_addr), .pot_data
  );

  scheduler #(.NUM_AXONS(NUM_AXONS), .NUM_SLOTS(NUM_SLOTS)) u_sched (
    .clk, .rst_n, .tick, .net_valid, .net_axon, .net_delay,
    .host_valid, .host_axon, .host_delay, .spikes
  );

  core_controller #(.NUM_AXONS(NUM_AXONS), .NUM_NEURONS(NUM_NEURONS)) u_ctrl (
    .clk, .rst_n, .tick, .spikes,
    .acc_addr, .acc_xbar, .out_addr, .out_params, .axon_addr,
    .pot_we, .pot_data,
    .nb_step, .nb_process_spike, .nb_new_neuron, .nb_v_next, .nb_spike,
    .pkt_valid(spike_out_valid), .pkt(spike_out), .pkt_ready(spike_out_ready),
    .done
  );

  neuron_block u_nb (
    .clk,
    .step          (nb_step),
    .weights       (acc_params.weights),
    .axon_type     (axon_type),
    .process_spike (nb_process_spike),
    .new_neuron    (nb_new_neuron),
    .v_prev        (acc_pot),
    .op_sel        (acc_params.op_sel),
    .leak          (out_params.leak),
    .thr_pos       (out_params.thr_pos),
    .thr_neg       (out_params.thr_neg),
    .rst_pos       (out_params.rst_pos),
    .rst_neg       (out_params.rst_neg),
    .v_next        (nb_v_next),
    .spike         (nb_spike)
  );

endmodule
