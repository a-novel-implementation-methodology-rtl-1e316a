// core_sram: the configuration and state memory of one neuromorphic core.
//
// It holds, per neuron, one row of the synaptic crossbar (bit i set when
// axon i is connected to the neuron), the neuron's static parameters and its
// potential v_j, and per axon its 2-bit type tau_i. Four read ports serve the
// core controller in the same cycle: the crossbar row, weights, op_sel and
// potential of the neuron being accumulated (acc_addr); the output-stage
// parameters and destination of the neuron being evaluated (out_addr); and
// the type of the axon being visited (axon_addr). Reads are combinational.
//
// Writes: the configuration port loads a neuron's crossbar row, parameters
// and initial potential in one cycle, or one axon type; the controller
// writes back v_j(t) through the potential port. A configuration write wins
// over a potential write in the same cycle (the potential array has a
// single write port; configuration happens only while the array is stopped).
//
// The paper describes the crossbar and the per-neuron parameter list and
// says each core is configured from memory files; the single-port-per-use
// arrays and the configuration port are this design's choice.
module core_sram
  import ranc_pkg::*;
#(
  parameter int unsigned NUM_AXONS   = 256,
  parameter int unsigned NUM_NEURONS = 256
) (
  input  logic                           clk,
  // configuration port
  input  logic                           cfg_neuron_we,
  input  logic [$clog2(NUM_NEURONS)-1:0] cfg_neuron,
  input  neuron_params_t                 cfg_params,
  input  logic [NUM_AXONS-1:0]           cfg_xbar,
  input  pot_t                           cfg_pot,
  input  logic                           cfg_axon_we,
  input  logic [$clog2(NUM_AXONS)-1:0]   cfg_axon,
  input  axon_type_t                     cfg_type,
  // accumulate-side read
  input  logic [$clog2(NUM_NEURONS)-1:0] acc_addr,
  output logic [NUM_AXONS-1:0]           acc_xbar,
  output neuron_params_t                 acc_params,
  output pot_t                           acc_pot,
  // output-stage read
  input  logic [$clog2(NUM_NEURONS)-1:0] out_addr,
  output neuron_params_t                 out_params,
  // axon type read
  input  logic [$clog2(NUM_AXONS)-1:0]   axon_addr,
  output axon_type_t                     axon_type,
  // potential write-back
  input  logic                           pot_we,
  input  logic [$clog2(NUM_NEURONS)-1:0] pot_addr,
  input  pot_t                           pot_data
);

  logic [NUM_AXONS-1:0] xbar_mem   [NUM_NEURONS];
  neuron_params_t       params_mem [NUM_NEURONS];
  pot_t                 pot_mem    [NUM_NEURONS];
  axon_type_t           type_mem   [NUM_AXONS];

  always_ff @(posedge clk) begin
    if (cfg_neuron_we) begin
      xbar_mem[cfg_neuron]   <= cfg_xbar;
      params_mem[cfg_neuron] <= cfg_params;
    end
    if (cfg_neuron_we)
      pot_mem[cfg_neuron] <= cfg_pot;
    else if (pot_we)
      pot_mem[pot_addr] <= pot_data;
    if (cfg_axon_we)
      type_mem[cfg_axon] <= cfg_type;
  end

  assign acc_xbar   = xbar_mem[acc_addr];
  assign acc_params = params_mem[acc_addr];
  assign acc_pot    = pot_mem[acc_addr];
  assign out_params = params_mem[out_addr];
  assign axon_type  = type_mem[axon_addr];

endmodule
