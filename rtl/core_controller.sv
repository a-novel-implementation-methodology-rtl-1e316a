// core_controller: sequences one tick of a neuromorphic core.
//
// After the tick pulse it visits neuron 0 .. NUM_NEURONS-1 and, for each,
// axon 0 .. NUM_AXONS-1, one (neuron, axon) pair per clock. For each pair it
// drives process_spike (crossbar bit AND the axon's spike this tick),
// new_neuron (first axon) and the axon type to the neuron block, and steps
// the NP register. In the first cycle of neuron n it also evaluates neuron
// n-1 from the NP register: it writes v_{n-1}(t) back to the potential
// memory and, if the neuron fired, loads a spike packet (destination offset,
// axon and delay from the neuron's parameters) into the output register.
// One extra cycle after the last axon evaluates the last neuron. A tick
// therefore takes NUM_NEURONS * NUM_AXONS + 1 clocks when the network takes
// every spike at once.
//
// Output: a valid/ready spike packet to the local router. While a fired
// neuron finds the output register still full, the controller stalls
// (nothing advances, nothing is written) until the router takes the packet.
// done is high between ticks once the output register is empty.
//
// The signal names new_neuron and process_spike and the one-cycle-per-synapse
// schedule are the paper's; the state machine, the overlap of evaluation
// with the next neuron and the stall are this design's choices.
//
// pot_data is the neuron block's v_next passed straight to the potential
// memory: the controller only decides when and where it is written, so a
// netlist check sees those output bits as driven from an input. That is the
// intended write-back path.
module core_controller
  import ranc_pkg::*;
#(
  parameter int unsigned NUM_AXONS   = 256,
  parameter int unsigned NUM_NEURONS = 256
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           tick,
  // scheduler
  input  logic [NUM_AXONS-1:0]           spikes,
  // memory
  output logic [$clog2(NUM_NEURONS)-1:0] acc_addr,
  input  logic [NUM_AXONS-1:0]           acc_xbar,
  output logic [$clog2(NUM_NEURONS)-1:0] out_addr,
  input  neuron_params_t                 out_params,
  output logic [$clog2(NUM_AXONS)-1:0]   axon_addr,
  output logic                           pot_we,
  output pot_t                           pot_data,
  // neuron block
  output logic                           nb_step,
  output logic                           nb_process_spike,
  output logic                           nb_new_neuron,
  input  pot_t                           nb_v_next,
  input  logic                           nb_spike,
  // spike output
  output logic                           pkt_valid,
  output spike_pkt_t                     pkt,
  input  logic                           pkt_ready,
  output logic                           done
);

  localparam int unsigned NW = $clog2(NUM_NEURONS);
  localparam int unsigned AW = $clog2(NUM_AXONS);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_LAST} state_t;

  state_t          state;
  logic [NW-1:0]   n_idx;
  logic [AW-1:0]   a_idx;
  logic            eval, stall, last_axon, last_neuron;

  always_comb begin
    last_axon   = (a_idx == AW'(NUM_AXONS - 1));
    last_neuron = (n_idx == NW'(NUM_NEURONS - 1));
    // neuron n_idx-1 is evaluated on the first axon of neuron n_idx; in
    // S_LAST the last neuron is evaluated
    eval     = (state == S_RUN && a_idx == '0 && n_idx != '0) || (state == S_LAST);
    out_addr = (state == S_LAST) ? n_idx : n_idx - NW'(1);
    stall    = eval && nb_spike && pkt_valid && !pkt_ready;

    acc_addr         = n_idx;
    axon_addr        = a_idx;
    nb_new_neuron    = (a_idx == '0);
    nb_process_spike = (state == S_RUN) && acc_xbar[a_idx] && spikes[a_idx];
    nb_step          = (state == S_RUN) && !stall;

    pot_we   = eval && !stall;
    pot_data = nb_v_next;
    done     = (state == S_IDLE) && !pkt_valid;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      n_idx     <= '0;
      a_idx     <= '0;
      pkt_valid <= 1'b0;
      pkt       <= '0;
    end else begin
      if (pkt_valid && pkt_ready) pkt_valid <= 1'b0;
      if (eval && nb_spike && !stall) begin
        pkt_valid <= 1'b1;
        pkt.dx    <= out_params.dx;
        pkt.dy    <= out_params.dy;
        pkt.axon  <= out_params.dest_axon;
        pkt.delay <= out_params.delay;
      end
      unique case (state)
        S_IDLE: if (tick) begin
          state <= S_RUN;
          n_idx <= '0;
          a_idx <= '0;
        end
        S_RUN: if (!stall) begin
          if (last_axon) begin
            a_idx <= '0;
            if (last_neuron) state <= S_LAST;
            else             n_idx <= n_idx + NW'(1);
          end else begin
            a_idx <= a_idx + AW'(1);
          end
        end
        S_LAST: if (!stall) begin
          state <= S_IDLE;
          n_idx <= '0;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A tick may only start when the previous one has finished.
  assert property (@(posedge clk) disable iff (!rst_n) tick |-> state == S_IDLE)
    else $error("tick while the core is still busy");

endmodule
