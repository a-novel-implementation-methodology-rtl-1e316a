// ranc_pkg: widths and types shared by the neuromorphic core, the mesh
// router and the GaB decoder mapping.
//
// A spike travels between cores as a packet that carries the remaining
// core offset (dx, dy), the axon it is aimed at in the destination core and
// the number of ticks after which that axon must see it. Each neuron of a
// core is described by a static parameter record (weights indexed by axon
// type, leak, thresholds, reset values, XOR/LIF operation select and its
// destination) and by a potential that changes every tick.
//
// Following the paper: four weights per neuron indexed by a 2-bit axon type,
// leak, positive/negative thresholds and reset values, destination core
// offset and destination axon, and the single op_select bit of the
// XOR-integrated neuron. Own choices: 9-bit two's-complement weights, leak,
// thresholds, reset values and potential (the paper gives no widths; 9 bits
// holds the largest magnitude it uses, 202), 9-bit signed core offsets, an
// 8-bit axon index (cores of up to 256 axons) and a 4-bit delivery delay in
// ticks.
package ranc_pkg;

  localparam int unsigned WEIGHT_W   = 9;   // B(w), B(l), B(v) in the neuron figures
  localparam int unsigned POT_W      = 9;   // B(v)
  localparam int unsigned OFFSET_W   = 9;   // signed dx / dy
  localparam int unsigned AXON_IDX_W = 8;   // up to 256 axons per core
  localparam int unsigned DELAY_W    = 4;   // delivery delay, 1 .. 15 ticks
  localparam int unsigned NUM_TYPES  = 4;   // axon types / weights per neuron

  typedef logic signed [WEIGHT_W-1:0] weight_t;
  typedef logic signed [POT_W-1:0]    pot_t;
  typedef logic signed [OFFSET_W-1:0] offset_t;
  typedef logic [AXON_IDX_W-1:0]      axon_idx_t;
  typedef logic [DELAY_W-1:0]         delay_t;
  typedef logic [1:0]                 axon_type_t;

  // Neuron operation selected by op_select.
  typedef enum logic {
    OP_LIF = 1'b0,   // leaky integrate and fire: accumulate weights
    OP_XOR = 1'b1    // XOR of the LSBs of A and B, upper bits cleared
  } op_sel_t;

  // Spike packet on the mesh.
  typedef struct packed {
    offset_t   dx;     // columns still to travel (+ east, - west)
    offset_t   dy;     // rows still to travel (+ south, - north)
    axon_idx_t axon;   // destination axon
    delay_t    delay;  // ticks after the sending tick at which it is used
  } spike_pkt_t;

  // Static parameters of one neuron (Table "Axon and Neuron Parameters").
  typedef struct packed {
    weight_t [NUM_TYPES-1:0] weights;   // w_j[0..3]
    weight_t                 leak;      // l_j
    pot_t                    thr_pos;   // v_j^+
    pot_t                    thr_neg;   // v_j^-
    pot_t                    rst_pos;   // r_j^+
    pot_t                    rst_neg;   // r_j^-
    op_sel_t                 op_sel;    // XOR-integrated neuron: op_select
    offset_t                 dx;        // destination core offset
    offset_t                 dy;
    axon_idx_t               dest_axon; // a_d
    delay_t                  delay;     // delivery delay in ticks
  } neuron_params_t;

endpackage
