// neuron_block: the XOR-integrated neuron block of one core.
//
// One neuron block is shared by all neurons of a core and visits one
// (neuron, axon) pair per clock. Operand A is the neuron's weight for the
// axon's type when process_spike is high, otherwise 0. Operand B is the
// neuron's potential from the previous tick v_j(t-1) on the first axon of a
// neuron (new_neuron = 1) and the NP register (D) on every later axon. The
// M_op multiplexer passes either the sum A + B (op_sel = LIF) or, for the
// XOR-integrated neuron, A[0] ^ B[0] with all upper bits cleared
// (op_sel = XOR); the result C is stored in NP when step is high.
//
// The output stage is combinational on D = NP: D + l_j is compared with
// v_j^- (<=, select r_j^-) and then with v_j^+ (>=, select r_j^+ and spike),
// giving v_j(t) and s_j(t). The controller samples these in the cycle after
// the last axon of a neuron, which is also the first accumulate cycle of the
// next neuron, so a neuron takes exactly one clock per axon.
//
// Structure, operand names and mux order follow the paper's neuron block
// figures; the positive comparison overrides the negative one as drawn. The
// operand widths (9-bit two's complement, wrapping on overflow) are this
// design's choice: the paper leaves B(w), B(v), B(l) open. Only hard reset
// exists, as every neuron of the paper uses it.
module neuron_block
  import ranc_pkg::*;
(
  input  logic                     clk,
  input  logic                     step,          // load C into NP
  input  weight_t [NUM_TYPES-1:0]  weights,       // w_j[0..3]
  input  axon_type_t               axon_type,     // tau_i
  input  logic                     process_spike, // connected and spiking
  input  logic                     new_neuron,    // B from v_prev, not NP
  input  pot_t                     v_prev,        // v_j(t-1)
  input  op_sel_t                  op_sel,
  input  weight_t                  leak,          // l_j
  input  pot_t                     thr_pos,       // v_j^+
  input  pot_t                     thr_neg,       // v_j^-
  input  pot_t                     rst_pos,       // r_j^+
  input  pot_t                     rst_neg,       // r_j^-
  output pot_t                     v_next,        // v_j(t), valid from D
  output logic                     spike          // s_j(t), valid from D
);

  pot_t op_a, op_b, op_c, np_d, leaked, after_neg;

  // Operand A: weight selected by the axon type, gated by process_spike.
  always_comb op_a = process_spike ? pot_t'(weights[axon_type]) : '0;

  // Operand B: previous-tick potential for a new neuron, else the feedback.
  always_comb op_b = new_neuron ? v_prev : np_d;

  // M_op: adder or LSB XOR.
  always_comb begin
    if (op_sel == OP_XOR) op_c = pot_t'({1'b0, op_a[0] ^ op_b[0]});
    else                  op_c = op_a + op_b;
  end

  // NP register.
  always_ff @(posedge clk) begin
    if (step) np_d <= op_c;
  end

  // Leak, then negative and positive threshold with hard reset.
  always_comb begin
    leaked    = np_d + pot_t'(leak);
    after_neg = (leaked <= thr_neg) ? rst_neg : leaked;
    spike     = (leaked >= thr_pos);
    v_next    = spike ? rst_pos : after_neg;
  end

endmodule
