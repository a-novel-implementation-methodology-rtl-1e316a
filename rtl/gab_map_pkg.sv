// gab_map_pkg: the Gallager-B (GaB) decoder mapped onto eight cores.
//
// The code is the 8-bit running example: parity-check matrix H of M = 4 rows
// and N = 8 columns, every variable node of degree 2 and every check node
// of degree 4. The functions below give, for any core and neuron of the
// grid, the crossbar row and parameters that realise the decoder, and for
// any axon its type. They are evaluated by gab_config_loader after reset.
//
// Core  name               axons                                  neurons
//  0    Input              rst_in, en, r0..r7, rfb0..rfb7          init_it, init_v, r_fb0..7, r_v0..7, rst_v, rst_it
//  1    VNU                rst_v, en_v, 16 c_m v_n, init_v, r0..7  en_c, 16 v_n c_m, en_p, x'0..7
//  2    CNU                en_c, 16 v_n c_m                        en_v, 16 c_m v_n (XOR)
//  3    Parity             en_p, x'0..7                            en_s, s0..s3 (XOR), x'0..7 (delay 3)
//  4    Syndrome           en_s, s0..s3                            zero (4-input NOR AND en_s)
//  5    Iteration counter  i, init_it, rst_it                      i_max, i_fb
//  6    OR                 zero, i_max                             zero, done
//  7    Output             zero, done, x'0..7                      zero, done, x'0..7 (AND done)
//
// v_n c_m edges are numbered row by row of H (c0's four variables, then
// c1's, ...); c_m v_n edges variable by variable (v0's two checks, then
// v1's, ...). Core k sits at column k mod COLS, row k / COLS; the Output
// Core sends its spikes off the east edge of its row, its neuron index
// becoming the axon field of the packet.
//
// Taken from the paper: H, the core list and their axon and neuron order,
// every synaptic connection shown in its core figures, axon types, weights,
// thresholds, leaks, reset values and op types from its configuration
// tables, the iteration-counter threshold 2*(maxIter-1)+4, and the
// two-tick extra delay of the Parity Core relay neurons. This design's
// choices: negative threshold and negative reset 0 for every neuron
// (potentials below zero return to zero), delay 1 for every other neuron,
// the Output Core's AND neurons (weights 1, leak -1, threshold 1, the
// paper's 2-input AND), and idle neurons with threshold +255 that never
// fire. The Output Core also relays done, as its figure shows.
package gab_map_pkg;
  import ranc_pkg::*;

  localparam int unsigned M  = 4;   // check nodes
  localparam int unsigned N  = 8;   // variable nodes
  localparam int unsigned DV = 2;   // variable degree
  localparam int unsigned DC = 4;   // check degree
  localparam int unsigned E  = M * DC;

  // H, row m bit n (bit 0 = v0), as printed left to right.
  localparam logic [N-1:0] H [M] = '{
    8'b1001_1010,   // c0: 0 1 0 1 1 0 0 1
    8'b0010_0111,   // c1: 1 1 1 0 0 1 0 0
    8'b1110_0100,   // c2: 0 0 1 0 0 1 1 1
    8'b0101_1001    // c3: 1 0 0 1 1 0 1 0
  };

  localparam int unsigned CORE_INPUT = 0, CORE_VNU = 1, CORE_CNU = 2, CORE_PARITY = 3,
                          CORE_SYNDROME = 4, CORE_ITER = 5, CORE_OR = 6, CORE_OUTPUT = 7;
  localparam int unsigned NUM_GAB_CORES = 8;

  // Output Core neuron / host axon numbering.
  localparam int unsigned OUT_ZERO = 0, OUT_DONE = 1, OUT_X0 = 2;

  // Input Core axon numbering, used by the host.
  localparam int unsigned IN_RST = 0, IN_EN = 1, IN_R0 = 2, IN_RFB0 = 10;

  typedef struct packed {
    logic [255:0]   xbar;
    neuron_params_t p;
  } neuron_cfg_t;

  // position of variable n among the variables of check m (-1: not connected)
  function automatic int pos_in_row(int m, int n);
    int k = 0;
    for (int t = 0; t < N; t++) begin
      if (H[m][t]) begin
        if (t == n) return k;
        k++;
      end
    end
    return -1;
  endfunction

  // position of check m among the checks of variable n (-1: not connected)
  function automatic int pos_in_col(int m, int n);
    int k = 0;
    for (int t = 0; t < M; t++) begin
      if (H[t][n]) begin
        if (t == m) return k;
        k++;
      end
    end
    return -1;
  endfunction

  function automatic int vc_edge(int n, int m);   // v_n c_m
    return m * DC + pos_in_row(m, n);
  endfunction

  function automatic int cv_edge(int m, int n);   // c_m v_n
    return n * DV + pos_in_col(m, n);
  endfunction

  function automatic int iter_threshold(int max_iter);
    return ((max_iter - 1) * 2) + 4;
  endfunction

  // Parameters of a neuron that never fires.
  function automatic neuron_params_t idle_params();
    neuron_params_t p;
    p         = '0;
    p.thr_pos = pot_t'(255);
    p.delay   = delay_t'(1);
    return p;
  endfunction

  function automatic neuron_params_t relay(int w0, int w1, int w2, int leak, int thr,
                                           op_sel_t op, int src, int dst, int dst_axon,
                                           int cols, int delay);
    neuron_params_t p;
    p            = '0;
    p.weights[0] = weight_t'(w0);
    p.weights[1] = weight_t'(w1);
    p.weights[2] = weight_t'(w2);
    p.weights[3] = weight_t'(1);
    p.leak       = weight_t'(leak);
    p.thr_pos    = pot_t'(thr);
    p.op_sel     = op;
    p.dx         = offset_t'((dst % cols) - (src % cols));
    p.dy         = offset_t'((dst / cols) - (src / cols));
    p.dest_axon  = axon_idx_t'(dst_axon);
    p.delay      = delay_t'(delay);
    return p;
  endfunction

  function automatic neuron_cfg_t gab_neuron(int core, int j, int cols, int max_iter);
    neuron_cfg_t c;
    int thr;
    c.xbar = '0;
    c.p    = idle_params();
    unique case (core)
      CORE_INPUT: begin
        if (j <= 1) begin                       // init_it, init_v
          c.xbar[IN_RST] = 1'b1;
          c.xbar[IN_EN]  = 1'b1;
          c.p = (j == 0) ? relay(1, -1, 1, 0, 1, OP_LIF, core, CORE_ITER, 1, cols, 1)
                         : relay(1, -1, 1, 0, 1, OP_LIF, core, CORE_VNU, 18, cols, 1);
        end else if (j < 18) begin              // r_fb (2..9), r_v (10..17)
          int n = (j - 2) % N;
          c.xbar[IN_RST]      = 1'b1;
          c.xbar[IN_R0 + n]   = 1'b1;
          c.xbar[IN_RFB0 + n] = 1'b1;
          c.p = (j < 10) ? relay(1, -1, 1, 0, 1, OP_LIF, core, CORE_INPUT, IN_RFB0 + n, cols, 1)
                         : relay(1, -1, 1, 0, 1, OP_LIF, core, CORE_VNU, 19 + n, cols, 1);
        end else if (j == 18) begin             // rst_v
          c.xbar[IN_RST] = 1'b1;
          c.p = relay(1, 1, 1, 0, 1, OP_LIF, core, CORE_VNU, 0, cols, 1);
        end else if (j == 19) begin             // rst_it
          c.xbar[IN_RST] = 1'b1;
          c.p = relay(1, 1, 1, 0, 1, OP_LIF, core, CORE_ITER, 2, cols, 1);
        end
      end
      CORE_VNU: begin
        // axons: 0 rst_v, 1 en_v, 2+cv c_m v_n, 18 init_v, 19+n r_n
        if (j == 0 || j == 17) begin            // en_c, en_p
          c.xbar[0] = 1'b1; c.xbar[1] = 1'b1; c.xbar[18] = 1'b1;
          c.p = (j == 0) ? relay(1, 2, -2, 0, 1, OP_LIF, core, CORE_CNU, 0, cols, 1)
                         : relay(1, 2, -2, 0, 1, OP_LIF, core, CORE_PARITY, 0, cols, 1);
        end else if (j <= E) begin              // v_n c_m
          int e = j - 1;
          int m = e / DC;
          int n = 0;
          for (int t = 0; t < N; t++) if (H[m][t] && pos_in_row(m, t) == e % DC) n = t;
          c.xbar[0] = 1'b1; c.xbar[18] = 1'b1; c.xbar[19 + n] = 1'b1;
          for (int mm = 0; mm < M; mm++)
            if (H[mm][n] && mm != m) c.xbar[2 + cv_edge(mm, n)] = 1'b1;
          c.p = relay(1, 2, -2, -1, 1, OP_LIF, core, CORE_CNU, 1 + e, cols, 1);
        end else if (j >= 18 && j < 18 + N) begin  // x'_n
          int n = j - 18;
          c.xbar[0] = 1'b1; c.xbar[18] = 1'b1; c.xbar[19 + n] = 1'b1;
          for (int mm = 0; mm < M; mm++)
            if (H[mm][n]) c.xbar[2 + cv_edge(mm, n)] = 1'b1;
          c.p = relay(1, 1, -2, -1, 1, OP_LIF, core, CORE_PARITY, 1 + n, cols, 1);
        end
      end
      CORE_CNU: begin
        // axons: 0 en_c, 1+e v_n c_m
        if (j == 0) begin                       // en_v
          c.xbar[0] = 1'b1;
          c.p = relay(1, 1, 1, 0, 1, OP_LIF, core, CORE_VNU, 1, cols, 1);
        end else if (j <= E) begin              // c_m v_n, XOR of the other d_c - 1
          int q = j - 1;
          int n = q / DV;
          int m = 0;
          for (int t = 0; t < M; t++) if (H[t][n] && pos_in_col(t, n) == q % DV) m = t;
          for (int t = 0; t < N; t++)
            if (H[m][t] && t != n) c.xbar[1 + vc_edge(t, m)] = 1'b1;
          c.p = relay(1, 1, 1, 0, 1, OP_XOR, core, CORE_VNU, 2 + q, cols, 1);
        end
      end
      CORE_PARITY: begin
        // axons: 0 en_p, 1+n x'_n
        if (j == 0) begin                       // en_s
          c.xbar[0] = 1'b1;
          c.p = relay(1, 1, 1, 0, 1, OP_LIF, core, CORE_SYNDROME, 0, cols, 1);
        end else if (j <= M) begin              // s_m = XOR of row m
          int m = j - 1;
          for (int t = 0; t < N; t++) if (H[m][t]) c.xbar[1 + t] = 1'b1;
          c.p = relay(1, 1, 1, 0, 1, OP_XOR, core, CORE_SYNDROME, 1 + m, cols, 1);
        end else if (j <= M + N) begin          // x'_n relay, two ticks later
          int n = j - 1 - M;
          c.xbar[1 + n] = 1'b1;
          c.p = relay(1, 1, 1, 0, 1, OP_LIF, core, CORE_OUTPUT, OUT_X0 + n, cols, 3);
        end
      end
      CORE_SYNDROME: begin
        // axons: 0 en_s (type 0), 1+m s_m (type 1)
        if (j == 0) begin
          for (int a = 0; a <= M; a++) c.xbar[a] = 1'b1;
          c.p = relay(1, -1, 1, 0, 1, OP_LIF, core, CORE_OR, 0, cols, 1);
        end
      end
      CORE_ITER: begin
        // axons: 0 i, 1 init_it (type 0), 2 rst_it (type 1)
        thr = iter_threshold(max_iter);
        if (j <= 1) begin
          c.xbar[0] = 1'b1; c.xbar[1] = 1'b1; c.xbar[2] = 1'b1;
          c.p = (j == 0) ? relay(1, -thr, 1, 0, thr, OP_LIF, core, CORE_OR, 1, cols, 1)   // i_max
                         : relay(1, -1, 1, 0, 1, OP_LIF, core, CORE_ITER, 0, cols, 1);    // i_fb
        end
      end
      CORE_OR: begin
        // axons: 0 zero, 1 i_max
        if (j == 0) begin                       // zero relay
          c.xbar[0] = 1'b1;
          c.p = relay(1, 1, 1, 0, 1, OP_LIF, core, CORE_OUTPUT, 0, cols, 1);
        end else if (j == 1) begin              // done = zero OR i_max
          c.xbar[0] = 1'b1; c.xbar[1] = 1'b1;
          c.p = relay(1, 1, 1, 0, 1, OP_LIF, core, CORE_OUTPUT, 1, cols, 1);
        end
      end
      CORE_OUTPUT: begin
        // axons: 0 zero, 1 done, 2+n x'_n; spikes leave the east edge
        if (j < 2 + N) begin
          int dst_x = cols;                     // one column past the edge
          int leak  = (j >= 2) ? -1 : 0;
          if (j == 0)      c.xbar[0] = 1'b1;
          else if (j == 1) c.xbar[1] = 1'b1;
          else begin
            c.xbar[1] = 1'b1;
            c.xbar[j] = 1'b1;
          end
          c.p = relay(1, 1, 1, leak, 1, OP_LIF, core, core, j, cols, 1);
          c.p.dx = offset_t'(dst_x - (core % cols));
        end
      end
      default: ;
    endcase
    return c;
  endfunction

  function automatic axon_type_t gab_axon_type(int core, int a);
    unique case (core)
      CORE_INPUT:    return (a == IN_RST) ? 2'd1 : 2'd0;
      CORE_VNU:      return (a == 0) ? 2'd2 : (a >= 19) ? 2'd1 : 2'd0;
      CORE_SYNDROME: return (a >= 1) ? 2'd1 : 2'd0;
      CORE_ITER:     return (a == 2) ? 2'd1 : 2'd0;
      default:       return 2'd0;
    endcase
  endfunction

endpackage
