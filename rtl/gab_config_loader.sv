// gab_config_loader: writes the GaB decoder mapping into the grid.
//
// After reset it walks every core of the grid: first every neuron (one
// configuration write per clock: crossbar row, parameters and a potential of
// zero, as the neuron model starts from v_j(0) = 0), then every axon type.
// Cores 0..7 receive the eight GaB cores of gab_map_pkg, every other core
// and every unused neuron an idle configuration that never fires. loaded
// goes high after the last write and stays high; loading takes
// NUM_CORES * (NUM_NEURONS + NUM_AXONS) clocks.
//
// The configuration contents are the paper's mapping (see gab_map_pkg); the
// paper loads them from memory files when the FPGA image is built, whereas
// here a small state machine writes them at run time from a table computed
// by functions, which is this design's choice. MAX_ITER sets the
// iteration-counter threshold 2 * (MAX_ITER - 1) + 4; it must stay at or
// below 126 for the threshold to fit the 9-bit potential.
//
// cfg_pot is constant zero: every neuron of the mapping starts from a zero
// potential. The port stays so that the same configuration path can load
// other networks with preset potentials.
module gab_config_loader
  import ranc_pkg::*;
  import gab_map_pkg::*;
#(
  parameter int unsigned ROWS        = 5,
  parameter int unsigned COLS        = 5,
  parameter int unsigned NUM_AXONS   = 256,
  parameter int unsigned NUM_NEURONS = 256,
  parameter int unsigned MAX_ITER    = 100,
  localparam int unsigned NUM_CORES  = ROWS * COLS,
  localparam int unsigned CW         = (NUM_CORES > 1) ? $clog2(NUM_CORES) : 1
) (
  input  logic                           clk,
  input  logic                           rst_n,
  output logic [CW-1:0]                  cfg_core,
  output logic                           cfg_neuron_we,
  output logic [$clog2(NUM_NEURONS)-1:0] cfg_neuron,
  output neuron_params_t                 cfg_params,
  output logic [NUM_AXONS-1:0]           cfg_xbar,
  output pot_t                           cfg_pot,
  output logic                           cfg_axon_we,
  output logic [$clog2(NUM_AXONS)-1:0]   cfg_axon,
  output axon_type_t                     cfg_type,
  output logic                           loaded
);

  localparam int unsigned NW = $clog2(NUM_NEURONS);
  localparam int unsigned AW = $clog2(NUM_AXONS);

  typedef enum logic [1:0] {L_NEURONS, L_AXONS, L_DONE} lstate_t;

  lstate_t       state;
  logic [CW-1:0] core;
  logic [NW-1:0] neuron;
  logic [AW-1:0] axon;
  neuron_cfg_t   ncfg;

  always_comb begin
    ncfg = gab_neuron(int'(core), int'(neuron), int'(COLS), int'(MAX_ITER));
    cfg_core      = core;
    cfg_neuron_we = (state == L_NEURONS);
    cfg_neuron    = neuron;
    cfg_params    = ncfg.p;
    cfg_xbar      = ncfg.xbar[NUM_AXONS-1:0];
    cfg_pot       = '0;
    cfg_axon_we   = (state == L_AXONS);
    cfg_axon      = axon;
    cfg_type      = gab_axon_type(int'(core), int'(axon));
    loaded        = (state == L_DONE);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= L_NEURONS;
      core   <= '0;
      neuron <= '0;
      axon   <= '0;
    end else begin
      unique case (state)
        L_NEURONS: begin
          if (neuron == NW'(NUM_NEURONS - 1)) begin
            neuron <= '0;
            if (core == CW'(NUM_CORES - 1)) begin
              core  <= '0;
              state <= L_AXONS;
            end else begin
              core <= core + CW'(1);
            end
          end else begin
            neuron <= neuron + NW'(1);
          end
        end
        L_AXONS: begin
          if (axon == AW'(NUM_AXONS - 1)) begin
            axon <= '0;
            if (core == CW'(NUM_CORES - 1)) state <= L_DONE;
            else                            core  <= core + CW'(1);
          end else begin
            axon <= axon + AW'(1);
          end
        end
        default: state <= L_DONE;
      endcase
    end
  end

  initial begin
    assert (MAX_ITER >= 1 && MAX_ITER <= 126) else $error("MAX_ITER out of range");
    assert (NUM_CORES >= NUM_GAB_CORES) else $error("grid too small for the eight GaB cores");
    assert (NUM_AXONS >= 27 && NUM_NEURONS >= 26) else $error("cores too small for the VNU Core");
  end

endmodule
