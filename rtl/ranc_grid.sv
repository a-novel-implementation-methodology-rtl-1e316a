// ranc_grid: the neuromorphic chip, a ROWS x COLS mesh of cores.
//
// Core k sits at column x = k mod COLS, row y = k / COLS, next to its own
// router; routers are joined north/east/south/west. A neuron's spike packet
// enters the mesh at its core's router and travels by its destination
// offset, dimension-order, to the scheduler of the destination core. A
// packet whose offset points past the east edge of the mesh leaves the chip
// on that row's east port (out_*), which is how results reach the host; the
// axon field then tells the host which output it is. Packets that run off
// the north, south or west edge are dropped and counted in dropped.
//
// The host writes configuration into one core at a time (cfg_core) and
// injects spikes straight into a core's scheduler (host_*). The tick
// generator issues a tick whenever every core is done, every router is
// empty and run is high.
//
// The mesh of cores and the tick come from the paper; the edge behaviour,
// host ports and the core numbering are this design's choices. The default
// 5 x 5 grid and 256 x 256 cores are the sizes the paper evaluates.
module ranc_grid
  import ranc_pkg::*;
#(
  parameter int unsigned ROWS        = 5,
  parameter int unsigned COLS        = 5,
  parameter int unsigned NUM_AXONS   = 256,
  parameter int unsigned NUM_NEURONS = 256,
  parameter int unsigned NUM_SLOTS   = 16,
  parameter int unsigned FIFO_DEPTH  = 4,
  localparam int unsigned NUM_CORES  = ROWS * COLS,
  localparam int unsigned CW         = (NUM_CORES > 1) ? $clog2(NUM_CORES) : 1
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           run,
  // configuration
  input  logic [CW-1:0]                  cfg_core,
  input  logic                           cfg_neuron_we,
  input  logic [$clog2(NUM_NEURONS)-1:0] cfg_neuron,
  input  neuron_params_t                 cfg_params,
  input  logic [NUM_AXONS-1:0]           cfg_xbar,
  input  pot_t                           cfg_pot,
  input  logic                           cfg_axon_we,
  input  logic [$clog2(NUM_AXONS)-1:0]   cfg_axon,
  input  axon_type_t                     cfg_type,
  // host spike injection
  input  logic                           host_valid,
  input  logic [CW-1:0]                  host_core,
  input  logic [$clog2(NUM_AXONS)-1:0]   host_axon,
  input  delay_t                         host_delay,
  // east-edge spike outputs, one per row
  output logic       [ROWS-1:0]          out_valid,
  output spike_pkt_t [ROWS-1:0]          out_pkt,
  input  logic       [ROWS-1:0]          out_ready,
  // tick
  output logic                           tick,
  output logic [31:0]                    tick_count,
  output logic [31:0]                    dropped
);

  localparam int unsigned P_LOCAL = 0, P_NORTH = 1, P_EAST = 2, P_SOUTH = 3, P_WEST = 4;

  logic       [NUM_CORES-1:0][4:0] r_in_valid, r_in_ready, r_out_valid, r_out_ready;
  spike_pkt_t [NUM_CORES-1:0][4:0] r_in_pkt, r_out_pkt;
  logic       [NUM_CORES-1:0]      core_done, router_idle;
  logic       [COLS-1:0][1:0]      drop_col;
  logic       [ROWS-1:0]           drop_w;

  for (genvar k = 0; k < NUM_CORES; k++) begin : g_node
    localparam int unsigned X = k % COLS;
    localparam int unsigned Y = k / COLS;

    logic       core_out_valid;
    spike_pkt_t core_out;

    neuromorphic_core #(
      .NUM_AXONS(NUM_AXONS), .NUM_NEURONS(NUM_NEURONS), .NUM_SLOTS(NUM_SLOTS)
    ) u_core (
      .clk, .rst_n, .tick,
      .cfg_neuron_we (cfg_neuron_we && cfg_core == CW'(k)),
      .cfg_neuron, .cfg_params, .cfg_xbar, .cfg_pot,
      .cfg_axon_we   (cfg_axon_we && cfg_core == CW'(k)),
      .cfg_axon, .cfg_type,
      .net_valid     (r_out_valid[k][P_LOCAL]),
      .net_axon      (r_out_pkt[k][P_LOCAL].axon[$clog2(NUM_AXONS)-1:0]),
      .net_delay     (r_out_pkt[k][P_LOCAL].delay),
      .host_valid    (host_valid && host_core == CW'(k)),
      .host_axon, .host_delay,
      .spike_out_valid (core_out_valid),
      .spike_out       (core_out),
      .spike_out_ready (r_in_ready[k][P_LOCAL]),
      .done          (core_done[k])
    );

    router #(.FIFO_DEPTH(FIFO_DEPTH)) u_router (
      .clk, .rst_n,
      .in_valid (r_in_valid[k]), .in_pkt(r_in_pkt[k]), .in_ready(r_in_ready[k]),
      .out_valid(r_out_valid[k]), .out_pkt(r_out_pkt[k]), .out_ready(r_out_ready[k]),
      .idle     (router_idle[k])
    );

    // local port
    assign r_in_valid[k][P_LOCAL]  = core_out_valid;
    assign r_in_pkt[k][P_LOCAL]    = core_out;
    assign r_out_ready[k][P_LOCAL] = 1'b1;

    // north
    if (Y > 0) begin : g_n
      assign r_in_valid[k][P_NORTH]  = r_out_valid[k-COLS][P_SOUTH];
      assign r_in_pkt[k][P_NORTH]    = r_out_pkt[k-COLS][P_SOUTH];
      assign r_out_ready[k][P_NORTH] = r_in_ready[k-COLS][P_SOUTH];
    end else begin : g_n_edge
      assign r_in_valid[k][P_NORTH]  = 1'b0;
      assign r_in_pkt[k][P_NORTH]    = '0;
      assign r_out_ready[k][P_NORTH] = 1'b1;
      assign drop_col[X][0]          = r_out_valid[k][P_NORTH];
    end
    // south
    if (Y < ROWS - 1) begin : g_s
      assign r_in_valid[k][P_SOUTH]  = r_out_valid[k+COLS][P_NORTH];
      assign r_in_pkt[k][P_SOUTH]    = r_out_pkt[k+COLS][P_NORTH];
      assign r_out_ready[k][P_SOUTH] = r_in_ready[k+COLS][P_NORTH];
    end else begin : g_s_edge
      assign r_in_valid[k][P_SOUTH]  = 1'b0;
      assign r_in_pkt[k][P_SOUTH]    = '0;
      assign r_out_ready[k][P_SOUTH] = 1'b1;
      assign drop_col[X][1]          = r_out_valid[k][P_SOUTH];
    end
    // east
    if (X < COLS - 1) begin : g_e
      assign r_in_valid[k][P_EAST]  = r_out_valid[k+1][P_WEST];
      assign r_in_pkt[k][P_EAST]    = r_out_pkt[k+1][P_WEST];
      assign r_out_ready[k][P_EAST] = r_in_ready[k+1][P_WEST];
    end else begin : g_e_edge
      assign r_in_valid[k][P_EAST]  = 1'b0;
      assign r_in_pkt[k][P_EAST]    = '0;
      assign r_out_ready[k][P_EAST] = out_ready[Y];
      assign out_valid[Y]           = r_out_valid[k][P_EAST];
      assign out_pkt[Y]             = r_out_pkt[k][P_EAST];
    end
    // west
    if (X > 0) begin : g_w
      assign r_in_valid[k][P_WEST]  = r_out_valid[k-1][P_EAST];
      assign r_in_pkt[k][P_WEST]    = r_out_pkt[k-1][P_EAST];
      assign r_out_ready[k][P_WEST] = r_in_ready[k-1][P_EAST];
    end else begin : g_w_edge
      assign r_in_valid[k][P_WEST]  = 1'b0;
      assign r_in_pkt[k][P_WEST]    = '0;
      assign r_out_ready[k][P_WEST] = 1'b1;
      assign drop_w[Y]              = r_out_valid[k][P_WEST];
    end
  end

  tick_generator #(.NUM_CORES(NUM_CORES)) u_tick (
    .clk, .rst_n, .run, .core_done,
    .net_idle   (&router_idle),
    .tick, .tick_count
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) dropped <= '0;
    else        dropped <= dropped + 32'($countones(drop_col)) + 32'($countones(drop_w));
  end


endmodule
