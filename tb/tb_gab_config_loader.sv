// tb_gab_config_loader: self-checking test of the GaB configuration loader
// at full size (5 x 5 cores of 256 axons and 256 neurons, MAX_ITER = 100).
//
// Records every configuration write and checks:
//   - every neuron and every axon of every core is written exactly once,
//     neurons first, and loaded rises afterwards and stays high;
//   - the Iteration Counter Core matches its table in the text: i_max has
//     threshold 202 = (100 - 1) * 2 + 4 and weights [1, -202, 1, 1], i_fb
//     threshold 1 and weights [1, -1, 1, 1]; axons i and init_it are type
//     0 and rst_it type 1;
//   - the Tanner graph: following the configured packet destinations, each
//     CNU neuron c_m v_n is an XOR neuron fed by the three VNU neurons of
//     the other variables of check m, and each Parity Core neuron s_m is
//     an XOR of exactly the x' bits of row m of H (H taken from the
//     reference package, written independently from the loader's tables);
//   - the Output Core sends zero, done and x'_0..7 off the east edge with
//     the axon numbers 0, 1 and 2..9;
//   - the Parity Core's x' relays use a delay of 3 ticks.
module tb_gab_config_loader;
  import ranc_pkg::*;
  import gab_map_pkg::CORE_INPUT, gab_map_pkg::CORE_VNU, gab_map_pkg::CORE_CNU,
         gab_map_pkg::CORE_PARITY, gab_map_pkg::CORE_SYNDROME, gab_map_pkg::CORE_ITER,
         gab_map_pkg::CORE_OUTPUT;

  localparam int ROWS = 5, COLS = 5, A = 256, NN = 256, NC = 25, CW = 5;

  logic clk = 0, rst_n = 0;
  logic [CW-1:0] cfg_core;
  logic cfg_neuron_we, cfg_axon_we, loaded;
  logic [7:0] cfg_neuron, cfg_axon;
  neuron_params_t cfg_params;
  logic [A-1:0] cfg_xbar;
  pot_t cfg_pot;
  axon_type_t cfg_type;

  neuron_params_t P [8][32];
  logic [A-1:0]   X [8][32];
  axon_type_t     T [8][32];
  int nwrites [NC][NN], awrites [NC][A];
  int checks = 0, failures = 0, axon_phase = 0, order_bad = 0, loaded_cycle = -1, cyc = 0;

  gab_config_loader #(.ROWS(ROWS), .COLS(COLS), .NUM_AXONS(A), .NUM_NEURONS(NN), .MAX_ITER(100)) dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (cfg_neuron_we) begin
      nwrites[cfg_core][cfg_neuron]++;
      if (axon_phase) order_bad++;
      if (cfg_core < 8 && cfg_neuron < 32) begin
        P[cfg_core][cfg_neuron] = cfg_params;
        X[cfg_core][cfg_neuron] = cfg_xbar;
      end
    end
    if (cfg_axon_we) begin
      axon_phase = 1;
      awrites[cfg_core][cfg_axon]++;
      if (cfg_core < 8 && cfg_axon < 32) T[cfg_core][cfg_axon] = cfg_type;
    end
    if (loaded && loaded_cycle < 0) loaded_cycle = cyc;
    if (loaded_cycle >= 0 && (!loaded || cfg_neuron_we || cfg_axon_we)) order_bad++;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // core reached by a packet from core src with offsets dx, dy
  function automatic int dest_core(int src, neuron_params_t p);
    return (src / COLS + int'(p.dy)) * COLS + (src % COLS + int'(p.dx));
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    wait (loaded);
    repeat (5) @(negedge clk);

    begin
      int bad = 0;
      for (int k = 0; k < NC; k++) begin
        for (int j = 0; j < NN; j++) if (nwrites[k][j] != 1) bad++;
        for (int i = 0; i < A; i++) if (awrites[k][i] != 1) bad++;
      end
      check(bad == 0, $sformatf("%0d entries not written exactly once", bad));
      check(order_bad == 0, "write order or loaded flag wrong");
    end

    // Iteration Counter Core table
    check(P[CORE_ITER][0].thr_pos == 9'sd202, "i_max threshold");
    check(P[CORE_ITER][0].weights[0] == 9'sd1 && P[CORE_ITER][0].weights[1] == -9'sd202
          && P[CORE_ITER][0].weights[2] == 9'sd1 && P[CORE_ITER][0].weights[3] == 9'sd1, "i_max weights");
    check(P[CORE_ITER][1].thr_pos == 9'sd1 && P[CORE_ITER][1].weights[1] == -9'sd1, "i_fb");
    check(T[CORE_ITER][0] == 0 && T[CORE_ITER][1] == 0 && T[CORE_ITER][2] == 1, "iteration counter axon types");
    check(dest_core(CORE_ITER, P[CORE_ITER][1]) == CORE_ITER && P[CORE_ITER][1].dest_axon == 0, "i_fb feeds axon i");

    // Tanner graph through the CNU core
    for (int q = 1; q <= 16; q++) begin
      bit [7:0] vars = '0;
      int n_to = -1, m_ok = 0;
      check(P[CORE_CNU][q].op_sel == OP_XOR, $sformatf("CNU neuron %0d not XOR", q));
      check($countones(X[CORE_CNU][q]) == 3, $sformatf("CNU neuron %0d fan-in", q));
      // sources: VNU neurons whose packet lands on a CNU axon this neuron reads
      for (int j = 1; j <= 16; j++)
        if (dest_core(CORE_VNU, P[CORE_VNU][j]) == CORE_CNU && X[CORE_CNU][q][P[CORE_VNU][j].dest_axon])
          for (int n = 0; n < 8; n++) if (X[CORE_VNU][j][19 + n]) vars[n] = 1'b1;
      // target: the x' neuron of the VNU core that reads the axon this neuron drives
      check(dest_core(CORE_CNU, P[CORE_CNU][q]) == CORE_VNU, "CNU output goes to the VNU core");
      for (int n = 0; n < 8; n++)
        if (X[CORE_VNU][18 + n][P[CORE_CNU][q].dest_axon]) n_to = n;
      for (int m = 0; m < 4; m++) begin
        bit [7:0] row = '0;
        for (int n = 0; n < 8; n++) row[n] = gab_ref_pkg::H[m][n];
        if (n_to >= 0 && row[n_to] && (vars | (8'd1 << n_to)) == row && !vars[n_to]) m_ok = 1;
      end
      check(m_ok == 1, $sformatf("CNU neuron %0d does not match a check of H (vars %b, to v%0d)", q, vars, n_to));
    end

    // Parity core: s_m = XOR of row m of x'
    for (int m = 0; m < 4; m++) begin
      bit [7:0] row = '0;
      for (int n = 0; n < 8; n++) row[n] = gab_ref_pkg::H[m][n];
      check(P[CORE_PARITY][1 + m].op_sel == OP_XOR && X[CORE_PARITY][1 + m][8:1] == row,
            $sformatf("parity neuron s_%0d", m));
    end
    for (int n = 0; n < 8; n++)
      check(P[CORE_PARITY][5 + n].delay == 4'd3 && dest_core(CORE_PARITY, P[CORE_PARITY][5 + n]) == CORE_OUTPUT
            && P[CORE_PARITY][5 + n].dest_axon == 8'(2 + n), $sformatf("parity relay x'_%0d", n));

    // Output core: off the east edge
    for (int j = 0; j < 10; j++)
      check(int'(P[CORE_OUTPUT][j].dx) == COLS - CORE_OUTPUT % COLS && P[CORE_OUTPUT][j].dy == 0
            && P[CORE_OUTPUT][j].dest_axon == 8'(j), $sformatf("output neuron %0d", j));

    // Input core: r_n reaches VNU r axons, en goes on to the VNU core
    for (int n = 0; n < 8; n++)
      check(dest_core(CORE_INPUT, P[CORE_INPUT][10 + n]) == CORE_VNU && X[CORE_VNU][18 + n][P[CORE_INPUT][10 + n].dest_axon],
            $sformatf("input r_%0d to x'_%0d", n, n));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
