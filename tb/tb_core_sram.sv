// tb_core_sram: self-checking test of the core memory.
//
// Uses a 16-axon, 8-neuron instance. Writes random crossbar rows,
// parameters, potentials and axon types through the configuration port,
// then checks every read port (accumulate, output stage, axon type) against
// a shadow copy, checks that potential write-back lands, and that a
// configuration write wins over a potential write to the same neuron in the
// same cycle (the potential array has one write port, so a configuration
// write also blocks a potential write to another neuron; configuration is
// only done while the array is stopped). Reads are combinational, so every check is made in the cycle
// the address is applied.
module tb_core_sram;
  import ranc_pkg::*;

  localparam int A = 16, N = 8;

  logic clk = 0;
  logic cfg_neuron_we = 0, cfg_axon_we = 0, pot_we = 0;
  logic [$clog2(N)-1:0] cfg_neuron = '0, acc_addr = '0, out_addr = '0, pot_addr = '0;
  logic [$clog2(A)-1:0] cfg_axon = '0, axon_addr = '0;
  neuron_params_t cfg_params = '0, acc_params, out_params;
  logic [A-1:0]   cfg_xbar = '0, acc_xbar;
  pot_t           cfg_pot = '0, acc_pot, pot_data = '0;
  axon_type_t     cfg_type = '0, axon_type;

  neuron_params_t sh_p [N];
  logic [A-1:0]   sh_x [N];
  pot_t           sh_v [N];
  axon_type_t     sh_t [A];

  int checks = 0, failures = 0;

  core_sram #(.NUM_AXONS(A), .NUM_NEURONS(N)) dut (.*);

  always #5 clk = ~clk;

  function automatic neuron_params_t rand_params();
    logic [$bits(neuron_params_t)-1:0] b;
    for (int i = 0; i < $bits(neuron_params_t); i += 32) b[i +: 32] = $urandom;
    return neuron_params_t'(b);
  endfunction

  task automatic check_all();
    for (int j = 0; j < N; j++) begin
      acc_addr = j; out_addr = (j + 3) % N;
      #1;
      checks++;
      if (acc_xbar !== sh_x[j] || acc_params !== sh_p[j] || acc_pot !== sh_v[j]
          || out_params !== sh_p[(j + 3) % N]) begin
        failures++; $display("FAIL: neuron %0d read back wrong", j);
      end
    end
    for (int i = 0; i < A; i++) begin
      axon_addr = i; #1;
      checks++;
      if (axon_type !== sh_t[i]) begin failures++; $display("FAIL: axon %0d type", i); end
    end
  endtask

  initial begin
    // fill everything
    for (int j = 0; j < N; j++) begin
      @(negedge clk);
      cfg_neuron_we = 1; cfg_neuron = j;
      cfg_params = rand_params(); cfg_xbar = A'($urandom); cfg_pot = pot_t'($urandom);
      sh_p[j] = cfg_params; sh_x[j] = cfg_xbar; sh_v[j] = cfg_pot;
    end
    for (int i = 0; i < A; i++) begin
      @(negedge clk);
      cfg_neuron_we = 0; cfg_axon_we = 1; cfg_axon = i; cfg_type = axon_type_t'($urandom);
      sh_t[i] = cfg_type;
    end
    @(negedge clk); cfg_axon_we = 0;
    check_all();

    // random potential write-backs and reconfigurations
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      pot_we = $urandom_range(0, 1); pot_addr = $urandom_range(0, N - 1); pot_data = pot_t'($urandom);
      cfg_neuron_we = ($urandom_range(0, 3) == 0);
      cfg_neuron = ($urandom_range(0, 1)) ? pot_addr : $urandom_range(0, N - 1);
      cfg_params = rand_params(); cfg_xbar = A'($urandom); cfg_pot = pot_t'($urandom);
      cfg_axon_we = $urandom_range(0, 1); cfg_axon = $urandom_range(0, A - 1); cfg_type = axon_type_t'($urandom);
      if (pot_we && !cfg_neuron_we) sh_v[pot_addr] = pot_data;   // one write port on potentials
      if (cfg_neuron_we) begin
        sh_p[cfg_neuron] = cfg_params; sh_x[cfg_neuron] = cfg_xbar; sh_v[cfg_neuron] = cfg_pot;
      end
      if (cfg_axon_we) sh_t[cfg_axon] = cfg_type;
      @(negedge clk);
      pot_we = 0; cfg_neuron_we = 0; cfg_axon_we = 0;
      if (t % 50 == 0) check_all();
    end
    check_all();

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
