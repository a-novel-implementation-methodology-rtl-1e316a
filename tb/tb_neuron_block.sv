// tb_neuron_block: self-checking test of the neuron block.
//
// Drives random neurons through the block one axon per clock, exactly as the
// core controller does (new_neuron on the first axon, step every cycle), and
// compares v_next and spike after the last axon with a bit-level model of
// the datapath: A = weight of the axon type gated by process_spike, B =
// v_prev or NP, C = A + B (LIF) or A[0] ^ B[0] (XOR), then leak, the
// negative threshold and the positive threshold. Directed cases cover the
// threshold equalities (>= and <=), the priority of the positive reset, the
// XOR truth table, 9-bit wrap-around, and NP holding while step is low.
// Each axon takes one clock, so a neuron of K axons is checked K cycles
// after it starts.
module tb_neuron_block;
  import ranc_pkg::*;

  logic       clk = 0;
  logic       step = 0, process_spike = 0, new_neuron = 0;
  weight_t [NUM_TYPES-1:0] weights = '0;
  axon_type_t axon_type = '0;
  pot_t       v_prev = '0, thr_pos = '0, thr_neg = '0, rst_pos = '0, rst_neg = '0;
  weight_t    leak = '0;
  op_sel_t    op_sel = OP_LIF;
  pot_t       v_next;
  logic       spike;

  int checks = 0, failures = 0;

  neuron_block dut (.*);

  always #5 clk = ~clk;

  function automatic pot_t model_c(op_sel_t op, pot_t a, pot_t b);
    if (op == OP_XOR) return pot_t'({1'b0, a[0] ^ b[0]});
    return a + b;
  endfunction

  // Runs one neuron over k axons; returns the model's NP value.
  task automatic run_neuron(int k, bit [15:0] ps, bit [31:0] types, output pot_t np);
    pot_t a, b;
    np = '0;
    for (int i = 0; i < k; i++) begin
      @(negedge clk);
      new_neuron    = (i == 0);
      process_spike = ps[i];
      axon_type     = types[2*i +: 2];
      step          = 1;
      a  = ps[i] ? pot_t'(weights[types[2*i +: 2]]) : '0;
      b  = (i == 0) ? v_prev : np;
      np = model_c(op_sel, a, b);
    end
    @(negedge clk);
    step = 0; process_spike = 0; new_neuron = 0;
  endtask

  task automatic check_out(pot_t np, string tag);
    pot_t lk, exp_v;
    bit   exp_s;
    lk    = np + pot_t'(leak);
    exp_s = (lk >= thr_pos);
    exp_v = exp_s ? rst_pos : ((lk <= thr_neg) ? rst_neg : lk);
    checks++;
    if (v_next !== exp_v || spike !== exp_s) begin
      failures++;
      $display("FAIL %s: v_next=%0d spike=%0b, expected %0d %0b", tag, v_next, spike, exp_v, exp_s);
    end
  endtask

  pot_t np;

  initial begin
    // 1. random LIF and XOR neurons
    for (int t = 0; t < 2000; t++) begin
      for (int j = 0; j < NUM_TYPES; j++) weights[j] = weight_t'($urandom_range(0, 511));
      v_prev  = pot_t'($urandom_range(0, 511));
      leak    = weight_t'($urandom_range(0, 15)) - 8;
      thr_pos = pot_t'($urandom_range(0, 64));
      thr_neg = -pot_t'($urandom_range(0, 64));
      rst_pos = pot_t'($urandom_range(0, 511));
      rst_neg = pot_t'($urandom_range(0, 511));
      op_sel  = ($urandom_range(0, 3) == 0) ? OP_XOR : OP_LIF;
      run_neuron($urandom_range(1, 16), 16'($urandom), $urandom, np);
      check_out(np, "random");
    end

    // 2. threshold equalities and priority
    weights = '{default: 9'sd1}; op_sel = OP_LIF; leak = 0;
    v_prev = 9'sd4; thr_pos = 9'sd5; thr_neg = -9'sd5; rst_pos = 9'sd0; rst_neg = -9'sd100;
    run_neuron(1, 16'h1, 32'h0, np);             // 4 + 1 = 5 == v+ -> spike
    check_out(np, "v+ equal");
    checks++; if (spike !== 1'b1 || v_next !== 9'sd0) begin failures++; $display("FAIL: no spike at v+"); end
    v_prev = -9'sd6;
    run_neuron(1, 16'h1, 32'h0, np);             // -5 == v- -> r-
    checks++; if (spike !== 1'b0 || v_next !== -9'sd100) begin failures++; $display("FAIL: no r- at v-"); end
    thr_pos = -9'sd10; v_prev = -9'sd8;          // both hold: positive wins
    run_neuron(1, 16'h1, 32'h0, np);
    checks++; if (spike !== 1'b1 || v_next !== 9'sd0) begin failures++; $display("FAIL: r+ priority"); end

    // 3. XOR truth table on the LSB, upper bits zero
    op_sel = OP_XOR; thr_pos = 9'sd1; thr_neg = -9'sd200; leak = 0;
    for (int a = 0; a < 2; a++) for (int b = 0; b < 2; b++) begin
      weights = '{default: 9'(a) + 9'sd6};       // upper bits set on purpose
      v_prev  = 9'(b) + 9'sd2;
      run_neuron(1, 16'h1, 32'h0, np);
      checks++;
      if (spike !== 1'(a ^ b) || (spike == 0 && v_next !== 9'sd0)) begin
        failures++; $display("FAIL: XOR %0d^%0d", a, b);
      end
    end

    // 4. 9-bit wrap: 255 + 1 = -256
    op_sel = OP_LIF; weights = '{default: 9'sd1}; v_prev = 9'sd255;
    thr_pos = 9'sd255; thr_neg = -9'sd256; rst_neg = 9'sd7;
    run_neuron(1, 16'h1, 32'h0, np);
    checks++; if (v_next !== 9'sd7) begin failures++; $display("FAIL: wrap, v_next=%0d", v_next); end

    // 5. NP holds while step is low
    thr_neg = -9'sd256; thr_pos = 9'sd255; v_prev = 9'sd17; leak = 0;
    run_neuron(1, 16'h0, 32'h0, np);
    repeat (5) begin
      @(negedge clk); v_prev = 9'sd99; new_neuron = 1;
    end
    checks++; if (v_next !== 9'sd17) begin failures++; $display("FAIL: NP changed without step"); end

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
