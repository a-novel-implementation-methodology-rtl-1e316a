// tb_scheduler: self-checking test of the spike scheduler.
//
// Uses a 32-axon, 16-slot instance. Each cycle it may write a spike from
// the network port and one from the host port with a random delay of 0..15
// and may raise tick. A model keeps, per absolute tick number, the set of
// axons due; a spike written with delay d while k ticks have passed is due
// in tick k + d (delay 0 counts as 1), including a write in the same cycle
// as tick. After every tick the spikes register must equal the model, and
// it must hold its value until the next tick.
module tb_scheduler;
  import ranc_pkg::*;

  localparam int A = 32, S = 16;

  logic clk = 0, rst_n = 0, tick = 0;
  logic net_valid = 0, host_valid = 0;
  logic [$clog2(A)-1:0] net_axon = '0, host_axon = '0;
  delay_t net_delay = '0, host_delay = '0;
  logic [A-1:0] spikes;

  logic [A-1:0] due [int];
  int ticks = 0, checks = 0, failures = 0, delays_seen = 0;
  logic [A-1:0] last;

  scheduler #(.NUM_AXONS(A), .NUM_SLOTS(S)) dut (.*);

  always #5 clk = ~clk;

  task automatic add(logic [$clog2(A)-1:0] a, delay_t d);
    int t;
    t = ticks + ((d == 0) ? 1 : int'(d));
    if (!due.exists(t)) due[t] = '0;
    due[t][a] = 1'b1;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 20000; c++) begin
      @(negedge clk);
      net_valid  = ($urandom_range(0, 2) == 0);
      net_axon   = $urandom_range(0, A - 1);
      net_delay  = delay_t'($urandom_range(0, 15));
      host_valid = ($urandom_range(0, 4) == 0);
      host_axon  = $urandom_range(0, A - 1);
      host_delay = delay_t'($urandom_range(0, 15));
      tick       = ($urandom_range(0, 5) == 0);
      if (net_valid)  add(net_axon, net_delay);
      if (host_valid) add(host_axon, host_delay);
      if (net_valid && net_delay == 15) delays_seen++;
      last = spikes;
      @(posedge clk); #1;
      if (tick) begin
        ticks++;
        checks++;
        if (spikes !== (due.exists(ticks) ? due[ticks] : '0)) begin
          failures++;
          $display("FAIL tick %0d: spikes %h expected %h", ticks, spikes, due.exists(ticks) ? due[ticks] : '0);
        end
      end else begin
        checks++;
        if (spikes !== last) begin failures++; $display("FAIL: spikes changed without tick"); end
      end
    end
    checks++;
    if (delays_seen == 0) begin failures++; $display("FAIL: delay 15 never exercised"); end
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
