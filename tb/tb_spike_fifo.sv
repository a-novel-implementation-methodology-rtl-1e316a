// tb_spike_fifo: self-checking test of the packet FIFO.
//
// Random pushes and pops against a queue model, for a depth-4 FIFO: the
// head must always be the oldest packet, in_ready must be low exactly when
// four packets are held, out_valid high exactly when one or more are, and
// a push into a full FIFO is refused. A push and a pop in the same cycle
// are both exercised, including on a full FIFO.
module tb_spike_fifo;
  import ranc_pkg::*;

  localparam int D = 4;

  logic clk = 0, rst_n = 0, in_valid = 0, out_ready = 0;
  spike_pkt_t in_pkt = '0, out_pkt;
  logic in_ready, out_valid;

  spike_pkt_t q [$];
  int checks = 0, failures = 0, full_seen = 0, both_seen = 0;

  spike_fifo #(.DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 10000; c++) begin
      in_valid  = $urandom_range(0, 1);
      out_ready = ($urandom_range(0, 2) == 0);
      in_pkt    = spike_pkt_t'({$urandom, $urandom});
      #1;
      checks++;
      if (in_ready !== (q.size() != D) || out_valid !== (q.size() != 0)
          || (q.size() != 0 && out_pkt !== q[0])) begin
        failures++; $display("FAIL cycle %0d: size %0d in_ready %0b out_valid %0b", c, q.size(), in_ready, out_valid);
      end
      if (q.size() == D) full_seen++;
      if (in_valid && in_ready && out_valid && out_ready) both_seen++;
      @(posedge clk);
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(in_pkt);
      @(negedge clk);
    end
    checks++;
    if (full_seen == 0 || both_seen == 0) begin failures++; $display("FAIL: full or push+pop never seen"); end
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
