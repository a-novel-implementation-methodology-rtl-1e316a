// tb_router: self-checking test of the five-port mesh router.
//
// Random packets with offsets in -3..3 enter all five inputs while the
// four mesh outputs apply random back-pressure (the local output is always
// ready, as in the core). A model computes, for each packet, the output it
// must leave by under X-then-Y routing (east if dx > 0, west if dx < 0,
// then south if dy > 0, north if dy < 0, else local) and the offset it must
// carry after the hop; packets between one input and one output must keep
// their order. It also checks the one-cycle latency through an empty
// router, that two inputs competing for one output are both served
// (round-robin), that nothing is lost, and that idle is high once drained.
module tb_router;
  import ranc_pkg::*;

  logic clk = 0, rst_n = 0;
  logic       [4:0] in_valid = '0, out_ready = 5'b00001;
  spike_pkt_t [4:0] in_pkt = '0;
  logic       [4:0] in_ready, out_valid;
  spike_pkt_t [4:0] out_pkt;
  logic idle;

  spike_pkt_t exp_q [5][5][$];   // [in][out]
  int checks = 0, failures = 0, sent = 0, recvd = 0;
  int served [5];

  router #(.FIFO_DEPTH(4)) dut (.*);

  always #5 clk = ~clk;

  function automatic int route(spike_pkt_t p, output spike_pkt_t q);
    q = p;
    if (p.dx > 0)      begin q.dx = p.dx - 1; return 2; end
    else if (p.dx < 0) begin q.dx = p.dx + 1; return 4; end
    else if (p.dy > 0) begin q.dy = p.dy - 1; return 3; end
    else if (p.dy < 0) begin q.dy = p.dy + 1; return 1; end
    return 0;
  endfunction

  function automatic spike_pkt_t rand_pkt();
    spike_pkt_t p;
    p.dx    = offset_t'($urandom_range(0, 6)) - 3;
    p.dy    = offset_t'($urandom_range(0, 6)) - 3;
    p.axon  = axon_idx_t'($urandom);
    p.delay = delay_t'($urandom);
    return p;
  endfunction

  // accept outputs
  always @(posedge clk) if (rst_n) begin
    for (int o = 0; o < 5; o++) if (out_valid[o] && out_ready[o]) begin
      bit hit;
      hit = 0;
      for (int i = 0; i < 5 && !hit; i++)
        if (exp_q[i][o].size() > 0 && exp_q[i][o][0] == out_pkt[o]) begin
          void'(exp_q[i][o].pop_front());
          hit = 1;
          served[i]++;
        end
      checks++; recvd++;
      if (!hit) begin failures++; $display("FAIL: unexpected packet on output %0d: %p", o, out_pkt[o]); end
    end
  end

  task automatic send(int p, spike_pkt_t k);
    spike_pkt_t q;
    int o;
    o = route(k, q);
    exp_q[p][o].push_back(q);
    sent++;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;

    // 1. latency: one packet, empty router, west input going east
    @(negedge clk);
    in_valid = 5'b10000; in_pkt[4] = '{dx: 2, dy: 0, axon: 8'd5, delay: 4'd1};
    out_ready = 5'b11111;
    send(4, in_pkt[4]);
    @(negedge clk);
    in_valid = '0;
    checks++;
    if (!(out_valid[2] && out_pkt[2].dx == 1 && out_pkt[2].axon == 8'd5)) begin
      failures++; $display("FAIL: packet not at east output one cycle after entering");
    end
    @(negedge clk);

    // 2. contention: north and south both heading for the local port
    for (int c = 0; c < 40; c++) begin
      in_valid = 5'b01010;
      in_pkt[1] = '{dx: 0, dy: 0, axon: 8'(c), delay: 4'd1};
      in_pkt[3] = '{dx: 0, dy: 0, axon: 8'(c + 100), delay: 4'd2};
      if (in_ready[1]) send(1, in_pkt[1]); else in_valid[1] = 0;
      if (in_ready[3]) send(3, in_pkt[3]); else in_valid[3] = 0;
      @(negedge clk);
    end
    in_valid = '0;
    repeat (20) @(negedge clk);
    checks++;
    if (served[1] < 15 || served[3] < 15) begin
      failures++; $display("FAIL: unfair arbitration %0d / %0d", served[1], served[3]);
    end

    // 3. random traffic with back-pressure
    for (int c = 0; c < 5000; c++) begin
      out_ready = {4'($urandom), 1'b1};
      for (int p = 0; p < 5; p++) begin
        in_valid[p] = ($urandom_range(0, 2) == 0);
        in_pkt[p]   = rand_pkt();
      end
      #1;
      for (int p = 0; p < 5; p++) if (in_valid[p] && in_ready[p]) send(p, in_pkt[p]);
      @(negedge clk);
    end
    in_valid = '0; out_ready = '1;
    repeat (40) @(negedge clk);
    checks++;
    if (recvd != sent) begin failures++; $display("FAIL: sent %0d, received %0d", sent, recvd); end
    checks++;
    if (!idle) begin failures++; $display("FAIL: not idle after draining"); end
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
