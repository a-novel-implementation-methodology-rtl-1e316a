// tick_generator: issues the global tick that keeps all cores in step.
//
// A tick is a one-cycle pulse. The next one is issued only when every core
// reports done (its neurons are all processed and its output register is
// empty), every router FIFO is empty, run is high and at least MIN_GAP clocks
// have passed since the previous tick, so that every spike sent in tick t
// sits in its destination scheduler before tick t+1 starts. tick_count
// counts the ticks issued since reset (the first tick is number 1).
//
// The paper synchronises the cores with a global tick and derives its rate
// from the cycles a core needs per tick; issuing it as soon as the array is
// quiet, instead of from a fixed-rate timer, is this design's choice. It
// gives the same tick-by-tick behaviour with a period of about
// NUM_NEURONS * NUM_AXONS clocks.
module tick_generator #(
  parameter int unsigned NUM_CORES = 25,
  parameter int unsigned MIN_GAP   = 2,
  parameter int unsigned COUNT_W   = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 run,
  input  logic [NUM_CORES-1:0] core_done,
  input  logic                 net_idle,
  output logic                 tick,
  output logic [COUNT_W-1:0]   tick_count
);

  localparam int unsigned GW = $clog2(MIN_GAP + 1) + 1;

  logic [GW-1:0] gap;
  logic          ready;

  assign ready = run && (&core_done) && net_idle && (gap >= GW'(MIN_GAP));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tick       <= 1'b0;
      tick_count <= '0;
      gap        <= GW'(MIN_GAP);
    end else begin
      tick <= 1'b0;
      if (tick) begin
        gap <= '0;
      end else if (ready) begin
        tick       <= 1'b1;
        tick_count <= tick_count + COUNT_W'(1);
      end else if (gap < GW'(MIN_GAP)) begin
        gap <= gap + GW'(1);
      end
    end
  end

endmodule
