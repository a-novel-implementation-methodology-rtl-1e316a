// scheduler: the axon spike buffer of one core.
//
// Spikes reach a core while it is still processing tick t. Each carries a
// delay d: it must be seen on its axon in tick t + d. The scheduler keeps
// NUM_SLOTS one-bit-per-axon slots in a ring; slot (ptr + d) mod NUM_SLOTS
// collects spikes for tick t + d, where ptr names the slot of tick t. On the
// tick pulse the slot of the next tick is copied into the spikes register
// that the controller reads for the whole tick, cleared, and ptr advances.
// A spike written in the very cycle of the tick pulse for the slot being
// copied is included in the copy.
//
// Two write ports accept one spike per cycle each: one from the local
// router and one from the host. A delay of 0 is treated as 1 (the next
// tick), the smallest that can still be honoured.
//
// The paper's tick tables fix the behaviour: a spike sent in tick t is used
// in tick t + 1, and the Parity Core's relay neurons use a two-tick longer
// delay. The slot ring and its depth of 16 (as in TrueNorth) are this
// design's choice.
module scheduler
  import ranc_pkg::*;
#(
  parameter int unsigned NUM_AXONS = 256,
  parameter int unsigned NUM_SLOTS = 16
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         tick,
  input  logic                         net_valid,
  input  logic [$clog2(NUM_AXONS)-1:0] net_axon,
  input  delay_t                       net_delay,
  input  logic                         host_valid,
  input  logic [$clog2(NUM_AXONS)-1:0] host_axon,
  input  delay_t                       host_delay,
  output logic [NUM_AXONS-1:0]         spikes      // axon spikes of this tick
);

  localparam int unsigned PTR_W = $clog2(NUM_SLOTS);

  logic [NUM_AXONS-1:0] slots [NUM_SLOTS];
  logic [PTR_W-1:0]     ptr, next_ptr;
  logic [PTR_W-1:0]     net_slot, host_slot;

  function automatic logic [PTR_W-1:0] slot_of(logic [PTR_W-1:0] base, delay_t d);
    logic [PTR_W-1:0] dd;
    dd = (d == '0) ? PTR_W'(1) : PTR_W'(d);
    return base + dd;
  endfunction

  always_comb begin
    next_ptr  = ptr + PTR_W'(1);
    net_slot  = slot_of(ptr, net_delay);
    host_slot = slot_of(ptr, host_delay);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr    <= '0;
      spikes <= '0;
      for (int s = 0; s < NUM_SLOTS; s++) slots[s] <= '0;
    end else begin
      for (int s = 0; s < NUM_SLOTS; s++) begin
        logic [NUM_AXONS-1:0] row;
        row = slots[s];
        if (net_valid  && net_slot  == PTR_W'(s)) row[net_axon]  = 1'b1;
        if (host_valid && host_slot == PTR_W'(s)) row[host_axon] = 1'b1;
        if (tick && next_ptr == PTR_W'(s)) begin
          spikes   <= row;
          slots[s] <= '0;
        end else begin
          slots[s] <= row;
        end
      end
      if (tick) ptr <= next_ptr;
    end
  end

  // A delay longer than the ring would wrap onto an earlier tick.
  initial assert (NUM_SLOTS >= 2 && (NUM_SLOTS & (NUM_SLOTS - 1)) == 0)
    else $error("NUM_SLOTS must be a power of two of at least 2");

endmodule
