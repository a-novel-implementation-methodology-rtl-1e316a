// router: one node of the two-dimensional mesh that links the cores.
//
// Five ports, index 0 local (the core), 1 north, 2 east, 3 south, 4 west.
// Every input has a small FIFO. A packet's remaining offset selects its
// output with dimension-order (X then Y) routing: dx > 0 east, dx < 0 west,
// otherwise dy > 0 south, dy < 0 north, otherwise the local core. The offset
// is moved one step toward zero as the packet leaves on a mesh port, so the
// next router sees what is left of the trip. Each output grants one
// requesting input per cycle, round robin. All handshakes are valid/ready;
// the local output to the core must always be ready (the scheduler takes a
// spike every cycle). idle is high when every input FIFO is empty.
//
// The paper shows the cores joined by a mesh and gives each neuron a
// destination core offset (dx, dy); the routing order, FIFOs and
// arbitration are this design's choices.
module router
  import ranc_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic       [4:0] in_valid,
  input  spike_pkt_t [4:0] in_pkt,
  output logic       [4:0] in_ready,
  output logic       [4:0] out_valid,
  output spike_pkt_t [4:0] out_pkt,
  input  logic       [4:0] out_ready,
  output logic             idle
);

  localparam int unsigned P_LOCAL = 0, P_NORTH = 1, P_EAST = 2, P_SOUTH = 3, P_WEST = 4;

  logic       [4:0] head_valid, head_pop;
  spike_pkt_t [4:0] head_pkt;
  logic [4:0][2:0]  head_dir;
  logic [4:0][4:0]  grant;        // grant[out][in]
  logic [4:0][2:0]  rr;           // round-robin start per output

  for (genvar p = 0; p < 5; p++) begin : g_in
    spike_fifo #(.DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n,
      .in_valid (in_valid[p]), .in_pkt(in_pkt[p]), .in_ready(in_ready[p]),
      .out_valid(head_valid[p]), .out_pkt(head_pkt[p]), .out_ready(head_pop[p])
    );
  end

  // Route computation.
  always_comb begin
    for (int p = 0; p < 5; p++) begin
      if      (head_pkt[p].dx > 0) head_dir[p] = 3'(P_EAST);
      else if (head_pkt[p].dx < 0) head_dir[p] = 3'(P_WEST);
      else if (head_pkt[p].dy > 0) head_dir[p] = 3'(P_SOUTH);
      else if (head_pkt[p].dy < 0) head_dir[p] = 3'(P_NORTH);
      else                         head_dir[p] = 3'(P_LOCAL);
    end
  end

  // Round-robin arbitration per output.
  always_comb begin
    grant = '0;
    for (int o = 0; o < 5; o++) begin
      logic found;
      found = 1'b0;
      for (int k = 0; k < 5; k++) begin
        int i;
        i = (int'(rr[o]) + k) % 5;
        if (!found && head_valid[i] && head_dir[i] == 3'(o)) begin
          grant[o][i] = 1'b1;
          found = 1'b1;
        end
      end
    end
  end

  // Output drive and offset update.
  always_comb begin
    out_valid = '0;
    out_pkt   = '0;
    head_pop  = '0;
    for (int o = 0; o < 5; o++) begin
      for (int i = 0; i < 5; i++) begin
        if (grant[o][i]) begin
          out_valid[o] = 1'b1;
          out_pkt[o]   = head_pkt[i];
          head_pop[i]  = out_ready[o];
        end
      end
      unique case (o)
        P_EAST:  out_pkt[o].dx = out_pkt[o].dx - offset_t'(1);
        P_WEST:  out_pkt[o].dx = out_pkt[o].dx + offset_t'(1);
        P_SOUTH: out_pkt[o].dy = out_pkt[o].dy - offset_t'(1);
        P_NORTH: out_pkt[o].dy = out_pkt[o].dy + offset_t'(1);
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr <= '0;
    end else begin
      for (int o = 0; o < 5; o++) begin
        for (int i = 0; i < 5; i++) begin
          if (grant[o][i] && out_ready[o]) rr[o] <= 3'((i + 1) % 5);
        end
      end
    end
  end

  assign idle = ~|head_valid;

  assert property (@(posedge clk) disable iff (!rst_n) out_valid[P_LOCAL] |-> out_ready[P_LOCAL])
    else $error("local core must accept delivered spikes");

endmodule
