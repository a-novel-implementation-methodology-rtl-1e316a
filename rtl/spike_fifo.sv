// spike_fifo: small synchronous FIFO of spike packets used at each router
// input. Valid/ready on both sides; in_ready depends only on the fill level
// (a registered count), so no combinational path runs from out_ready to
// in_ready. DEPTH must be a power of two.
module spike_fifo
  import ranc_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  spike_pkt_t in_pkt,
  output logic       in_ready,
  output logic       out_valid,
  output spike_pkt_t out_pkt,
  input  logic       out_ready
);

  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  spike_pkt_t    mem [DEPTH];
  logic [PW-1:0] wr_ptr, rd_ptr;
  logic [PW:0]   count;
  logic          push, pop;

  assign in_ready  = (count != (PW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_pkt   = mem[rd_ptr];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= wr_ptr + PW'(1);
      if (pop)  rd_ptr <= rd_ptr + PW'(1);
      count <= count + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_pkt;
  end

endmodule
