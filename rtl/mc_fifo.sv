// mc_fifo: small synchronous FIFO used as a router input buffer.
//
// DEPTH entries of W bits in a register array with read and write pointers
// and an occupancy counter. The write side takes a word when in_valid and
// in_ready are both high; in_ready is "not full" and comes straight from a
// register, so no combinational path runs from the read side to the write
// side (this keeps the ready signals of a ring of routers free of loops).
// The read side shows the oldest word on out_data with out_valid; it is
// removed when out_ready is high in the same cycle. A word written into an
// empty FIFO is visible one cycle later. Reset (active low, synchronous)
// empties it. The buffer itself is this design's choice: the paper does
// not describe the router's buffering.
module mc_fifo #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 2,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data
);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wr_ptr, rd_ptr;
  logic [AW:0]   count;
  logic          push, pop;

  assign in_ready  = (count < (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  function automatic logic [AW-1:0] next_ptr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= next_ptr(wr_ptr);
      if (pop)  rd_ptr <= next_ptr(rd_ptr);
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  // The storage needs no reset: a word is read only after it was written.
  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

endmodule
