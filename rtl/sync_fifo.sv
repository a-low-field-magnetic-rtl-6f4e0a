// sync_fifo: single-clock first-in first-out buffer.
//
// DEPTH entries (a power of two) of W bits in a register array, with read
// and write pointers one bit wider than the address to tell full from empty.
// Push when 'push' and not full; pop when 'pop' and not empty; 'rdata' shows
// the oldest entry (first-word fall-through). 'count' is the fill level.
// Pushing into a full or popping from an empty FIFO is a usage error and is
// flagged by assertions.
// Lint note: the assertions are disabled during reset (disable iff), so a
// linter sees rst_n used both as the asynchronous reset and in a clocked
// expression; the assertions are not part of the circuit.
module sync_fifo #(
  parameter int W     = 32,
  parameter int DEPTH = 64
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     push,
  input  logic [W-1:0]             wdata,
  input  logic                     pop,
  output logic [W-1:0]             rdata,
  output logic                     full,
  output logic                     empty,
  output logic [$clog2(DEPTH):0]   count
);
  localparam int AW = $clog2(DEPTH);
  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wp, rp;

  assign count = wp - rp;
  assign full  = count == (AW+1)'(DEPTH);
  assign empty = count == '0;
  assign rdata = mem[rp[AW-1:0]];

  always_ff @(posedge clk) if (push && !full) mem[wp[AW-1:0]] <= wdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (push && !full) wp <= wp + 1'b1;
      if (pop && !empty) rp <= rp + 1'b1;
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> !full);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);
endmodule
