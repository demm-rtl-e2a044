// demm_accumulator: the per-column output accumulator.
//
// A row of A with k*N non-zeros is processed in k passes; each pass yields
// one reduced sum per output column. This block adds the sums of the passes
// of one row in a 32-bit register: on the first pass of a row the register
// is loaded with the sum, on later passes the sum is added to it. After the
// last pass the register holds the output element C[i, c] and keeps it until
// the next row's first pass arrives.
//
// Timing: a sum presented with in_valid in cycle t is in `acc` in cycle t+1.
//
// The adder with a register fed back to it follows the published
// organisation; load-on-first-pass is this design's choice.
module demm_accumulator
  import demm_pkg::*;
(
  input  logic clk,
  input  logic in_valid,
  input  logic in_first,
  input  acc_t sum,
  output acc_t acc
);

  always_ff @(posedge clk) begin
    if (in_valid) acc <= in_first ? sum : acc + sum;
  end

endmodule
