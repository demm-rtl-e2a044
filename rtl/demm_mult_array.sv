// demm_mult_array: the N x C multiplier array of the engine.
//
// Read port n of the B memory delivers a whole row of B (C words); each of
// its C words is multiplied by val[n], the non-zero value of A that selected
// that row. All N x C products are formed in parallel, one per multiplier,
// as 16 x 16 -> 32-bit signed products.
//
// Timing: one register stage. Inputs in cycle t give `prod` in cycle t+1
// when `en` is high; with `en` low the products hold.
//
// The N x C arrangement follows the published organisation; signed
// arithmetic and the single register stage are this design's choices.
module demm_mult_array
  import demm_pkg::*;
#(
  parameter int unsigned N = N_DEF,
  parameter int unsigned C = C_DEF
) (
  input  logic  clk,
  input  logic  en,
  input  data_t b_row [N][C],
  input  data_t val   [N],
  output acc_t  prod  [N][C]
);

  always_ff @(posedge clk) begin
    if (en) begin
      for (int n = 0; n < N; n++)
        for (int c = 0; c < C; c++)
          prod[n][c] <= acc_t'(b_row[n][c]) * acc_t'(val[n]);
    end
  end

endmodule
