// demm_reduce_tree: N-to-1 pipelined adder tree for one output column.
//
// The N products of one output column (one from each read port) are summed
// in a binary tree of L = ceil(log2 N) levels. Level l adds pairs of the
// previous level's results; an odd element is passed on with a zero partner.
// A register follows every level, so the tree accepts a new set of N
// operands every cycle.
//
// Timing: operands in cycle t give `sum` in cycle t+L (L = 3 for N = 8) when
// `en` is high throughout; for N = 1 the tree is a wire. Sums wrap modulo
// 2^32.
//
// The logarithmic-depth, pipelined multi-operand adder follows the published
// design; one register per level is this design's choice.
module demm_reduce_tree
  import demm_pkg::*;
#(
  parameter int unsigned N = N_DEF,
  parameter int unsigned L = $clog2(N),
  parameter int unsigned P = 1 << L        // N rounded up to a power of two
) (
  input  logic clk,
  input  logic en,
  input  acc_t in [N],
  output acc_t sum
);

  // g_lvl[l].s holds the P >> l partial sums after level l.
  for (genvar l = 0; l <= L; l++) begin : g_lvl
    acc_t s [P >> l];
    if (l == 0) begin : g_in
      always_comb begin
        for (int i = 0; i < P; i++) s[i] = (i < N) ? in[i] : '0;
      end
    end else begin : g_add
      always_ff @(posedge clk) begin
        if (en) begin
          for (int i = 0; i < (P >> l); i++)
            s[i] <= g_lvl[l-1].s[2*i] + g_lvl[l-1].s[2*i+1];
        end
      end
    end
  end

  assign sum = g_lvl[L].s[0];

endmodule
