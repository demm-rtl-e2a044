// demm_operand_select: row buffer and k:1 operand multiplexers in front of
// the read ports.
//
// A packed row of the sparse matrix A is a list of K*N {value, col_idx}
// pairs, split into K groups of N pairs (group g holds pairs g*N .. g*N+N-1).
// The row is captured into a buffer when `load` is high. Each cycle the
// controller names one group with `grp`; a K:1 multiplexer per read port
// picks element n of that group, so read port n always serves pair g*N+n.
// In the relaxed mode (k = 1) only group 0 is used; denser rows of up to
// K*N non-zeros reuse the same N ports for k consecutive cycles.
//
// Timing: `addr` is combinational from the buffer and `grp`, so it reaches
// the memory in the issue cycle. `val` is registered (when `issue` is high)
// so that it meets the registered memory read data one cycle later. Unused
// pairs of a row must carry value 0.
//
// The buffers and one K:1 multiplexer per port follow the published
// organisation; the assignment of pairs to groups is this design's choice.
module demm_operand_select
  import demm_pkg::*;
#(
  parameter int unsigned N  = N_DEF,
  parameter int unsigned M  = M_DEF,
  parameter int unsigned K  = K_DEF,
  parameter int unsigned IW = $clog2(M),
  parameter int unsigned GW = (K > 1) ? $clog2(K) : 1
) (
  input  logic          clk,
  input  logic          load,
  input  data_t         in_val [K*N],
  input  logic [IW-1:0] in_idx [K*N],
  input  logic [GW-1:0] grp,
  input  logic          issue,
  output logic [IW-1:0] addr [N],
  output data_t         val  [N]
);

  data_t         val_buf [K][N];
  logic [IW-1:0] idx_buf [K][N];

  always_ff @(posedge clk) begin
    if (load) begin
      for (int g = 0; g < K; g++)
        for (int n = 0; n < N; n++) begin
          val_buf[g][n] <= in_val[g*N + n];
          idx_buf[g][n] <= in_idx[g*N + n];
        end
    end
  end

  // K:1 multiplexers, one per read port, for addresses and for values.
  data_t val_mux [N];
  always_comb begin
    for (int n = 0; n < N; n++) begin
      addr[n]    = idx_buf[grp][n];
      val_mux[n] = val_buf[grp][n];
    end
  end

  always_ff @(posedge clk) begin
    if (issue) val <= val_mux;
  end

  a_grp : assert property (@(posedge clk) issue |-> int'(grp) < K);

endmodule
