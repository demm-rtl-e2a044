// demm_engine: DeMM, a decoupled sparse x dense matrix-multiplication engine
// for relaxed structured sparsity, configured as DeMM(N, M, C, K).
//
// C = A x B is computed row by row: C[i,:] = sum_k A[i,k] * B[k,:]. The dense
// M x C matrix B is pre-loaded, one row per cycle, into a memory with one
// write port and N read ports. A row of the sparse matrix A is given packed
// as up to K*N {value, col_idx} pairs plus a pass count a_k. In each pass N
// pairs are issued: every col_idx addresses one read port, which returns the
// whole row B[col_idx,:]; the C words of port n are multiplied by value n,
// the N products of each column are summed by a pipelined adder tree, and a
// per-column accumulator adds the a_k pass sums into the output row.
// With a_k = 1 the engine handles N:M sparsity (8:128 by default); with
// a_k = k it handles kN:M, down to 64:128 (the density of 1:2) for K = 8.
//
//   a_* --> demm_ctrl (grp, issue, tags) -----------------------------+
//    |          |                                                     |
//    +--> demm_operand_select --addr--> demm_bmem --rows--+           |
//                     |                                   v           v
//                     +------------val-----------> demm_mult_array    |
//                                                         |           |
//                                          C x demm_reduce_tree       |
//                                                         |           |
//                                          C x demm_accumulator <-----+--> c_*
//
// Interface: b_wr_* writes row b_wr_addr of B. a_valid/a_ready is a
// valid/ready handshake for one packed row (unused pairs must have value 0;
// a_k in 1..K). c_valid pulses for one cycle with the finished output row
// in c_row; c_row then holds until the next row's first pass lands. There
// is no output back-pressure.
//
// Timing: a row accepted at the edge ending cycle t0 gives c_valid in cycle
// t0 + a_k + 3 + ceil(log2 N) (t0 + a_k + 6 by default). Rows are accepted
// back to back, one every a_k cycles. B may be rewritten at any time; a
// read in flight sees the row as it was in its issue cycle.
//
// The multi-ported memory, the N x C multipliers, the logarithmic pipelined
// adder trees, the K:1 operand multiplexers and the accumulating output
// registers follow the published engine. The pipeline registers, the
// handshake, the per-row pass count and signed arithmetic are this design's
// own choices.
module demm_engine
  import demm_pkg::*;
#(
  parameter int unsigned N  = N_DEF,
  parameter int unsigned M  = M_DEF,
  parameter int unsigned C  = C_DEF,
  parameter int unsigned K  = K_DEF,
  parameter int unsigned IW = $clog2(M),
  parameter int unsigned KW = $clog2(K + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  // pre-load of B
  input  logic          b_wr_en,
  input  logic [IW-1:0] b_wr_addr,
  input  data_t         b_wr_data [C],
  // packed sparse rows of A
  input  logic          a_valid,
  output logic          a_ready,
  input  logic [KW-1:0] a_k,
  input  data_t         a_val [K*N],
  input  logic [IW-1:0] a_idx [K*N],
  // rows of C
  output logic          c_valid,
  output acc_t          c_row [C]
);

  localparam int unsigned GW  = (K > 1) ? $clog2(K) : 1;
  localparam int unsigned LAT = 2 + $clog2(N);

  logic          load, issue;
  logic [GW-1:0] grp;
  logic          acc_valid, acc_first, acc_last;
  logic [IW-1:0] rd_addr [N];
  data_t         val     [N];
  data_t         rd_data [N][C];
  acc_t          prod    [N][C];

  demm_ctrl #(.N(N), .K(K), .LAT(LAT)) u_ctrl (
    .clk, .rst_n, .a_valid, .a_k, .a_ready, .load, .grp, .issue,
    .acc_valid, .acc_first, .acc_last
  );

  demm_operand_select #(.N(N), .M(M), .K(K)) u_opsel (
    .clk, .load, .in_val(a_val), .in_idx(a_idx), .grp, .issue,
    .addr(rd_addr), .val
  );

  demm_bmem #(.N(N), .M(M), .C(C)) u_bmem (
    .clk, .wr_en(b_wr_en), .wr_addr(b_wr_addr), .wr_data(b_wr_data),
    .rd_en(issue), .rd_addr, .rd_data
  );

  demm_mult_array #(.N(N), .C(C)) u_mul (
    .clk, .en(1'b1), .b_row(rd_data), .val, .prod
  );

  for (genvar c = 0; c < C; c++) begin : g_col
    acc_t col_prod [N];
    acc_t col_sum;
    for (genvar n = 0; n < N; n++) begin : g_p
      assign col_prod[n] = prod[n][c];
    end
    demm_reduce_tree #(.N(N)) u_tree (
      .clk, .en(1'b1), .in(col_prod), .sum(col_sum)
    );
    demm_accumulator u_acc (
      .clk, .in_valid(acc_valid), .in_first(acc_first), .sum(col_sum),
      .acc(c_row[c])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) c_valid <= 1'b0;
    else        c_valid <= acc_valid && acc_last;
  end

endmodule
