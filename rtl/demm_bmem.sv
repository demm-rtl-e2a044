// demm_bmem: the stationary B memory of the engine, M rows x C columns of
// 16-bit words, with one write port and N read ports.
//
// This is the storage that a systolic array would spread over its processing
// elements, gathered here into one regular multi-ported standard-cell array.
// The write port writes a whole row of B per cycle (pre-load). Every read
// port takes a row address -- the column index of one non-zero element of
// the sparse row of A -- and returns the whole selected row of B, one word
// per output column.
//
// Timing: writes take effect at the rising edge. Reads are synchronous: the
// addresses presented in cycle t give rd_data in cycle t+1; with rd_en low
// the read registers hold their value. A read of a row written in the same
// cycle returns the old contents. The array is not reset: B must be written
// before it is read.
//
// The port counts and the M x C shape follow the published organisation;
// the registered read and the collision rule are this design's choices.
module demm_bmem
  import demm_pkg::*;
#(
  parameter int unsigned N  = N_DEF,
  parameter int unsigned M  = M_DEF,
  parameter int unsigned C  = C_DEF,
  parameter int unsigned IW = $clog2(M)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [IW-1:0] wr_addr,
  input  data_t         wr_data [C],
  input  logic          rd_en,
  input  logic [IW-1:0] rd_addr [N],
  output data_t         rd_data [N][C]
);

  data_t mem [M][C];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en) begin
      for (int n = 0; n < N; n++) rd_data[n] <= mem[rd_addr[n]];
    end
  end

  // Every address must name an existing row of B.
  a_wr_addr : assert property (@(posedge clk) wr_en |-> int'(wr_addr) < M);
  for (genvar n = 0; n < N; n++) begin : g_rd_chk
    a_rd_addr : assert property (@(posedge clk) rd_en |-> int'(rd_addr[n]) < M);
  end

endmodule
