// demm_pkg: shared constants and data types of the DeMM sparse x dense
// matrix-multiplication engine.
//
// The default configuration is DeMM(N=8, M=128, C=64, k=8): rows of the
// sparse matrix A hold at most N non-zeros in every M consecutive elements in
// the relaxed mode (8:128) and up to k*N (64:128, i.e. the density of 1:2) when
// the engine time-shares its read ports over k passes. B is an M x C dense
// matrix held stationary inside the engine. Inputs and weights are 16-bit
// integers and accumulation is done on 32 bits, as in the published
// evaluation. Treating the 16-bit values as signed two's complement is this
// design's own choice.
package demm_pkg;

  // Default engine shape: DeMM(N, M, C, k).
  parameter int unsigned N_DEF  = 8;    // read ports = non-zeros per pass
  parameter int unsigned M_DEF  = 128;  // rows of B = block size of A
  parameter int unsigned C_DEF  = 64;   // columns of B = outputs per row
  parameter int unsigned K_DEF  = 8;    // maximum passes per row of A

  parameter int unsigned DW = 16;       // input / weight width
  parameter int unsigned AW = 32;       // product / accumulator width

  typedef logic signed [DW-1:0] data_t;
  typedef logic signed [AW-1:0] acc_t;

endpackage
