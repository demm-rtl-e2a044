// demm_ctrl: pass sequencer of the engine.
//
// A row of A arrives with a_k, the number of passes it needs (1..K): a row
// with up to a_k*N non-zeros is read through the N memory ports in a_k
// consecutive cycles, one group of N pairs per cycle. The controller accepts
// a row (a_valid && a_ready), asks the operand buffer to load it, then steps
// the group select `grp` from 0 to a_k-1, raising `issue` in each of those
// cycles. The next row is accepted in the cycle the last group issues, so
// rows stream with no bubbles: one row every a_k cycles.
//
// Each issued group carries a tag {first, last}. The tags travel through a
// shift register of LAT stages, matching the datapath between the memory
// address and the accumulator input (read register, product register and
// the adder-tree levels), and arrive as acc_valid/acc_first/acc_last
// together with the reduced sums of that group.
//
// Timing: with a row accepted at the edge ending cycle t0, its groups issue
// in cycles t0+1 .. t0+a_k. Reset (rst_n low, asynchronous) empties the
// sequencer and the tag pipeline.
//
// The paper states only that the read ports are time-shared for k times more
// cycles; the counter, the per-row k and the valid/ready handshake are this
// design's choices.
module demm_ctrl
  import demm_pkg::*;
#(
  parameter int unsigned N   = N_DEF,
  parameter int unsigned K   = K_DEF,
  parameter int unsigned LAT = 2 + $clog2(N),
  parameter int unsigned GW  = (K > 1) ? $clog2(K) : 1,
  parameter int unsigned KW  = $clog2(K + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          a_valid,
  input  logic [KW-1:0] a_k,
  output logic          a_ready,
  output logic          load,
  output logic [GW-1:0] grp,
  output logic          issue,
  output logic          acc_valid,
  output logic          acc_first,
  output logic          acc_last
);

  typedef struct packed {
    logic valid;
    logic first;
    logic last;
  } tag_t;

  logic          busy;
  logic [KW-1:0] k_q;
  logic          last_grp;

  assign issue    = busy;
  assign last_grp = (KW'(grp) + KW'(1) == k_q);
  assign a_ready  = !busy || last_grp;
  assign load     = a_valid && a_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      grp  <= '0;
      k_q  <= KW'(1);
    end else if (load) begin
      busy <= 1'b1;
      grp  <= '0;
      k_q  <= a_k;
    end else if (busy) begin
      if (last_grp) busy <= 1'b0;
      else          grp  <= grp + GW'(1);
    end
  end

  // Tag pipeline, aligned with the datapath.
  tag_t tags [LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) tags[i] <= '0;
    end else begin
      tags[0] <= '{valid: issue, first: issue && grp == '0, last: issue && last_grp};
      for (int i = 1; i < LAT; i++) tags[i] <= tags[i-1];
    end
  end

  assign acc_valid = tags[LAT-1].valid;
  assign acc_first = tags[LAT-1].first;
  assign acc_last  = tags[LAT-1].last;

  a_k_range : assert property (@(posedge clk) disable iff (!rst_n)
                               a_valid |-> (a_k != '0 && int'(a_k) <= K));
  a_hold    : assert property (@(posedge clk) disable iff (!rst_n)
                               a_valid && !a_ready |=> a_valid);

endmodule
