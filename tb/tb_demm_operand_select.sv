// tb_demm_operand_select: self-checking test of the row buffer and the K:1
// operand multiplexers.
//
// Random packed rows (K = 4 groups of N = 3 pairs) are loaded; for every
// group the test checks that read port n is given col_idx of pair g*N+n in
// the same cycle and value g*N+n one cycle later, and that a new row loaded
// in the last group's cycle does not disturb that group's outputs.
module tb_demm_operand_select;
  import demm_pkg::*;

  localparam int unsigned N = 3, M = 16, K = 4, IW = $clog2(M), GW = $clog2(K);

  logic          clk = 0;
  logic          load = 0, issue = 0;
  data_t         in_val [K*N];
  logic [IW-1:0] in_idx [K*N];
  logic [GW-1:0] grp = '0;
  logic [IW-1:0] addr [N];
  data_t         val [N];

  data_t         row_val [K*N];
  data_t         held [N];
  logic [IW-1:0] row_idx [K*N];
  int checks = 0, failures = 0;

  demm_operand_select #(.N(N), .M(M), .K(K)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic new_row();
    for (int i = 0; i < K*N; i++) begin
      in_val[i] = data_t'($urandom);
      in_idx[i] = IW'($urandom_range(0, M - 1));
    end
  endtask

  initial begin
    new_row();
    @(negedge clk) load = 1;
    row_val = in_val; row_idx = in_idx;
    @(negedge clk) load = 0;
    for (int r = 0; r < 20; r++) begin
      for (int g = 0; g < K; g++) begin
        grp = GW'(g); issue = 1;
        // load the next row together with the last group
        if (g == K - 1) begin new_row(); load = 1; end
        #1;
        for (int n = 0; n < N; n++) begin
          checks++;
          if (addr[n] !== row_idx[g*N + n]) begin
            failures++; $display("row %0d grp %0d port %0d addr %0d exp %0d", r, g, n, addr[n], row_idx[g*N+n]);
          end
        end
        @(negedge clk);
        for (int n = 0; n < N; n++) begin
          checks++;
          if (val[n] !== row_val[g*N + n]) begin
            failures++; $display("row %0d grp %0d port %0d val %0d exp %0d", r, g, n, val[n], row_val[g*N+n]);
          end
        end
        if (load) begin
          for (int n = 0; n < N; n++) held[n] = row_val[(K-1)*N + n];
          row_val = in_val; row_idx = in_idx; load = 0; end
      end
      // idle cycle: val must hold
      issue = 0; grp = GW'($urandom_range(0, K - 1));
      @(negedge clk);
      for (int n = 0; n < N; n++) begin
        checks++;
        if (val[n] !== held[n]) begin failures++; $display("val did not hold"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
