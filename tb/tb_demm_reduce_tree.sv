// tb_demm_reduce_tree: self-checking test of the pipelined adder tree.
//
// Two trees are tested, N = 8 (three levels, the default) and N = 5 (not a
// power of two, also three levels). A new random operand set is applied
// every cycle; each sum must appear exactly ceil(log2 N) cycles later and
// equal the 32-bit wrapped sum of its operands.
module tb_demm_reduce_tree;
  import demm_pkg::*;

  localparam int unsigned NA = 8, NB = 5, L = 3, T = 300;

  logic clk = 0;
  acc_t in_a [NA];
  acc_t in_b [NB];
  acc_t sum_a, sum_b;
  int   exp_a [T], exp_b [T];
  int checks = 0, failures = 0;

  demm_reduce_tree #(.N(NA)) dut_a (.clk, .en(1'b1), .in(in_a), .sum(sum_a));
  demm_reduce_tree #(.N(NB)) dut_b (.clk, .en(1'b1), .in(in_b), .sum(sum_b));

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < T + L; t++) begin
      @(negedge clk);
      if (t >= L) begin
        checks += 2;
        if (sum_a !== exp_a[t-L]) begin failures++; $display("N=8 t=%0d got %0d exp %0d", t-L, sum_a, exp_a[t-L]); end
        if (sum_b !== exp_b[t-L]) begin failures++; $display("N=5 t=%0d got %0d exp %0d", t-L, sum_b, exp_b[t-L]); end
      end
      if (t < T) begin
        exp_a[t] = 0; exp_b[t] = 0;
        for (int i = 0; i < NA; i++) begin
          in_a[i] = ($urandom_range(0, 3) == 0) ? acc_t'(32'h7fff_ffff) : acc_t'($urandom);
          exp_a[t] += int'(in_a[i]);
        end
        for (int i = 0; i < NB; i++) begin
          in_b[i] = acc_t'($urandom);
          exp_b[t] += int'(in_b[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
