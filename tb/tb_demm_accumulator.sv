// tb_demm_accumulator: self-checking test of the per-column accumulator.
//
// Random sequences of rows, each of 1..8 passes, are fed with random idle
// cycles between passes. The register must load on a row's first pass, add
// on later passes, hold while in_valid is low, and wrap modulo 2^32.
module tb_demm_accumulator;
  import demm_pkg::*;

  logic clk = 0, in_valid = 0, in_first = 0;
  acc_t sum = '0, acc;
  int   model;
  int checks = 0, failures = 0;

  demm_accumulator dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 200; r++) begin
      int k = $urandom_range(1, 8);
      for (int p = 0; p < k; p++) begin
        @(negedge clk);
        in_valid = 1; in_first = (p == 0);
        sum = acc_t'($urandom);
        model = (p == 0) ? int'(sum) : model + int'(sum);
        @(negedge clk);
        in_valid = 0; in_first = $urandom_range(0, 1) == 1; sum = acc_t'($urandom);
        checks++;
        if (acc !== model) begin failures++; $display("row %0d pass %0d acc %0d exp %0d", r, p, acc, model); end
        repeat ($urandom_range(0, 2)) @(negedge clk);
        checks++;
        if (acc !== model) begin failures++; $display("row %0d pass %0d did not hold", r, p); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
