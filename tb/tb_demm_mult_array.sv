// tb_demm_mult_array: self-checking test of the N x C multiplier array.
//
// Random and extreme 16-bit signed operands (including -32768 x -32768) are
// applied to a 2 x 3 array; every product is compared one cycle later with
// a product computed in 32-bit integer arithmetic, and products must hold
// while the enable is low.
module tb_demm_mult_array;
  import demm_pkg::*;

  localparam int unsigned N = 2, C = 3;

  logic  clk = 0, en = 0;
  data_t b_row [N][C];
  data_t val [N];
  acc_t  prod [N][C];
  int    exp_p [N][C];
  int checks = 0, failures = 0;

  demm_mult_array #(.N(N), .C(C)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic data_t pick();
    case ($urandom_range(0, 5))
      0: return data_t'(-32768);
      1: return data_t'(32767);
      2: return data_t'(-1);
      default: return data_t'($urandom);
    endcase
  endfunction

  initial begin
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      en = (t % 7 != 6);
      for (int n = 0; n < N; n++) begin
        val[n] = pick();
        for (int c = 0; c < C; c++) begin
          b_row[n][c] = pick();
          if (en) exp_p[n][c] = int'(b_row[n][c]) * int'(val[n]);
        end
      end
      @(negedge clk);
      en = 0;
      for (int n = 0; n < N; n++)
        for (int c = 0; c < C; c++) begin
          checks++;
          if (prod[n][c] !== exp_p[n][c]) begin
            failures++;
            $display("prod[%0d][%0d] = %0d exp %0d", n, c, prod[n][c], exp_p[n][c]);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
