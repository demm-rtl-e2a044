// tb_demm_example: directed test with small hand-worked matrices.
//
// B is the 4 x 3 matrix [a b c; d e f; g h i; j k l] with a..l = 1..12.
//   Engine X, one read port (N=1, K=2), runs
//     A1 = [0 0 3 0; 0 0 0 2; 0 4 0 0]   one non-zero per row, one pass,
//   giving rows 3g = 21 24 27, 2j = 20 22 24, 4d = 16 20 24.
//   Engine Y, two read ports (N=2, K=1), runs
//     A2 = [3 0 1 0; 2 0 0 2; 0 4 0 0]   up to two non-zeros per row,
//   giving rows 3a+g = 10 14 18, 2a+2j = 22 26 30, 4d = 16 20 24.
//   Engine X then runs A2 again with two passes per row (the time-shared,
//   denser mode) and must give the same rows as engine Y.
// The expected rows are written out here as constants, worked by hand.
module tb_demm_example;
  import demm_pkg::*;

  localparam int unsigned M = 4, C = 3, IW = 2;

  logic clk = 0, rst_n = 0;
  logic b_wr_en = 0;
  logic [IW-1:0] b_wr_addr = '0;
  data_t b_wr_data [C];

  // engine X: N=1, K=2
  logic          ax_valid = 0, ax_ready, cx_valid;
  logic [1:0]    ax_k = 2'd1;
  data_t         ax_val [2];
  logic [IW-1:0] ax_idx [2];
  acc_t          cx_row [C];
  // engine Y: N=2, K=1
  logic          ay_valid = 0, ay_ready, cy_valid;
  logic [0:0]    ay_k = 1'b1;
  data_t         ay_val [2];
  logic [IW-1:0] ay_idx [2];
  acc_t          cy_row [C];

  demm_engine #(.N(1), .M(M), .C(C), .K(2)) u_x (
    .clk, .rst_n, .b_wr_en, .b_wr_addr, .b_wr_data,
    .a_valid(ax_valid), .a_ready(ax_ready), .a_k(ax_k), .a_val(ax_val), .a_idx(ax_idx),
    .c_valid(cx_valid), .c_row(cx_row));
  demm_engine #(.N(2), .M(M), .C(C), .K(1)) u_y (
    .clk, .rst_n, .b_wr_en, .b_wr_addr, .b_wr_data,
    .a_valid(ay_valid), .a_ready(ay_ready), .a_k(ay_k), .a_val(ay_val), .a_idx(ay_idx),
    .c_valid(cy_valid), .c_row(cy_row));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int exp_x [$], exp_y [$];

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (cx_valid) for (int c = 0; c < C; c++) begin
      checks++;
      if (exp_x.size() == 0 || cx_row[c] !== exp_x[0]) begin failures++; $display("X col %0d got %0d", c, cx_row[c]); end
      if (exp_x.size() != 0) void'(exp_x.pop_front());
    end
    if (cy_valid) for (int c = 0; c < C; c++) begin
      checks++;
      if (exp_y.size() == 0 || cy_row[c] !== exp_y[0]) begin failures++; $display("Y col %0d got %0d", c, cy_row[c]); end
      if (exp_y.size() != 0) void'(exp_y.pop_front());
    end
  end

  task automatic send_x(input int k, input int v0, input int i0, input int v1, input int i1);
    @(negedge clk);
    ax_valid = 1; ax_k = 2'(k);
    ax_val[0] = data_t'(v0); ax_idx[0] = IW'(i0);
    ax_val[1] = data_t'(v1); ax_idx[1] = IW'(i1);
    #1; while (!ax_ready) begin @(negedge clk); #1; end
    @(negedge clk) ax_valid = 0;
  endtask

  task automatic send_y(input int v0, input int i0, input int v1, input int i1);
    @(negedge clk);
    ay_valid = 1; ay_k = 1'b1;
    ay_val[0] = data_t'(v0); ay_idx[0] = IW'(i0);
    ay_val[1] = data_t'(v1); ay_idx[1] = IW'(i1);
    #1; while (!ay_ready) begin @(negedge clk); #1; end
    @(negedge clk) ay_valid = 0;
  endtask

  initial begin
    for (int s = 0; s < 2; s++) begin ax_val[s] = '0; ax_idx[s] = '0; ay_val[s] = '0; ay_idx[s] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < M; r++) begin
      @(negedge clk);
      b_wr_en = 1; b_wr_addr = IW'(r);
      for (int c = 0; c < C; c++) b_wr_data[c] = data_t'(r * C + c + 1);
    end
    @(negedge clk) b_wr_en = 0;

    // A1 on the one-port engine
    exp_x = '{21, 24, 27, 20, 22, 24, 16, 20, 24};
    send_x(1, 3, 2, 0, 0);
    send_x(1, 2, 3, 0, 0);
    send_x(1, 4, 1, 0, 0);
    repeat (10) @(negedge clk);

    // A2 on the two-port engine, and on the one-port engine in two passes
    exp_y = '{10, 14, 18, 22, 26, 30, 16, 20, 24};
    exp_x = '{10, 14, 18, 22, 26, 30, 16, 20, 24};
    fork
      begin send_y(3, 0, 1, 2); send_y(2, 0, 2, 3); send_y(4, 1, 0, 0); end
      begin send_x(2, 3, 0, 1, 2); send_x(2, 2, 0, 2, 3); send_x(2, 4, 1, 0, 0); end
    join
    repeat (12) @(negedge clk);
    checks++;
    if (exp_x.size() != 0 || exp_y.size() != 0) begin failures++; $display("missing output rows"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
