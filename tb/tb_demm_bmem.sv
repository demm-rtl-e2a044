// tb_demm_bmem: self-checking test of the multi-ported B memory.
//
// A small instance (3 read ports, 16 rows, 4 columns) is filled with random
// rows, then read through all ports at random addresses for many cycles. A
// software copy of the array predicts every read. The test also checks that
// read data appear one cycle after the address, hold while rd_en is low, and
// that a read of a row written in the same cycle returns the old row.
module tb_demm_bmem;
  import demm_pkg::*;

  localparam int unsigned N = 3, M = 16, C = 4, IW = $clog2(M);

  logic          clk = 0;
  logic          wr_en = 0, rd_en = 0;
  logic [IW-1:0] wr_addr = '0;
  data_t         wr_data [C];
  logic [IW-1:0] rd_addr [N];
  data_t         rd_data [N][C];

  data_t model [M][C];
  data_t exp_rd [N][C];
  int checks = 0, failures = 0;

  demm_bmem #(.N(N), .M(M), .C(C)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_rd();
    for (int n = 0; n < N; n++)
      for (int c = 0; c < C; c++) begin
        checks++;
        if (rd_data[n][c] !== exp_rd[n][c]) begin
          failures++;
          if (failures < 10) $display("port %0d col %0d: got %0d exp %0d", n, c, rd_data[n][c], exp_rd[n][c]);
        end
      end
  endtask

  initial begin
    for (int c = 0; c < C; c++) wr_data[c] = '0;
    for (int n = 0; n < N; n++) rd_addr[n] = '0;
    // pre-load every row
    for (int r = 0; r < M; r++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = IW'(r);
      for (int c = 0; c < C; c++) begin
        wr_data[c] = data_t'($urandom);
        model[r][c] = wr_data[c];
      end
    end
    @(negedge clk) wr_en = 0;
    // random reads, sometimes with a write to the same row in the same cycle
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      rd_en = (t == 0) || ($urandom_range(0, 3) != 0);
      for (int n = 0; n < N; n++) rd_addr[n] = IW'($urandom_range(0, M - 1));
      if (rd_en)
        for (int n = 0; n < N; n++) exp_rd[n] = model[rd_addr[n]];
      wr_en = ($urandom_range(0, 2) == 0);
      wr_addr = (wr_en && $urandom_range(0, 1) == 1) ? rd_addr[0] : IW'($urandom_range(0, M - 1));
      for (int c = 0; c < C; c++) wr_data[c] = data_t'($urandom);
      @(posedge clk);
      if (wr_en) model[wr_addr] = wr_data;
      #1 check_rd();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
