// tb_demm_workload: runs the default DeMM(8, 128, 64, 8) engine on rows of
// A drawn from the sparsity patterns the design is meant for.
//
//   pattern 0: relaxed, unstructured 95 % sparsity inside a 128-wide block
//              (each element non-zero with probability 1/20); rows with more
//              than 8 non-zeros take ceil(nnz / 8) passes
//   pattern 1: fine-grained 1:8  (at most one non-zero per 8 columns)
//   pattern 2: fine-grained 1:4
//   pattern 3: fine-grained 1:2
//
// For each pattern a random 128 x 64 tile of B is pre-loaded and ROWS rows
// of A are streamed with a_valid held high. Every output word is compared
// with a 32-bit integer reference, and the number of cycles from the first
// row's acceptance to the last row's c_valid must equal
// sum(k) + 3 + ceil(log2 N), i.e. one pass per cycle with no bubbles.
module tb_demm_workload;
  import demm_pkg::*;

  localparam int unsigned N  = N_DEF;
  localparam int unsigned M  = M_DEF;
  localparam int unsigned C  = C_DEF;
  localparam int unsigned K  = K_DEF;
  localparam int unsigned IW = $clog2(M);
  localparam int unsigned KW = $clog2(K + 1);
  localparam int unsigned L  = $clog2(N);
  localparam int unsigned ROWS = 40;

  logic          clk = 0, rst_n = 0;
  logic          b_wr_en = 0;
  logic [IW-1:0] b_wr_addr = '0;
  data_t         b_wr_data [C];
  logic          a_valid = 0, a_ready;
  logic [KW-1:0] a_k = KW'(1);
  data_t         a_val [K*N];
  logic [IW-1:0] a_idx [K*N];
  logic          c_valid;
  acc_t          c_row [C];

  demm_engine dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int bm [M][C];
  int exp_rows [ROWS][C];
  int row_k [ROWS];
  longint edge_n = 0, first_acc = -1, last_out = -1;
  int n_acc = 0, n_out = 0;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    edge_n++;
    if (rst_n && a_valid && a_ready) begin
      if (first_acc < 0) first_acc = edge_n;
      n_acc++;
    end
    if (rst_n && c_valid) begin
      int bad;
      bad = 0;
      last_out = edge_n;
      for (int c = 0; c < C; c++) begin
        checks++;
        if (n_out >= ROWS || c_row[c] !== exp_rows[n_out][c]) begin
          failures++; bad++;
          if (bad < 3) $display("row %0d col %0d mismatch", n_out, c);
        end
      end
      n_out++;
    end
  end

  // Builds row r of the given pattern, packs it and computes its result.
  task automatic make_row(input int pat, input int r);
    int nnz, group, k;
    nnz = 0;
    group = (pat == 1) ? 8 : (pat == 2) ? 4 : 2;
    for (int c = 0; c < C; c++) exp_rows[r][c] = 0;
    for (int j = 0; j < M; j++) begin
      bit nz;
      if (pat == 0) nz = ($urandom_range(0, 19) == 0);
      else          nz = 0;
      if (pat != 0 && j % group == 0) begin
        // one non-zero at a random position of this fine-grained block
        int pos = $urandom_range(0, group - 1);
        if ($urandom_range(0, 9) != 0) begin
          a_idx[nnz] = IW'(j + pos);
          a_val[nnz] = data_t'($urandom);
          nnz++;
        end
      end else if (nz && nnz < K * N) begin
        a_idx[nnz] = IW'(j);
        a_val[nnz] = data_t'($urandom);
        nnz++;
      end
    end
    k = (nnz + N - 1) / N;
    if (k == 0) k = 1;
    for (int s = nnz; s < K * N; s++) begin
      a_idx[s] = '0;
      a_val[s] = '0;
    end
    for (int s = 0; s < nnz; s++)
      for (int c = 0; c < C; c++) exp_rows[r][c] += int'(a_val[s]) * bm[a_idx[s]][c];
    a_k = KW'(k);
    row_k[r] = k;
  endtask

  initial begin
    string names [4] = '{"relaxed 95% (8:128)", "1:8", "1:4", "1:2"};
    for (int c = 0; c < C; c++) b_wr_data[c] = '0;
    for (int s = 0; s < K * N; s++) begin a_val[s] = '0; a_idx[s] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int pat = 0; pat < 4; pat++) begin
      int sum_k;
      for (int r = 0; r < M; r++) begin
        @(negedge clk);
        b_wr_en = 1; b_wr_addr = IW'(r);
        for (int c = 0; c < C; c++) begin
          b_wr_data[c] = data_t'($urandom);
          bm[r][c] = int'(b_wr_data[c]);
        end
      end
      @(negedge clk) b_wr_en = 0;
      first_acc = -1; n_acc = 0; n_out = 0; sum_k = 0;
      for (int r = 0; r < ROWS; r++) begin
        make_row(pat, r);
        sum_k += row_k[r];
        a_valid = 1;
        #1;
        while (!a_ready) begin @(negedge clk); #1; end
        @(negedge clk);
      end
      a_valid = 0;
      while (n_out < ROWS) @(negedge clk);
      checks++;
      if (last_out - first_acc != longint'(sum_k + 3 + L)) begin
        failures++;
        $display("%s: %0d cycles, expected %0d", names[pat], last_out - first_acc, sum_k + 3 + L);
      end
      $display("%s: %0d rows, %0d passes, %0d cycles", names[pat], ROWS, sum_k, last_out - first_acc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
