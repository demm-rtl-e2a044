// tb_demm_full: end-to-end self-checking test of the DeMM engine at its default size, DeMM(8, 128, 64, 8).
//
// The test pre-loads a random B, then streams random packed sparse rows of A
// through the valid/ready input. Each row draws its pass count k from 1..K
// and a number of non-zeros from 0..k*N at distinct random columns; unused
// pairs of the row's k groups carry value 0 and the pairs beyond group k
// carry random values that must be ignored. A reference model computes
// C[i,:] = sum A[i,j] * B[j,:] in 32-bit integer arithmetic. The test checks
// every output word, the latency (k + 3 + ceil(log2 N) cycles from acceptance
// to c_valid) and the input rate (a new row exactly k cycles after the
// previous one when offered in time). After a first batch it rewrites part
// of B and runs a second batch. It counts how often each mechanism occurred
// -- B pre-load, every pass count 1..K, multi-pass accumulation,
// back-to-back rows, input back-pressure, zero-padded rows, full rows and the
// rewrite of B -- and counts a failure for any that never happened.
module tb_demm_full;
  import demm_pkg::*;

  localparam int unsigned N  = N_DEF;
  localparam int unsigned M  = M_DEF;
  localparam int unsigned C  = C_DEF;
  localparam int unsigned K  = K_DEF;
  localparam int unsigned IW = $clog2(M);
  localparam int unsigned KW = $clog2(K + 1);
  localparam int unsigned L  = $clog2(N);
  localparam int unsigned ROWS = 60;   // rows per batch

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
  int cnt_preload = 0, cnt_multipass = 0, cnt_b2b = 0, cnt_stall = 0;
  int cnt_padded = 0, cnt_full = 0, cnt_reload = 0, cnt_rows_out = 0;
  int cnt_k [K+1];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference copy of B
  int bm [M][C];

  // expected outputs, in order
  typedef struct {
    int   data [C];
    longint due;   // edge at which c_valid is expected
  } exp_t;
  exp_t q [$];

  // row offered by the driver, with its reference result
  int row_exp [C];
  int cur_k;

  // ---------------------------------------------------------------- monitor
  longint edge_n = 0;
  longint last_acc = -1;
  int     last_k = 0;
  longint offer_start = -1;

  always @(posedge clk) begin
    edge_n++;
    if (rst_n) begin
      if (a_valid && offer_start < 0) offer_start = edge_n;
      if (a_valid && !a_ready) cnt_stall++;
      if (a_valid && a_ready) begin
        exp_t e;
        longint want;
        want = (last_acc < 0) ? offer_start : ((offer_start > last_acc + last_k) ? offer_start : last_acc + last_k);
        checks++;
        if (edge_n != want) begin
          failures++; $display("row accepted at edge %0d, expected %0d", edge_n, want);
        end
        if (last_acc >= 0 && edge_n == last_acc + last_k) cnt_b2b++;
        e.data = row_exp;
        e.due  = edge_n + cur_k + 3 + L;
        q.push_back(e);
        last_acc = edge_n; last_k = cur_k; offer_start = -1;
      end
      if (c_valid) begin
        cnt_rows_out++;
        checks++;
        if (q.size() == 0) begin
          failures++; $display("unexpected output row at edge %0d", edge_n);
        end else begin
          exp_t e;
          int bad;
          e = q.pop_front();
          bad = 0;
          if (edge_n != e.due) begin
            failures++; $display("output row at edge %0d, expected at %0d", edge_n, e.due);
          end
          for (int c = 0; c < C; c++) begin
            checks++;
            if (c_row[c] !== e.data[c]) begin
              failures++; bad++;
              if (bad < 4) $display("row %0d col %0d got %0d exp %0d", cnt_rows_out, c, c_row[c], e.data[c]);
            end
          end
        end
      end
    end
  end

  // ----------------------------------------------------------------- driver
  task automatic write_b_row(input int r);
    @(negedge clk);
    b_wr_en = 1; b_wr_addr = IW'(r);
    for (int c = 0; c < C; c++) begin
      b_wr_data[c] = data_t'($urandom);
      bm[r][c] = int'(b_wr_data[c]);
    end
    cnt_preload++;
    @(negedge clk) b_wr_en = 0;
  endtask

  task automatic make_row();
    int perm [M];
    int k, nnz;
    k = $urandom_range(1, K);
    case ($urandom_range(0, 3))
      0: nnz = k * N;                       // full
      1: nnz = $urandom_range(0, k * N);
      default: nnz = $urandom_range((k - 1) * N + 1, k * N);
    endcase
    if (nnz > M) nnz = M;
    for (int i = 0; i < M; i++) perm[i] = i;
    for (int i = M - 1; i > 0; i--) begin
      int j = $urandom_range(0, i);
      int t = perm[i]; perm[i] = perm[j]; perm[j] = t;
    end
    for (int c = 0; c < C; c++) row_exp[c] = 0;
    for (int s = 0; s < K * N; s++) begin
      if (s < nnz) begin
        a_idx[s] = IW'(perm[s]);
        a_val[s] = ($urandom_range(0, 7) == 0) ? data_t'(-32768) : data_t'($urandom);
        for (int c = 0; c < C; c++) row_exp[c] += int'(a_val[s]) * bm[perm[s]][c];
      end else if (s < k * N) begin
        a_idx[s] = IW'($urandom_range(0, M - 1));
        a_val[s] = '0;                       // padding
      end else begin
        a_idx[s] = IW'($urandom_range(0, M - 1));
        a_val[s] = data_t'($urandom);        // beyond pass k: ignored
      end
    end
    a_k = KW'(k); cur_k = k;
    cnt_k[k]++;
    if (k > 1) cnt_multipass++;
    if (nnz < k * N) cnt_padded++; else cnt_full++;
  endtask

  task automatic run_batch();
    for (int r = 0; r < ROWS; r++) begin
      make_row();
      a_valid = 1;
      #1;
      while (!a_ready) begin @(negedge clk); #1; end
      @(negedge clk);
      a_valid = 0;
      // mostly back-to-back, sometimes a gap
      if ($urandom_range(0, 4) == 0) repeat ($urandom_range(1, 3)) @(negedge clk);
    end
    while (q.size() != 0) @(negedge clk);
  endtask

  initial begin
    for (int k = 0; k <= K; k++) cnt_k[k] = 0;
    for (int c = 0; c < C; c++) b_wr_data[c] = '0;
    for (int s = 0; s < K * N; s++) begin a_val[s] = '0; a_idx[s] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < M; r++) write_b_row(r);
    run_batch();
    // rewrite part of B between batches
    for (int r = 0; r < M; r += 3) write_b_row(r);
    cnt_reload++;
    run_batch();
    repeat (4) @(negedge clk);

    checks++; if (cnt_preload == 0)   begin failures++; $display("B pre-load never happened"); end
    for (int k = 1; k <= K; k++) begin
      checks++; if (cnt_k[k] == 0) begin failures++; $display("pass count %0d never used", k); end
    end
    checks++; if (cnt_multipass == 0) begin failures++; $display("no multi-pass row"); end
    checks++; if (cnt_b2b == 0)       begin failures++; $display("no back-to-back rows"); end
    checks++; if (cnt_stall == 0)     begin failures++; $display("no input back-pressure"); end
    checks++; if (cnt_padded == 0)    begin failures++; $display("no zero-padded row"); end
    checks++; if (cnt_full == 0)      begin failures++; $display("no full row"); end
    checks++; if (cnt_reload == 0)    begin failures++; $display("B never rewritten"); end
    checks++; if (cnt_rows_out != 2 * ROWS) begin failures++; $display("%0d rows out, expected %0d", cnt_rows_out, 2 * ROWS); end
    $display("B rows written %0d, rows %0d, multi-pass %0d, back-to-back %0d, stall cycles %0d, padded %0d, full %0d",
             cnt_preload, cnt_rows_out, cnt_multipass, cnt_b2b, cnt_stall, cnt_padded, cnt_full);
    for (int k = 1; k <= K; k++) $display("  rows with k=%0d: %0d", k, cnt_k[k]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
