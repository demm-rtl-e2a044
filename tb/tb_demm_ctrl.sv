// tb_demm_ctrl: self-checking test of the pass sequencer.
//
// Rows with random pass counts 1..K are offered with random gaps, and a_valid
// is held while a_ready is low. A reference model of the sequencer predicts,
// cycle by cycle, a_ready, issue and the group select, and the expected tags
// at the accumulator input exactly LAT cycles after each issue. The test
// also checks that rows stream at one row per k cycles with no bubble.
module tb_demm_ctrl;
  import demm_pkg::*;

  localparam int unsigned N = 8, K = 4, LAT = 5, GW = $clog2(K), KW = $clog2(K + 1);

  logic          clk = 0, rst_n = 0;
  logic          a_valid = 0;
  logic [KW-1:0] a_k = KW'(1);
  logic          a_ready, load, issue;
  logic [GW-1:0] grp;
  logic          acc_valid, acc_first, acc_last;

  int checks = 0, failures = 0;
  // reference state
  bit m_busy = 0; int m_grp = 0, m_k = 1;
  bit tv [$], tf [$], tl [$];
  int rows_done = 0, b2b = 0;

  demm_ctrl #(.N(N), .K(K), .LAT(LAT)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit got, input bit exp, input string what);
    checks++;
    if (got !== exp) begin failures++; if (failures < 20) $display("%t %s got %0b exp %0b", $time, what, got, exp); end
  endtask

  // compare with the reference model just before every rising edge
  always @(negedge clk) if (rst_n) begin
    bit m_last, m_ready;
    #4;
    m_last  = m_busy && (m_grp == m_k - 1);
    m_ready = !m_busy || m_last;
    chk(a_ready, m_ready, "a_ready");
    chk(issue, m_busy, "issue");
    if (m_busy) begin checks++; if (int'(grp) != m_grp) begin failures++; $display("grp %0d exp %0d", grp, m_grp); end end
    if (tv.size() == LAT) begin
      chk(acc_valid, tv[0], "acc_valid");
      chk(acc_first, tf[0], "acc_first");
      chk(acc_last,  tl[0], "acc_last");
      void'(tv.pop_front()); void'(tf.pop_front()); void'(tl.pop_front());
    end
    tv.push_back(m_busy); tf.push_back(m_busy && m_grp == 0); tl.push_back(m_last);
    if (m_last) rows_done++;
    if (m_last && a_valid) b2b++;
    if (a_valid && m_ready) begin m_busy = 1; m_grp = 0; m_k = int'(a_k); end
    else if (m_last) m_busy = 0;
    else if (m_busy) m_grp++;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 200; r++) begin
      @(negedge clk);
      a_valid = 1; a_k = KW'($urandom_range(1, K));
      #1;
      while (!a_ready) begin @(negedge clk); #1; end
      @(negedge clk);
      a_valid = ($urandom_range(0, 2) == 0) ? 1'b0 : 1'b1;
      if (!a_valid) repeat ($urandom_range(0, 3)) @(negedge clk);
      a_valid = 0;
    end
    repeat (LAT + K + 2) @(negedge clk);
    checks++;
    if (b2b == 0) begin failures++; $display("no back-to-back row was seen"); end
    $display("rows %0d, back-to-back %0d", rows_done, b2b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
