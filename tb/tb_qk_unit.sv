// Testbench of the QK unit (d = 8, P_QK = 4, L = 8, M = 4). The query and
// key buffers are modelled here with one-cycle read latency. Each emitted
// row of S is compared with a floating-point softmax of q.k / 2
// (tolerance 0.03 per probability), the key index sequence and last flag
// are checked, the row must sum to about 1, and the scoring phase must last
// L*d/P_QK cycles. The SV side holds s_ready low for a while to check that
// the unit waits.
//
// The behaviour checked is the published design's; the stimulus, the
// reference model and the reduced sizes are this testbench's own choices.
module tb_qk_unit;
  import abf_pkg::*;
  localparam int P_QK = 4, HEAD_D = 8, MAX_L = 16, L = 8, M = 4, CH = HEAD_D / P_QK;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  logic start, rd_en, s_ready, s_valid, s_last, scoring, busy;
  logic [4:0] n_keys, n_rows, q_rows_ready;
  logic [4:0] q_addr, k_addr;
  logic [3:0] s_idx;
  real_t q_data [P_QK], k_data [P_QK], s_data;
  int checks = 0, failures = 0;

  qk_unit #(.P_QK(P_QK), .HEAD_D(HEAD_D), .MAX_L(MAX_L)) dut (.*);

  int qm [M][HEAD_D], km [L][HEAD_D];
  always @(posedge clk) if (rd_en)
    for (int p = 0; p < P_QK; p++) begin
      q_data[p] <= real_t'(qm[q_addr / CH][(q_addr % CH) * P_QK + p]);
      k_data[p] <= real_t'(km[k_addr / CH][(k_addr % CH) * P_QK + p]);
    end

  real prob [M][L];
  int row = 0, col = 0;
  real rsum = 0;
  always @(negedge clk) if (rst_n && s_valid) begin
    real got;
    got = real'(s_data) / 256.0;
    checks += 2;
    if (int'(s_idx) != col || s_last != (col == L - 1)) begin failures++; $display("index %0d last %0d", s_idx, s_last); end
    if (got - prob[row][col] > 0.03 || got - prob[row][col] < -0.03) begin failures++; $display("row %0d key %0d got %f exp %f", row, col, got, prob[row][col]); end
    rsum += got;
    col++;
    if (col == L) begin
      checks++;
      if (rsum < 0.95 || rsum > 1.02) begin failures++; $display("row sum %f", rsum); end
      rsum = 0; col = 0; row++;
    end
  end

  int run = 0;
  always @(posedge clk) if (rst_n) begin
    if (scoring) run++;
    else if (run != 0) begin checks++; if (run != L * CH) begin failures++; $display("scoring cycles %0d", run); end run = 0; end
  end

  initial begin
    start = 0; s_ready = 1; n_keys = 5'(L); n_rows = 5'(M); q_rows_ready = 0;
    for (int i = 0; i < M; i++) for (int d = 0; d < HEAD_D; d++) qm[i][d] = int'($urandom % 512) - 256;
    for (int j = 0; j < L; j++) for (int d = 0; d < HEAD_D; d++) km[j][d] = int'($urandom % 512) - 256;
    for (int i = 0; i < M; i++) begin
      real s [L];
      real mx, tot;
      for (int j = 0; j < L; j++) begin
        s[j] = 0;
        for (int d = 0; d < HEAD_D; d++) s[j] += real'(qm[i][d]) * real'(km[j][d]) / 65536.0;
        s[j] = s[j] / 2.0;
      end
      mx = s[0];
      for (int j = 1; j < L; j++) if (s[j] > mx) mx = s[j];
      tot = 0;
      for (int j = 0; j < L; j++) begin s[j] = $exp(s[j] - mx); tot += s[j]; end
      for (int j = 0; j < L; j++) prob[i][j] = s[j] / tot;
    end
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    repeat (10) @(negedge clk);
    checks++; if (scoring) begin failures++; $display("started before a query row was ready"); end
    q_rows_ready = 2;
    s_ready = 0;
    repeat (60) @(negedge clk);
    checks++; if (s_valid || row != 0) begin failures++; $display("emitted while SV was not ready"); end
    s_ready = 1;
    q_rows_ready = 5'(M);
    wait (row == M);
    repeat (5) @(negedge clk);
    checks++; if (busy) begin failures++; $display("still busy"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
