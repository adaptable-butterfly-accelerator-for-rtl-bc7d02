// Testbench of one attention engine (d = 8, P_QK = P_SV = 4, L = 8 keys,
// M = 6 query rows). Keys and values are loaded first; query rows are
// loaded one at a time while the engine runs, and each becomes visible
// through q_rows_ready. Outputs are compared with floating-point attention
// (scores scaled by 1/2, exact softmax; tolerance 0.08 for the approximate
// exponential and Q8.8 rounding). It checks the cycles per row in each
// unit (L*d/P) and that QK and SV work on different rows at the same time.
//
// The behaviour checked is the published design's; the stimulus, the
// reference model and the reduced sizes are this testbench's own choices.
module tb_attention_engine;
  import abf_pkg::*;
  localparam int P_QK = 4, P_SV = 4, HEAD_D = 8, MAX_L = 16, L = 8, M = 6;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  logic start, wr_pp, rd_pp, ld_we, o_valid, busy, ev_overlap;
  logic [4:0] n_keys, n_rows, q_rows_ready;
  logic [1:0] ld_buf;
  logic [3:0] ld_row;
  logic [2:0] ld_col;
  real_t ld_data;
  logic [0:0] o_chunk;
  real_t o_data [P_SV];
  int checks = 0, failures = 0, n_ovl = 0;

  attention_engine #(.P_QK(P_QK), .P_SV(P_SV), .HEAD_D(HEAD_D), .MAX_L(MAX_L)) dut (.*);

  real qm [M][HEAD_D], km [L][HEAD_D], vm [L][HEAD_D];
  real att_q [$];

  task automatic ld(input int b, input int r, input int c, input real x);
    @(negedge clk);
    ld_we = 1; ld_buf = 2'(b); ld_row = 4'(r); ld_col = 3'(c); ld_data = real_t'($rtoi(x * 256.0));
  endtask

  always @(negedge clk) if (rst_n) begin
    n_ovl += int'(ev_overlap);
    if (o_valid) for (int p = 0; p < P_SV; p++) begin
      real x;
      x = att_q.pop_front();
      checks++;
      if (real'(o_data[p]) / 256.0 - x > 0.08 || real'(o_data[p]) / 256.0 - x < -0.08) begin
        failures++; $display("got %f exp %f", real'(o_data[p]) / 256.0, x);
      end
    end
  end

  int qk_run = 0, sv_run = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.scoring) qk_run++;
    else if (qk_run != 0) begin checks++; if (qk_run != L * HEAD_D / P_QK) begin failures++; $display("QK cycles %0d", qk_run); end qk_run = 0; end
    if (dut.computing) sv_run++;
    else if (sv_run != 0) begin checks++; if (sv_run != L * HEAD_D / P_SV) begin failures++; $display("SV cycles %0d", sv_run); end sv_run = 0; end
  end

  initial begin
    start = 0; wr_pp = 0; rd_pp = 0; ld_we = 0; n_keys = 0; n_rows = 0; q_rows_ready = 0;
    ld_buf = 0; ld_row = 0; ld_col = 0; ld_data = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < M; i++) for (int d = 0; d < HEAD_D; d++) qm[i][d] = real'($urandom % 512) / 256.0 - 1.0;
    for (int j = 0; j < L; j++) for (int d = 0; d < HEAD_D; d++) begin
      km[j][d] = real'($urandom % 512) / 256.0 - 1.0;
      vm[j][d] = real'($urandom % 512) / 256.0 - 1.0;
    end
    for (int i = 0; i < M; i++) begin
      real s [L];
      real mx, tot;
      for (int j = 0; j < L; j++) begin
        s[j] = 0;
        for (int d = 0; d < HEAD_D; d++) s[j] += qm[i][d] * km[j][d];
        s[j] = s[j] / 2.0;
      end
      mx = s[0];
      for (int j = 1; j < L; j++) if (s[j] > mx) mx = s[j];
      tot = 0;
      for (int j = 0; j < L; j++) begin s[j] = $exp(s[j] - mx); tot += s[j]; end
      for (int d = 0; d < HEAD_D; d++) begin
        real o;
        o = 0;
        for (int j = 0; j < L; j++) o += s[j] / tot * vm[j][d];
        att_q.push_back(o);
      end
    end
    n_keys = 5'(L); n_rows = 5'(M);
    for (int j = 0; j < L; j++) for (int d = 0; d < HEAD_D; d++) begin ld(1, j, d, km[j][d]); ld(2, j, d, vm[j][d]); end
    @(negedge clk); ld_we = 0; start = 1;
    @(negedge clk); start = 0;
    for (int i = 0; i < M; i++) begin
      for (int d = 0; d < HEAD_D; d++) ld(0, i, d, qm[i][d]);
      @(negedge clk); ld_we = 0;
      q_rows_ready = 5'(i + 1);
      if (i < 2) repeat (40) @(negedge clk);
    end
    wait (att_q.size() == 0);
    repeat (5) @(negedge clk);
    checks++; if (busy) begin failures++; $display("still busy"); end
    checks++; if (n_ovl == 0) begin failures++; $display("no QK/SV overlap"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
