// Testbench of the attention processor with two heads (d = 8,
// P_QK = P_SV = 4, L = 8 keys, M = 6 query rows); each head gets its own
// random Q, K and V through the shared load port with a head select. Keys and values are loaded first; query rows are
// loaded one at a time while the engine runs, and each becomes visible
// through q_rows_ready. Outputs are compared with floating-point attention
// (scores scaled by 1/2, exact softmax; tolerance 0.08 for the approximate
// exponential and Q8.8 rounding). It checks the cycles per row in each
// unit (L*d/P) and that QK and SV work on different rows at the same time.
//
// The behaviour checked is the published design's; the stimulus, the
// reference model and the reduced sizes are this testbench's own choices.
module tb_attention_processor;
  import abf_pkg::*;
  localparam int H = 2, P_QK = 4, P_SV = 4, HEAD_D = 8, MAX_L = 16, L = 8, M = 6;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  logic start, wr_pp, rd_pp, ld_we, busy, ev_overlap;
  logic o_valid [H];
  logic [0:0] ld_head;
  logic [4:0] n_keys, n_rows, q_rows_ready;
  logic [1:0] ld_buf;
  logic [3:0] ld_row;
  logic [2:0] ld_col;
  real_t ld_data;
  logic [0:0] o_chunk [H];
  real_t o_data [H][P_SV];
  int checks = 0, failures = 0, n_ovl = 0;

  attention_processor #(.P_HEAD(H), .P_QK(P_QK), .P_SV(P_SV), .HEAD_D(HEAD_D), .MAX_L(MAX_L)) dut (.*);

  real qm [H][M][HEAD_D], km [H][L][HEAD_D], vm [H][L][HEAD_D];
  real att_q [H][$];

  task automatic ld(input int h, input int b, input int r, input int c, input real x);
    @(negedge clk);
    ld_we = 1; ld_head = 1'(h); ld_buf = 2'(b); ld_row = 4'(r); ld_col = 3'(c); ld_data = real_t'($rtoi(x * 256.0));
  endtask

  always @(negedge clk) if (rst_n) begin
    n_ovl += int'(ev_overlap);
    for (int h = 0; h < H; h++) if (o_valid[h]) for (int p = 0; p < P_SV; p++) begin
      real x;
      x = att_q[h].pop_front();
      checks++;
      if (real'(o_data[h][p]) / 256.0 - x > 0.08 || real'(o_data[h][p]) / 256.0 - x < -0.08) begin
        failures++; $display("head %0d got %f exp %f", h, real'(o_data[h][p]) / 256.0, x);
      end
    end
  end

  int qk_run = 0, sv_run = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.g_ae[1].u_ae.scoring) qk_run++;
    else if (qk_run != 0) begin checks++; if (qk_run != L * HEAD_D / P_QK) begin failures++; $display("QK cycles %0d", qk_run); end qk_run = 0; end
    if (dut.g_ae[1].u_ae.computing) sv_run++;
    else if (sv_run != 0) begin checks++; if (sv_run != L * HEAD_D / P_SV) begin failures++; $display("SV cycles %0d", sv_run); end sv_run = 0; end
  end

  initial begin
    start = 0; wr_pp = 0; rd_pp = 0; ld_we = 0; n_keys = 0; n_rows = 0; q_rows_ready = 0;
    ld_head = 0; ld_buf = 0; ld_row = 0; ld_col = 0; ld_data = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int h = 0; h < H; h++) begin
      for (int i = 0; i < M; i++) for (int d = 0; d < HEAD_D; d++) qm[h][i][d] = real'($urandom % 512) / 256.0 - 1.0;
      for (int j = 0; j < L; j++) for (int d = 0; d < HEAD_D; d++) begin
        km[h][j][d] = real'($urandom % 512) / 256.0 - 1.0;
        vm[h][j][d] = real'($urandom % 512) / 256.0 - 1.0;
      end
      for (int i = 0; i < M; i++) begin
        real s [L];
        real mx, tot;
        for (int j = 0; j < L; j++) begin
          s[j] = 0;
          for (int d = 0; d < HEAD_D; d++) s[j] += qm[h][i][d] * km[h][j][d];
          s[j] = s[j] / 2.0;
        end
        mx = s[0];
        for (int j = 1; j < L; j++) if (s[j] > mx) mx = s[j];
        tot = 0;
        for (int j = 0; j < L; j++) begin s[j] = $exp(s[j] - mx); tot += s[j]; end
        for (int d = 0; d < HEAD_D; d++) begin
          real o;
          o = 0;
          for (int j = 0; j < L; j++) o += s[j] / tot * vm[h][j][d];
          att_q[h].push_back(o);
        end
      end
    end
    n_keys = 5'(L); n_rows = 5'(M);
    for (int h = 0; h < H; h++) for (int j = 0; j < L; j++) for (int d = 0; d < HEAD_D; d++) begin ld(h, 1, j, d, km[h][j][d]); ld(h, 2, j, d, vm[h][j][d]); end
    @(negedge clk); ld_we = 0; start = 1;
    @(negedge clk); start = 0;
    for (int i = 0; i < M; i++) begin
      for (int h = 0; h < H; h++) for (int d = 0; d < HEAD_D; d++) ld(h, 0, i, d, qm[h][i][d]);
      @(negedge clk); ld_we = 0;
      q_rows_ready = 5'(i + 1);
      if (i < 2) repeat (40) @(negedge clk);
    end
    wait (att_q[0].size() == 0 && att_q[1].size() == 0);
    repeat (5) @(negedge clk);
    checks++; if (busy) begin failures++; $display("still busy"); end
    checks++; if (n_ovl == 0) begin failures++; $display("no QK/SV overlap"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
