// Testbench of the SV unit (d = 8, P_SV = 4, L = 8). Rows of random
// probabilities are handed over as the QK unit would; the value buffer is
// modelled here with one-cycle read latency. Each output word must equal
// the fixed-point sum of p_j * v_j over the keys computed here, rows must
// take L*d/P_SV cycles, and s_ready must drop once both row buffers are
// full.
//
// The behaviour checked is the published design's; the stimulus, the
// reference model and the reduced sizes are this testbench's own choices.
module tb_sv_unit;
  import abf_pkg::*;
  localparam int P_SV = 4, HEAD_D = 8, MAX_L = 16, L = 8, CH = HEAD_D / P_SV, ROWS = 5;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  logic [4:0] n_keys;
  logic s_valid, s_last, s_ready, v_re, o_valid, computing;
  logic [3:0] s_idx;
  real_t s_data;
  logic [4:0] v_addr;
  real_t v_data [P_SV], o_data [P_SV];
  logic [0:0] o_chunk;
  int checks = 0, failures = 0, n_full = 0;

  sv_unit #(.P_SV(P_SV), .HEAD_D(HEAD_D), .MAX_L(MAX_L)) dut (.*);

  int vm [L][HEAD_D], pm [ROWS][L];
  always @(posedge clk) if (v_re)
    for (int p = 0; p < P_SV; p++) v_data[p] <= real_t'(vm[v_addr / CH][(v_addr % CH) * P_SV + p]);

  int row = 0, chunk = 0;
  always @(negedge clk) if (rst_n) begin
    n_full += int'(!s_ready);
    if (o_valid) begin
      checks++;
      if (int'(o_chunk) != chunk) begin failures++; $display("chunk %0d exp %0d", o_chunk, chunk); end
      for (int p = 0; p < P_SV; p++) begin
        int acc, e;
        acc = 0;
        for (int j = 0; j < L; j++) acc += pm[row][j] * vm[j][chunk * P_SV + p];
        e = int'(signed'(16'(acc >>> 8)));
        checks++;
        if (int'(o_data[p]) != e) begin failures++; $display("row %0d col %0d got %0d exp %0d", row, chunk * P_SV + p, o_data[p], e); end
      end
      chunk++;
      if (chunk == CH) begin chunk = 0; row++; end
    end
  end

  int run = 0;
  always @(posedge clk) if (rst_n) begin
    if (computing) run++;
    else if (run != 0) begin checks++; if (run != L * CH) begin failures++; $display("row cycles %0d", run); end run = 0; end
  end

  initial begin
    n_keys = 5'(L); s_valid = 0; s_last = 0; s_idx = 0; s_data = 0;
    for (int j = 0; j < L; j++) for (int d = 0; d < HEAD_D; d++) vm[j][d] = int'($urandom % 512) - 256;
    for (int r = 0; r < ROWS; r++) for (int j = 0; j < L; j++) pm[r][j] = int'($urandom % 64);
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      while (!s_ready) @(negedge clk);
      for (int j = 0; j < L; j++) begin
        s_valid = 1; s_idx = 4'(j); s_data = real_t'(pm[r][j]); s_last = (j == L - 1);
        @(negedge clk);
      end
      s_valid = 0; s_last = 0;
    end
    wait (row == ROWS);
    checks++; if (n_full == 0) begin failures++; $display("s_ready never dropped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
