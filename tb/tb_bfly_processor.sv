// Testbench of the butterfly processor with two engines sharing one
// configuration. Engine 0 gets identity butterflies (w1 = w4 = 1.0) and
// engine 1 doubling butterflies (w1 = w4 = 2.0), so after log2 N stages
// engine 1 must return its input times N while engine 0 returns its input
// unchanged; the streams of the two engines are independent (different
// data, random gaps and back-pressure). It also checks the compute-cycle
// count of each vector (log2 N * N / 8) and that the combined status
// reports overlap of load and compute.
//
// The behaviour checked is the published design's; the stimulus, the
// reference model and the reduced sizes are this testbench's own choices.
module tb_bfly_processor;
  import abf_pkg::*;
  localparam int P_BE = 2, P_BU = 4;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  logic mode, w_sel, w_pp, idle;
  logic [4:0] log2n;
  logic w_we [P_BE];
  logic [9:0] w_addr;
  bfly_w_t w_data [P_BU];
  logic in_valid [P_BE], in_ready [P_BE], out_valid [P_BE], out_ready [P_BE];
  cplx_t in_data [P_BE], out_data [P_BE];
  logic [3:0] events;
  int checks = 0, failures = 0, n_ovl = 0;

  bfly_processor #(.P_BE(P_BE), .P_BU(P_BU), .DEPTH(64), .WDEPTH(1024)) dut (.*);

  int in_q [P_BE][$], exp_q [P_BE][$];
  always @(negedge clk) if (rst_n) begin
    for (int e = 0; e < P_BE; e++) begin
      out_ready[e] = ($urandom % 3) != 0;
      if (in_q[e].size() > 0 && ($urandom % 5) != 0) begin in_valid[e] = 1; in_data[e] = '{im: 16'(0), re: 16'(in_q[e][0])}; end
      else in_valid[e] = 0;
    end
    #1;
    n_ovl += int'(events[1]);
    for (int e = 0; e < P_BE; e++) begin
      if (in_valid[e] && in_ready[e]) void'(in_q[e].pop_front());
      if (out_valid[e] && out_ready[e]) begin
        int x;
        x = exp_q[e].pop_front();
        checks++;
        if (int'(out_data[e].re) != x) begin failures++; $display("BE%0d got %0d exp %0d", e, out_data[e].re, x); end
      end
    end
  end

  int cyc = 0, exp_cyc = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.g_be[1].u_be.cp_start) cyc = 0;
    if (dut.g_be[1].u_be.ig_valid) cyc++;
    if (dut.g_be[1].u_be.ig_done) begin checks++; if (cyc != exp_cyc) begin failures++; $display("cycles %0d", cyc); end end
  end

  initial begin
    mode = MODE_BLT; w_sel = 0; w_pp = 0; w_addr = 0; log2n = 0;
    for (int e = 0; e < P_BE; e++) begin w_we[e] = 0; in_valid[e] = 0; in_data[e] = '0; out_ready[e] = 1; end
    for (int k = 0; k < P_BU; k++) w_data[k] = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int l2n = 3; l2n <= 6; l2n++) begin
      int n;
      n = 1 << l2n;
      wait (idle);
      @(negedge clk);
      log2n = 5'(l2n); exp_cyc = l2n * n / 8;
      for (int e = 0; e < P_BE; e++) begin
        for (int a = 0; a < l2n * n / 8; a++) begin
          w_we[e] = 1; w_addr = 10'(a);
          for (int k = 0; k < P_BU; k++) w_data[k] = '{w4: 16'(256 << e), w3: 16'(0), w2: 16'(0), w1: 16'(256 << e)};
          @(negedge clk);
        end
        w_we[e] = 0;
      end
      for (int v = 0; v < 3; v++)
        for (int i = 0; i < n; i++)
          for (int e = 0; e < P_BE; e++) begin
            int x;
            x = int'($urandom % 64) - 32;
            in_q[e].push_back(x);
            exp_q[e].push_back(x << (e * l2n));
          end
      wait (exp_q[0].size() == 0 && exp_q[1].size() == 0);
    end
    checks++; if (n_ovl == 0) begin failures++; $display("no load/compute overlap"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("watchdog in %0d exp %0d idle %0d ir %0d", in_q[0].size(), exp_q[0].size(), idle, in_ready[0]); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
