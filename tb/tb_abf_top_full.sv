// Full-size run of the accelerator top at its default parameters (64
// butterfly engines of 4 butterfly units, buffers of depth 1024, no
// attention processor). One complete butterfly-linear layer of length
// N = 256 goes through all 64 engines at once: even engines get identity
// butterflies (w1 = w4 = 1.0), odd engines doubling ones (w1 = w4 = 2.0),
// so each output must equal the input, or the input times N. Then engine
// 0 is routed into post-processing with zero shortcut, unit gamma and zero
// beta for one vector; the result must have zero mean (within rounding).
// Checks the compute-cycle count of engine 0 (log2 N * N / 8).
//
// The behaviour checked is the published design's; the stimulus, the
// reference model and the reduced sizes are this testbench's own choices.
module tb_abf_top_full;
  import abf_pkg::*;
  localparam int P_BE = 64, P_BU = 4, L2N = 8, N = 1 << L2N;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic mode, w_sel, route_postp, w_pp;
  logic [4:0] log2n;
  logic w_we [P_BE];
  logic [10:0] w_addr;
  bfly_w_t w_data [P_BU];
  logic in_valid [P_BE], in_ready [P_BE], out_valid [P_BE], out_ready [P_BE];
  cplx_t in_data [P_BE], out_data [P_BE];
  logic sc_we, sc_wpp, sc_rpp, g_we, pp_valid;
  logic [9:0] sc_waddr, g_addr;
  real_t sc_wdata, g_gamma, g_beta, pp_data;
  logic ap_start, ap_wr_pp, ap_rd_pp, ap_ld_we;
  logic [10:0] ap_n_keys, ap_n_rows, ap_q_rows_ready;
  logic [3:0] ap_ld_head;
  logic [1:0] ap_ld_buf;
  logic [9:0] ap_ld_row;
  logic [5:0] ap_ld_col;
  real_t ap_ld_data;
  logic ap_o_valid [12];
  logic [0:0] ap_o_chunk [12];
  real_t ap_o_data [12][1];
  logic bp_idle, postp_busy, ap_busy, ap_overlap;
  logic [3:0] bp_events;

  abf_top dut (.*);

  int checks = 0, failures = 0;
  int in_q [P_BE][$], exp_q [P_BE][$];
  int pp_sum = 0, pp_cnt = 0;

  always @(negedge clk) if (rst_n) begin
    for (int e = 0; e < P_BE; e++) begin
      if (in_q[e].size() > 0) begin in_valid[e] = 1; in_data[e] = '{im: 16'(0), re: 16'(in_q[e][0])}; end
      else in_valid[e] = 0;
    end
    #1;
    for (int e = 0; e < P_BE; e++) begin
      if (in_valid[e] && in_ready[e]) void'(in_q[e].pop_front());
      if (out_valid[e] && out_ready[e]) begin
        int x;
        x = exp_q[e].pop_front();
        checks++;
        if (int'(out_data[e].re) != x) begin failures++; if (failures < 10) $display("BE%0d got %0d exp %0d", e, out_data[e].re, x); end
      end
    end
    if (pp_valid) begin pp_sum += int'(pp_data); pp_cnt++; end
  end

  int cyc = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_bp.g_be[0].u_be.cp_start) cyc = 0;
    if (dut.u_bp.g_be[0].u_be.ig_valid) cyc++;
    if (dut.u_bp.g_be[0].u_be.ig_done) begin
      checks++; if (cyc != L2N * N / 8) begin failures++; $display("compute cycles %0d", cyc); end
    end
  end

  task automatic load_weights();
    for (int a = 0; a < L2N * N / 8; a++) begin
      for (int par = 0; par < 2; par++) begin
        @(negedge clk);
        for (int e = 0; e < P_BE; e++) w_we[e] = (e % 2 == par);
        w_addr = 11'(a);
        for (int k = 0; k < P_BU; k++) w_data[k] = '{w4: 16'(256 << par), w3: 16'(0), w2: 16'(0), w1: 16'(256 << par)};
      end
    end
    @(negedge clk);
    for (int e = 0; e < P_BE; e++) w_we[e] = 0;
  endtask

  initial begin
    mode = MODE_BLT; log2n = 5'(L2N); w_sel = 0; w_pp = 0; w_addr = 0; route_postp = 0;
    for (int e = 0; e < P_BE; e++) begin w_we[e] = 0; in_valid[e] = 0; in_data[e] = '0; out_ready[e] = 1; end
    for (int k = 0; k < P_BU; k++) w_data[k] = '0;
    sc_we = 0; sc_wpp = 0; sc_rpp = 0; sc_waddr = 0; sc_wdata = 0; g_we = 0; g_addr = 0; g_gamma = 0; g_beta = 0;
    ap_start = 0; ap_wr_pp = 0; ap_rd_pp = 0; ap_ld_we = 0; ap_n_keys = 0; ap_n_rows = 0; ap_q_rows_ready = 0;
    ap_ld_head = 0; ap_ld_buf = 0; ap_ld_row = 0; ap_ld_col = 0; ap_ld_data = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    load_weights();
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      sc_we = 1; sc_waddr = 10'(i); sc_wdata = 0;
      g_we = 1; g_addr = 10'(i); g_gamma = 16'sd256; g_beta = 0;
    end
    @(negedge clk); sc_we = 0; g_we = 0;
    for (int e = 0; e < P_BE; e++)
      for (int i = 0; i < N; i++) begin
        int x;
        x = (e % 2 == 0) ? int'($urandom % 4096) - 2048 : int'($urandom % 8) - 4;
        in_q[e].push_back(x);
        exp_q[e].push_back((e % 2 == 0) ? x : x * N);
      end
    wait (exp_q[0].size() == 0 && exp_q[P_BE - 1].size() == 0);
    wait (bp_idle);
    // one vector of engine 0 through post-processing
    @(negedge clk); route_postp = 1;
    for (int i = 0; i < N; i++) begin
      in_q[0].push_back(int'($urandom % 512) - 256);
    end
    wait (pp_cnt == N);
    checks++;
    if (pp_sum > N || pp_sum < -N) begin failures++; $display("normalised sum %0d", pp_sum); end
    for (int e = 0; e < P_BE; e++) begin checks++; if (exp_q[e].size() != 0) begin failures++; $display("BE%0d outputs missing", e); end end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (50000) @(posedge clk); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
