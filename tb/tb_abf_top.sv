// End-to-end testbench of the accelerator top (reduced sizes: two engines,
// buffers of depth 64, two attention heads of width 8).
//
// It runs a sequence of layers: butterfly linear, FFT, butterfly linear
// with engine 0 routed into post-processing (shortcut add + layer norm),
// and attention on the attention processor while the butterfly processor
// works on another layer. Results are compared with references computed
// here: bit-exact for the butterfly engines and post-processing, a
// floating-point DFT for FFT and floating-point attention (tolerance for
// the approximate exponential). It checks the compute-cycle count of every
// vector (log2 N * N / 8) and of every attention row (L*d/P per unit), and
// counts each mechanism: input stall, the three overlap modes, mode
// switches, post-processing vectors, QK/SV row overlap, Q rows arriving
// while the attention processor runs, and both processors busy at once.
// The test fails if any of them never happens.
//
// The behaviour checked is the published design's; the stimulus, the
// reference model and the reduced sizes are this testbench's own choices.
module tb_abf_top;
  import abf_pkg::*;
  localparam int P_BE = 2, P_BU = 4, NBANK = 8, LOG_B = 3, P_QK = 4, P_SV = 4, P_HEAD = 2;
  localparam int HEAD_D = 8, MAX_L = 16, BUF_DEPTH = 64, WDEPTH = 1024;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic mode, w_sel, route_postp, w_pp;
  logic [4:0] log2n;
  logic w_we [P_BE];
  logic [9:0] w_addr;
  bfly_w_t w_data [P_BU];
  logic in_valid [P_BE], in_ready [P_BE], out_valid [P_BE], out_ready [P_BE];
  cplx_t in_data [P_BE], out_data [P_BE];
  logic sc_we, sc_wpp, sc_rpp, g_we, pp_valid;
  logic [5:0] sc_waddr, g_addr;
  real_t sc_wdata, g_gamma, g_beta, pp_data;
  logic ap_start, ap_wr_pp, ap_rd_pp, ap_ld_we;
  logic [4:0] ap_n_keys, ap_n_rows, ap_q_rows_ready;
  logic [0:0] ap_ld_head;
  logic [1:0] ap_ld_buf;
  logic [3:0] ap_ld_row;
  logic [2:0] ap_ld_col;
  real_t ap_ld_data;
  logic ap_o_valid [P_HEAD];
  logic [0:0] ap_o_chunk [P_HEAD];
  real_t ap_o_data [P_HEAD][P_SV];
  logic bp_idle, postp_busy, ap_busy, ap_overlap;
  logic [3:0] bp_events;

  abf_top #(.P_BE(P_BE), .P_BU(P_BU), .P_QK(P_QK), .P_SV(P_SV), .P_HEAD(P_HEAD), .HEAD_D(HEAD_D),
            .MAX_L(MAX_L), .BUF_DEPTH(BUF_DEPTH), .WDEPTH(WDEPTH)) dut (.*);

  int checks = 0, failures = 0;
  int n_stall = 0, n_ld_cp = 0, n_out_cp = 0, n_ld_out = 0, n_switch = 0, n_postp = 0;
  int n_qksv = 0, n_qwait = 0, n_bp_ap = 0;

  always @(posedge clk) if (rst_n) begin
    n_stall  += int'(bp_events[0]);
    n_ld_cp  += int'(bp_events[1]);
    n_out_cp += int'(bp_events[2]);
    n_ld_out += int'(bp_events[3]);
    n_qksv   += int'(ap_overlap);
    n_bp_ap  += int'(ap_busy && !bp_idle);
  end

  // ---------------- butterfly reference ----------------
  function automatic int t16(input longint v); return int'(signed'(16'(v))); endfunction
  function automatic int mq(input int a, input int b); return t16((longint'(a) * longint'(b)) >>> 8); endfunction
  function automatic int bitrev(input int v, input int bits);
    int r = 0;
    for (int k = 0; k < bits; k++) r |= ((v >> k) & 1) << (bits - 1 - k);
    return r;
  endfunction
  function automatic int sched_lo(input int sl, input int t, input int k);
    int r, cp, ms, clo;
    if (sl < LOG_B) begin
      r = ((k >> sl) << (sl + 1)) | (k & ((1 << sl) - 1));
      return t * NBANK + r;
    end
    ms = sl - LOG_B; cp = t >> 1;
    clo = ((cp >> ms) << (ms + 1)) | (cp & ((1 << ms) - 1));
    return clo * NBANK + 2 * k + (t & 1);
  endfunction

  int wt [16][1024][4];
  typedef struct { int re, im; } c_t;
  c_t exp_q [P_BE][$];
  real dft_re [$], dft_im [$];
  int pp_q [$];
  int sc [64], gam [64], bet [64];
  cplx_t in_q [P_BE][$];
  logic cur_mode;

  task automatic make_weights(input int l2n, input logic m, input logic pp);
    int n = 1 << l2n;
    for (int sl = 0; sl < l2n; sl++) begin
      int s = 1 << sl;
      for (int i = 0; i < n; i++) if (((i >> sl) & 1) == 0) begin
        if (m) begin
          int g = i / (2 * s), mb = l2n - 1 - sl;
          real ang = -2.0 * 3.141592653589793 * real'(s * bitrev(g, mb)) / real'(n);
          wt[sl][i][0] = int'($rtoi($cos(ang) * 256.0));
          wt[sl][i][1] = int'($rtoi($sin(ang) * 256.0));
          wt[sl][i][2] = 0; wt[sl][i][3] = 0;
        end else
          for (int q = 0; q < 4; q++) wt[sl][i][q] = int'(signed'(16'($urandom))) >>> 8;
      end
    end
    for (int sl = l2n - 1, a = 0; sl >= 0; sl--)
      for (int t = 0; t < n / NBANK; t++, a++) begin
        @(negedge clk);
        for (int e = 0; e < P_BE; e++) w_we[e] = 1;
        w_pp = pp; w_addr = 10'(a);
        for (int k = 0; k < P_BU; k++) begin
          int lo = sched_lo(sl, t, k);
          w_data[k] = '{w4: 16'(wt[sl][lo][3]), w3: 16'(wt[sl][lo][2]), w2: 16'(wt[sl][lo][1]), w1: 16'(wt[sl][lo][0])};
        end
      end
    @(negedge clk);
    for (int e = 0; e < P_BE; e++) w_we[e] = 0;
  endtask

  function automatic longint isqrt(input longint v);
    longint r = 0;
    while ((r + 1) * (r + 1) <= v) r++;
    return r;
  endfunction

  // layer norm of (v + shortcut) with the block's fixed-point steps
  task automatic ln_ref(input int l2n, input c_t v[]);
    int n = 1 << l2n;
    int y [] = new[n];
    longint sum = 0, sumsq = 0, mean, ex2, var_, root, inv;
    foreach (y[i]) begin y[i] = t16(v[i].re + sc[i]); sum += y[i]; sumsq += longint'(y[i]) * y[i]; end
    mean = sum >>> l2n; ex2 = sumsq >>> l2n;
    var_ = ex2 - mean * mean + 1;
    if (var_ < 0) var_ = 1;
    if (var_ > 64'hffff_ffff) var_ = 64'hffff_ffff;
    root = isqrt(var_);
    inv = (root == 0) ? 32767 : ((65536 / root) > 32767 ? 32767 : 65536 / root);
    for (int i = 0; i < n; i++) begin
      int centred, normed, scaled;
      centred = y[i] - t16(mean);
      normed  = int'(centred * int'(inv)) >>> 8;
      scaled  = int'(normed * gam[i]) >>> 8;
      pp_q.push_back(t16(t16(scaled) + bet[i]));
    end
  endtask

  task automatic reference(input int l2n, input logic m, input c_t x[], input bit to_postp);
    int n = 1 << l2n;
    c_t v[] = new[n];
    foreach (x[i]) v[i] = x[i];
    for (int sl = l2n - 1; sl >= 0; sl--) begin
      int s = 1 << sl;
      for (int i = 0; i < n; i++) if (((i >> sl) & 1) == 0) begin
        c_t a = v[i], b = v[i + s];
        int w1 = wt[sl][i][0], w2 = wt[sl][i][1], w3 = wt[sl][i][2], w4 = wt[sl][i][3];
        if (m) begin
          int tr = t16(mq(b.re, w1) - mq(b.im, w2));
          int ti = t16(mq(b.re, w2) + mq(b.im, w1));
          v[i]     = '{t16(a.re + tr), t16(a.im + ti)};
          v[i + s] = '{t16(a.re - tr), t16(a.im - ti)};
        end else begin
          v[i]     = '{t16(mq(a.re, w1) + mq(b.re, w3)), 0};
          v[i + s] = '{t16(mq(a.re, w2) + mq(b.re, w4)), 0};
        end
      end
    end
    for (int e = 0; e < P_BE; e++)
      if (!(e == 0 && to_postp)) for (int i = 0; i < n; i++) exp_q[e].push_back(v[i]);
    if (to_postp) ln_ref(l2n, v);
    if (m) for (int p = 0; p < n; p++) begin
      int k = bitrev(p, l2n);
      real sr = 0, si = 0;
      for (int j = 0; j < n; j++) begin
        real ang = -2.0 * 3.141592653589793 * real'(j * k) / real'(n);
        sr += (real'(x[j].re) * $cos(ang) - real'(x[j].im) * $sin(ang)) / 256.0;
        si += (real'(x[j].re) * $sin(ang) + real'(x[j].im) * $cos(ang)) / 256.0;
      end
      dft_re.push_back(sr); dft_im.push_back(si);
    end
  endtask

  // ---------------- stream drivers and checkers ----------------
  // all handshakes are evaluated half a cycle before the clock edge that
  // performs them, once the design's combinational outputs have settled
  always @(negedge clk) if (rst_n) begin
    for (int e = 0; e < P_BE; e++) begin
      out_ready[e] = ($urandom % 4) != 0;
      if (in_q[e].size() > 0 && ($urandom % 8) != 0) begin in_valid[e] = 1; in_data[e] = in_q[e][0]; end
      else in_valid[e] = 0;
    end
    #1;
    for (int e = 0; e < P_BE; e++) begin
      if (in_valid[e] && in_ready[e]) void'(in_q[e].pop_front());
      if (out_valid[e] && out_ready[e]) begin
        c_t x;
        x = exp_q[e].pop_front();
        checks++;
        if (int'(out_data[e].re) != x.re || int'(out_data[e].im) != x.im) begin
          failures++;
          if (failures < 10) $display("%0t BE%0d got %0d,%0d exp %0d,%0d", $time, e, out_data[e].re, out_data[e].im, x.re, x.im);
        end
        if (cur_mode && e == 0) begin
          real dr, di;
          dr = dft_re.pop_front(); di = dft_im.pop_front();
          checks++;
          if ((real'(out_data[e].re) / 256.0 - dr) > 0.3 || (real'(out_data[e].re) / 256.0 - dr) < -0.3 ||
              (real'(out_data[e].im) / 256.0 - di) > 0.3 || (real'(out_data[e].im) / 256.0 - di) < -0.3) begin
            failures++; $display("DFT off");
          end
        end
      end
    end
    if (pp_valid) begin
      int x;
      x = pp_q.pop_front();
      checks++; n_postp++;
      if (int'(pp_data) != x) begin failures++; if (failures < 10) $display("PostP got %0d exp %0d", pp_data, x); end
    end
  end

  // compute cycles per vector, engine 0
  int cyc_cnt = 0, exp_cyc = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_bp.g_be[0].u_be.cp_start) cyc_cnt = 0;
    if (dut.u_bp.g_be[0].u_be.ig_valid) cyc_cnt++;
    if (dut.u_bp.g_be[0].u_be.ig_done) begin
      checks++;
      if (cyc_cnt != exp_cyc) begin failures++; $display("compute cycles %0d exp %0d", cyc_cnt, exp_cyc); end
    end
  end

  task automatic run_layer(input int l2n, input logic m, input int nvec, input logic pp, input bit to_postp);
    int n = 1 << l2n;
    wait (bp_idle && !postp_busy);
    @(negedge clk);
    if (m != mode) n_switch++;
    mode = m; log2n = 5'(l2n); cur_mode = m; route_postp = to_postp;
    $display("%0t layer N=%0d mode=%0d postp=%0d", $time, n, m, to_postp);
    make_weights(l2n, m, pp);
    w_sel = pp;
    exp_cyc = l2n * n / NBANK;
    for (int v = 0; v < nvec; v++) begin
      c_t x[] = new[n];
      foreach (x[i]) begin
        x[i].re = int'(signed'(16'($urandom))) >>> (m ? 9 : 7);
        x[i].im = m ? (int'(signed'(16'($urandom))) >>> 9) : 0;
      end
      reference(l2n, m, x, to_postp);
      for (int e = 0; e < P_BE; e++) foreach (x[i]) in_q[e].push_back('{im: 16'(x[i].im), re: 16'(x[i].re)});
    end
    wait (exp_q[0].size() == 0 && exp_q[1].size() == 0 && pp_q.size() == 0);
    repeat (5) @(posedge clk);
    wait (bp_idle && !postp_busy);
  endtask

  // ---------------- attention ----------------
  localparam int L = 8, M = 6;
  real qm [P_HEAD][M][HEAD_D], km [P_HEAD][L][HEAD_D], vm [P_HEAD][L][HEAD_D];
  real att_q [P_HEAD][$];
  int row_cnt [P_HEAD];

  task automatic ld(input int h, input int b, input int r, input int c, input real x);
    @(negedge clk);
    ap_ld_we = 1; ap_ld_head = 1'(h); ap_ld_buf = 2'(b); ap_ld_row = 4'(r); ap_ld_col = 3'(c);
    ap_ld_data = real_t'($rtoi(x * 256.0));
  endtask

  task automatic run_attention();
    for (int h = 0; h < P_HEAD; h++) begin
      for (int i = 0; i < M; i++) for (int d = 0; d < HEAD_D; d++) qm[h][i][d] = real'($urandom % 512) / 256.0 - 1.0;
      for (int j = 0; j < L; j++) for (int d = 0; d < HEAD_D; d++) begin
        km[h][j][d] = real'($urandom % 512) / 256.0 - 1.0;
        vm[h][j][d] = real'($urandom % 512) / 256.0 - 1.0;
      end
      // reference on the values as stored (Q8.8); scores scaled by 1/2 (d = 8)
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
          real o = 0;
          for (int j = 0; j < L; j++) o += s[j] / tot * vm[h][j][d];
          att_q[h].push_back(o);
        end
      end
    end
    ap_n_keys = 5'(L); ap_n_rows = 5'(M); ap_q_rows_ready = 0;
    for (int h = 0; h < P_HEAD; h++) for (int j = 0; j < L; j++) for (int d = 0; d < HEAD_D; d++) begin
      ld(h, 1, j, d, km[h][j][d]);
      ld(h, 2, j, d, vm[h][j][d]);
    end
    @(negedge clk); ap_ld_we = 0; ap_start = 1;
    @(negedge clk); ap_start = 0;
    // Q rows arrive one by one, as the butterfly processor would produce them
    for (int i = 0; i < M; i++) begin
      for (int h = 0; h < P_HEAD; h++) for (int d = 0; d < HEAD_D; d++) ld(h, 0, i, d, qm[h][i][d]);
      @(negedge clk); ap_ld_we = 0;
      if (i > 0) n_qwait += int'(ap_busy);
      ap_q_rows_ready = 5'(i + 1);
    end
    wait (att_q[0].size() == 0 && att_q[1].size() == 0);
    repeat (5) @(posedge clk);
  endtask

  always @(negedge clk) if (rst_n) begin
    for (int h = 0; h < P_HEAD; h++) if (ap_o_valid[h]) begin
      for (int p = 0; p < P_SV; p++) begin
        real x;
        x = att_q[h].pop_front();
        checks++;
        if (real'(ap_o_data[h][p]) / 256.0 - x > 0.08 || real'(ap_o_data[h][p]) / 256.0 - x < -0.08) begin
          failures++; if (failures < 10) $display("AP head %0d got %f exp %f", h, real'(ap_o_data[h][p]) / 256.0, x);
        end
      end
    end
  end

  // scoring / SV run lengths per row: L * HEAD_D / P cycles
  int qk_run = 0, sv_run = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.g_ap.u_ap.g_ae[0].u_ae.scoring) qk_run++;
    else if (qk_run != 0) begin
      checks++; if (qk_run != L * HEAD_D / P_QK) begin failures++; $display("QK row cycles %0d", qk_run); end
      qk_run = 0;
    end
    if (dut.g_ap.u_ap.g_ae[0].u_ae.computing) sv_run++;
    else if (sv_run != 0) begin
      checks++; if (sv_run != L * HEAD_D / P_SV) begin failures++; $display("SV row cycles %0d", sv_run); end
      sv_run = 0;
    end
  end

  initial begin
    mode = 0; log2n = 4; w_sel = 0; w_pp = 0; w_addr = 0; route_postp = 0; cur_mode = 0;
    for (int e = 0; e < P_BE; e++) begin w_we[e] = 0; in_valid[e] = 0; in_data[e] = '0; out_ready[e] = 1; end
    for (int k = 0; k < P_BU; k++) w_data[k] = '0;
    sc_we = 0; sc_wpp = 0; sc_rpp = 0; sc_waddr = 0; sc_wdata = 0;
    g_we = 0; g_addr = 0; g_gamma = 0; g_beta = 0;
    ap_start = 0; ap_wr_pp = 0; ap_rd_pp = 0; ap_ld_we = 0; ap_n_keys = 0; ap_n_rows = 0; ap_q_rows_ready = 0;
    ap_ld_head = 0; ap_ld_buf = 0; ap_ld_row = 0; ap_ld_col = 0; ap_ld_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // shortcut values and layer-norm parameters
    for (int i = 0; i < 64; i++) begin
      @(negedge clk);
      sc[i] = int'(signed'(16'($urandom))) >>> 8;
      gam[i] = 128 + ($urandom % 256); bet[i] = int'(signed'(16'($urandom))) >>> 9;
      sc_we = 1; sc_waddr = 6'(i); sc_wdata = real_t'(sc[i]);
      g_we = 1; g_addr = 6'(i); g_gamma = real_t'(gam[i]); g_beta = real_t'(bet[i]);
    end
    @(negedge clk); sc_we = 0; g_we = 0;
    run_layer(4, MODE_BLT, 4, 0, 0);
    run_layer(5, MODE_FFT, 3, 1, 0);
    run_layer(4, MODE_BLT, 3, 0, 1);
    fork
      run_layer(6, MODE_FFT, 3, 1, 0);
      run_attention();
    join
    run_layer(3, MODE_BLT, 3, 0, 1);
    checks++; if (n_stall == 0)  begin failures++; $display("no input stall"); end
    checks++; if (n_ld_cp == 0)  begin failures++; $display("no load/compute overlap"); end
    checks++; if (n_out_cp == 0) begin failures++; $display("no output/compute overlap"); end
    checks++; if (n_ld_out == 0) begin failures++; $display("no load/output overlap"); end
    checks++; if (n_switch < 3)  begin failures++; $display("mode switches %0d", n_switch); end
    checks++; if (n_postp == 0)  begin failures++; $display("no post-processing"); end
    checks++; if (n_qksv == 0)   begin failures++; $display("no QK/SV overlap"); end
    checks++; if (n_qwait == 0)  begin failures++; $display("AP never ran while Q was arriving"); end
    checks++; if (n_bp_ap == 0)  begin failures++; $display("BP and AP never busy together"); end
    $display("events: stall=%0d ld||cp=%0d out||cp=%0d ld||out=%0d switches=%0d postp=%0d qk||sv=%0d q_arrival=%0d bp||ap=%0d",
             n_stall, n_ld_cp, n_out_cp, n_ld_out, n_switch, n_postp, n_qksv, n_qwait, n_bp_ap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog: in_q %0d exp_q %0d st %0d %0d pp %0d %0d %0d in_ready %0d", in_q[0].size(), exp_q[0].size(), dut.u_bp.g_be[0].u_be.st[0], dut.u_bp.g_be[0].u_be.st[1], dut.u_bp.g_be[0].u_be.ld_pp, dut.u_bp.g_be[0].u_be.cp_pp, dut.u_bp.g_be[0].u_be.out_pp, in_ready[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
