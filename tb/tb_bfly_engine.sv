// Self-checking testbench of one butterfly engine.
//
// Streams several vectors through the engine in butterfly-linear and FFT
// mode at several lengths, with random gaps on the input and random
// back-pressure on the output. The expected output is computed here by a
// plain reference: for stride N/2 down to 1, every pair (i, i+stride) is
// combined with the same fixed-point arithmetic as the butterfly unit,
// using weights indexed by (stage, i). The weight buffer is filled in the
// order the engine's schedule visits the pairs, as a host would, so a
// wrong pairing shows up as wrong numbers. FFT results are also compared
// with a floating-point DFT (bit-reversed output order). It also checks
// that each vector uses exactly log2(N)*N/NBANK compute cycles (NBU pairs
// per cycle) and that every overlap mode and the input stall happen.
//
// The behaviour checked is the published design's; the stimulus, the
// reference model and the reduced sizes are this testbench's own choices.
module tb_bfly_engine;
  import abf_pkg::*;
  localparam int NBU = 4, NBANK = 8, DEPTH = 64, WDEPTH = 1024;
  localparam int LOG_B = 3;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic mode, w_sel, w_we, w_pp, in_valid, in_ready, out_valid, out_ready, idle;
  logic ev_stall, ev_ovl_ld_cp, ev_ovl_out_cp, ev_ovl_ld_out;
  logic [4:0] log2n;
  logic [9:0] w_addr;
  bfly_w_t w_data [NBU];
  cplx_t in_data, out_data;
  int checks = 0, failures = 0;
  int n_stall = 0, n_ld_cp = 0, n_out_cp = 0, n_ld_out = 0;

  bfly_engine #(.NBU(NBU), .DEPTH(DEPTH), .WDEPTH(WDEPTH)) dut (.*);

  always @(posedge clk) begin
    n_stall  += int'(ev_stall);
    n_ld_cp  += int'(ev_ovl_ld_cp);
    n_out_cp += int'(ev_ovl_out_cp);
    n_ld_out += int'(ev_ovl_ld_out);
  end

  // ---------------- reference arithmetic ----------------
  function automatic int t16(input longint v); return int'(signed'(16'(v))); endfunction
  function automatic int mq(input int a, input int b); return t16((longint'(a) * longint'(b)) >>> 8); endfunction

  int wt [16][1024][4];   // [stage (log2 stride)][lower index][w1..w4]

  function automatic int bitrev(input int v, input int bits);
    int r = 0;
    for (int k = 0; k < bits; k++) r |= ((v >> k) & 1) << (bits - 1 - k);
    return r;
  endfunction

  // schedule as documented: returns lower index of unit k in cycle t of stage sl
  function automatic int sched_lo(input int sl, input int t, input int k);
    int r, c, cp, ms, clo;
    if (sl < LOG_B) begin
      r = ((k >> sl) << (sl + 1)) | (k & ((1 << sl) - 1));
      return t * NBANK + r;
    end
    ms = sl - LOG_B; cp = t >> 1;
    clo = ((cp >> ms) << (ms + 1)) | (cp & ((1 << ms) - 1));
    return clo * NBANK + 2 * k + (t & 1);
  endfunction

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
    // load in schedule order
    for (int sl = l2n - 1, a = 0; sl >= 0; sl--)
      for (int t = 0; t < n / NBANK; t++, a++) begin
        @(negedge clk);
        w_we = 1; w_pp = pp; w_addr = 10'(a);
        for (int k = 0; k < NBU; k++) begin
          int lo = sched_lo(sl, t, k);
          w_data[k] = '{w4: 16'(wt[sl][lo][3]), w3: 16'(wt[sl][lo][2]), w2: 16'(wt[sl][lo][1]), w1: 16'(wt[sl][lo][0])};
        end
      end
    @(negedge clk); w_we = 0;
  endtask

  typedef struct { int re, im; } c_t;
  c_t exp_q[$];
  real dft_re[$], dft_im[$];

  task automatic reference(input int l2n, input logic m, input c_t x[]);
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
    if (dbg) $display("ref n=%0d x0=%0d v0=%0d w=%0d", n, x[0].re, v[0].re, wt[0][0][0]);
    for (int i = 0; i < n; i++) exp_q.push_back(v[i]);
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

  logic cur_mode;
  bit dbg = 0;
  always @(negedge clk) if (rst_n) begin
    out_ready <= ($urandom % 4) != 0;
  end
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    c_t e;
    e = exp_q.pop_front();
    checks++;
    if (int'(out_data.re) != e.re || int'(out_data.im) != e.im) begin
      failures++;
      if (failures < 10) $display("MISMATCH n=%0d mode=%0d got %0d,%0d exp %0d,%0d", 1 << log2n, mode, out_data.re, out_data.im, e.re, e.im);
    end
    if (cur_mode) begin
      real dr, di;
      dr = dft_re.pop_front(); di = dft_im.pop_front();
      checks++;
      if ((real'(out_data.re) / 256.0 - dr) > 0.3 || (real'(out_data.re) / 256.0 - dr) < -0.3 ||
          (real'(out_data.im) / 256.0 - di) > 0.3 || (real'(out_data.im) / 256.0 - di) < -0.3) begin
        failures++;
        if (failures < 10) $display("DFT off: got %f,%f exp %f,%f", real'(out_data.re)/256.0, real'(out_data.im)/256.0, dr, di);
      end
    end
  end

  // compute-cycle count per vector
  int cyc_cnt = 0, exp_cyc = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.cp_start) cyc_cnt = 0;
    if (dut.ig_valid) cyc_cnt++;
    if (dut.ig_done) begin
      checks++;
      if (cyc_cnt != exp_cyc) begin failures++; $display("compute cycles %0d exp %0d", cyc_cnt, exp_cyc); end
    end
  end

  task automatic run_layer(input int l2n, input logic m, input int nvec, input logic pp);
    int n = 1 << l2n;
    wait (idle);
    mode = m; log2n = 5'(l2n); cur_mode = m;
    make_weights(l2n, m, pp);
    w_sel = pp;
    exp_cyc = l2n * n / NBANK;
    for (int v = 0; v < nvec; v++) begin
      c_t x[] = new[n];
      foreach (x[i]) begin
        x[i].re = int'(signed'(16'($urandom))) >>> (m ? 9 : 7);
        x[i].im = m ? (int'(signed'(16'($urandom))) >>> 9) : 0;
      end
      reference(l2n, m, x);
      for (int i = 0; i < n; i++) begin
        @(negedge clk);
        while ((v % 3 == 2) && ($urandom % 4 == 0)) begin in_valid = 0; @(negedge clk); end
        in_valid = 1; in_data = '{im: 16'(x[i].im), re: 16'(x[i].re)};
        @(posedge clk);
        while (!in_ready) @(posedge clk);
      end
      @(negedge clk); in_valid = 0;
    end
    wait (exp_q.size() == 0);
    repeat (5) @(posedge clk);
    wait (idle);
  endtask

  initial begin
    mode = 0; log2n = 4; w_sel = 0; w_we = 0; w_pp = 0; w_addr = 0; in_valid = 0; in_data = '0;
    for (int k = 0; k < NBU; k++) w_data[k] = '0;
    out_ready = 1; cur_mode = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_layer(3, MODE_BLT, 3, 0);
    run_layer(4, MODE_BLT, 4, 1);
    run_layer(6, MODE_BLT, 5, 0);
    run_layer(4, MODE_FFT, 3, 1);
    run_layer(6, MODE_FFT, 5, 0);
    run_layer(7, MODE_FFT, 2, 1);
    run_layer(9, MODE_BLT, 2, 0);
    if (exp_q.size() != 0) begin failures++; $display("outputs missing"); end
    checks++; if (n_stall == 0)  begin failures++; $display("no input stall seen"); end
    checks++; if (n_ld_cp == 0)  begin failures++; $display("no load/compute overlap seen"); end
    checks++; if (n_out_cp == 0) begin failures++; $display("no output/compute overlap seen"); end
    checks++; if (n_ld_out == 0) begin failures++; $display("no load/output overlap seen"); end
    $display("events: stall=%0d ld||cp=%0d out||cp=%0d ld||out=%0d", n_stall, n_ld_cp, n_out_cp, n_ld_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
