// Testbench of post-processing (shortcut add + layer norm). Random vectors
// of length 8..64 are streamed in with random gaps; the shortcut buffer is
// modelled here with one-cycle read latency. Expected outputs follow the
// block's fixed-point steps exactly (running sums, shift for the mean,
// integer square root, reciprocal, scale and offset) and are also compared
// with a floating-point layer norm (tolerance 0.1 of the gamma scale).
//
// The behaviour checked is the published design's; the stimulus, the
// reference model and the reduced sizes are this testbench's own choices.
module tb_postp;
  import abf_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  logic [4:0] log2n;
  logic g_we, x_valid, x_ready, sc_re, y_valid, busy;
  logic [5:0] g_addr, sc_raddr;
  real_t g_gamma, g_beta, x_data, sc_rdata, y_data;
  int checks = 0, failures = 0;

  postp #(.DEPTH(64)) dut (.*);

  int sc [64], gam [64], bet [64];
  int exp_q [$];
  real fexp_q [$];
  always @(posedge clk) if (sc_re) sc_rdata <= real_t'(sc[sc_raddr]);

  function automatic int t16(input longint v); return int'(signed'(16'(v))); endfunction
  function automatic longint isqrt(input longint v);
    longint r = 0;
    while ((r + 1) * (r + 1) <= v) r++;
    return r;
  endfunction

  task automatic ref_ln(input int l2n, input int x[]);
    int n = 1 << l2n;
    int y [] = new[n];
    longint sum = 0, sumsq = 0, mean, ex2, var_, root, inv;
    real fm = 0, fv = 0;
    foreach (y[i]) begin y[i] = t16(x[i] + sc[i]); sum += y[i]; sumsq += longint'(y[i]) * y[i]; fm += y[i]; end
    fm /= n;
    foreach (y[i]) fv += (y[i] - fm) * (y[i] - fm);
    fv /= n;
    mean = sum >>> l2n; ex2 = sumsq >>> l2n;
    var_ = ex2 - mean * mean + 1;
    if (var_ < 0) var_ = 1;
    root = isqrt(var_);
    inv = (root == 0) ? 32767 : ((65536 / root) > 32767 ? 32767 : 65536 / root);
    for (int i = 0; i < n; i++) begin
      int centred, normed, scaled;
      centred = y[i] - t16(mean);
      normed  = int'(centred * int'(inv)) >>> 8;
      scaled  = int'(normed * gam[i]) >>> 8;
      exp_q.push_back(t16(t16(scaled) + bet[i]));
      fexp_q.push_back((y[i] - fm) / $sqrt(fv + 1.0 / 65536.0) * gam[i] / 256.0 + bet[i] / 256.0);
    end
  endtask

  always @(negedge clk) if (y_valid) begin
    int e; real f;
    e = exp_q.pop_front(); f = fexp_q.pop_front();
    checks += 2;
    if (int'(y_data) != e) begin failures++; $display("got %0d exp %0d", y_data, e); end
    if (real'(y_data) / 256.0 - f > 0.1 || real'(y_data) / 256.0 - f < -0.1) begin
      failures++; $display("float ref %f got %f", f, real'(y_data) / 256.0);
    end
  end

  initial begin
    log2n = 3; g_we = 0; g_addr = 0; g_gamma = 0; g_beta = 0; x_valid = 0; x_data = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 64; i++) begin
      @(negedge clk);
      sc[i] = int'(signed'(16'($urandom))) >>> 6;
      gam[i] = 128 + ($urandom % 256); bet[i] = int'(signed'(16'($urandom))) >>> 9;
      g_we = 1; g_addr = 6'(i); g_gamma = real_t'(gam[i]); g_beta = real_t'(bet[i]);
    end
    @(negedge clk); g_we = 0;
    for (int it = 0; it < 12; it++) begin
      int l2n, n;
      int x [];
      l2n = 3 + it % 4; n = 1 << l2n;
      x = new[n];
      foreach (x[i]) x[i] = int'(signed'(16'($urandom))) >>> 6;
      wait (!busy);
      @(negedge clk);
      log2n = 5'(l2n);
      ref_ln(l2n, x);
      for (int i = 0; i < n; i++) begin
        while ($urandom % 4 == 0) begin x_valid = 0; @(negedge clk); end
        x_valid = 1; x_data = real_t'(x[i]);
        @(negedge clk);
        while (!x_ready) @(negedge clk);
      end
      x_valid = 0;
      wait (exp_q.size() == 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
