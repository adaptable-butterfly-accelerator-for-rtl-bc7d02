// Self-checking testbench of the adaptable butterfly unit.
// Random operands in both modes; the expected results are computed here
// with plain integer arithmetic (Q8.8, truncating products) and compared
// two cycles after each input, which also checks the pipeline latency.
//
// The behaviour checked is the published design's; the stimulus, the
// reference model and the reduced sizes are this testbench's own choices.
module tb_bfly_unit;
  import abf_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  logic mode, in_valid, out_valid;
  cplx_t in1, in2, out1, out2;
  bfly_w_t w;
  int checks = 0, failures = 0;

  bfly_unit dut (.*);

  function automatic int trunc16(input longint v);
    return int'(signed'(16'(v)));
  endfunction
  function automatic int mulq(input int a, input int b);
    return trunc16((longint'(a) * longint'(b)) >>> 8);
  endfunction

  typedef struct { int o1r, o1i, o2r, o2i; } exp_t;
  exp_t q[$];

  task automatic drive(input logic m);
    int a_r, a_i, b_r, b_i, w1, w2, w3, w4;
    exp_t e;
    a_r = int'(signed'(16'($urandom))) >>> 2; a_i = int'(signed'(16'($urandom))) >>> 2;
    b_r = int'(signed'(16'($urandom))) >>> 2; b_i = int'(signed'(16'($urandom))) >>> 2;
    w1 = int'(signed'(16'($urandom))) >>> 5; w2 = int'(signed'(16'($urandom))) >>> 5;
    w3 = int'(signed'(16'($urandom))) >>> 5; w4 = int'(signed'(16'($urandom))) >>> 5;
    mode <= m; in_valid <= 1;
    in1 <= '{im: 16'(a_i), re: 16'(a_r)};
    in2 <= '{im: 16'(b_i), re: 16'(b_r)};
    w <= '{w4: 16'(w4), w3: 16'(w3), w2: 16'(w2), w1: 16'(w1)};
    if (m) begin
      int tr, ti;
      tr = trunc16(mulq(b_r, w1) - mulq(b_i, w2));
      ti = trunc16(mulq(b_r, w2) + mulq(b_i, w1));
      e.o1r = trunc16(a_r + tr); e.o1i = trunc16(a_i + ti);
      e.o2r = trunc16(a_r - tr); e.o2i = trunc16(a_i - ti);
    end else begin
      e.o1r = trunc16(mulq(a_r, w1) + mulq(b_r, w3)); e.o1i = 0;
      e.o2r = trunc16(mulq(a_r, w2) + mulq(b_r, w4)); e.o2i = 0;
    end
    q.push_back(e);
  endtask

  int lat_v[$];  // cycle numbers of inputs
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk) if (rst_n && in_valid) lat_v.push_back(cyc);

  always @(negedge clk) if (rst_n && out_valid) begin
    exp_t e;
    int t_in;
    e = q.pop_front();
    t_in = lat_v.pop_front();
    checks++;
    if (int'(out1.re) != e.o1r || int'(out1.im) != e.o1i || int'(out2.re) != e.o2r || int'(out2.im) != e.o2i) begin
      failures++;
      $display("MISMATCH got %0d %0d %0d %0d exp %0d %0d %0d %0d", out1.re, out1.im, out2.re, out2.im, e.o1r, e.o1i, e.o2r, e.o2i);
    end
    checks++;
    if (cyc - t_in != 2) begin failures++; $display("latency %0d", cyc - t_in); end
  end

  initial begin
    mode = 0; in_valid = 0; in1 = '0; in2 = '0; w = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int k = 0; k < 400; k++) begin
      drive(logic'(k % 3 == 0 ? 1 : ($urandom % 2)));

      @(posedge clk);
      if (k % 7 == 0) begin in_valid <= 0; @(posedge clk); end
    end
    in_valid <= 0;
    repeat (5) @(posedge clk);
    if (q.size() != 0) begin failures++; $display("missing outputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
