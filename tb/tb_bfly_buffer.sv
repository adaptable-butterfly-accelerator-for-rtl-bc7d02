// Testbench of one butterfly-buffer bank. A reference model keeps the two
// physical 16-bit memories A and B. In butterfly-linear mode it writes
// ping-pong bank 0 (A) and bank 1 (B) at the same time through the two
// write ports and reads both at once; in FFT mode it writes complex words
// to ping-pong banks 0 and 1 and checks that they land in the lower and
// upper halves of A (real) and B (imaginary), and that FFT data written to
// bank 0 are seen by a butterfly-linear read of A, as the shared mapping
// requires.
//
// The behaviour checked is the published design's; the stimulus, the
// reference model and the reduced sizes are this testbench's own choices.
module tb_bfly_buffer;
  import abf_pkg::*;
  localparam int DEPTH = 64;
  logic clk = 0;
  always #5 clk = ~clk;
  logic mode;
  logic we [2], wpp [2], re [2], rpp [2];
  logic [5:0] waddr [2], raddr [2];
  cplx_t wdata [2], rdata [2];
  int checks = 0, failures = 0;
  int ma [DEPTH], mb [DEPTH];

  bfly_buffer #(.DEPTH(DEPTH)) dut (.*);

  task automatic idle_ports();
    for (int p = 0; p < 2; p++) begin we[p] = 0; re[p] = 0; wpp[p] = 0; rpp[p] = 0; waddr[p] = 0; raddr[p] = 0; wdata[p] = '0; end
  endtask

  initial begin
    idle_ports(); mode = MODE_BLT;
    @(negedge clk);
    // ---- BLT: port 0 fills bank 1 (B) while port 1 fills bank 0 (A) ----
    for (int a = 0; a < DEPTH; a++) begin
      int x, y;
      x = $urandom % 65536; y = $urandom % 65536;
      we[0] = 1; wpp[0] = 1; waddr[0] = 6'(a); wdata[0] = '{im: 16'hdead, re: 16'(x)};
      we[1] = 1; wpp[1] = 0; waddr[1] = 6'(a); wdata[1] = '{im: 16'hbeef, re: 16'(y)};
      mb[a] = x; ma[a] = y;
      @(negedge clk);
    end
    idle_ports();
    for (int a = 0; a < DEPTH; a++) begin
      re[0] = 1; rpp[0] = 0; raddr[0] = 6'(a);
      re[1] = 1; rpp[1] = 1; raddr[1] = 6'(DEPTH - 1 - a);
      @(negedge clk);
      checks += 2;
      if (int'(rdata[0].re) != (ma[a] >= 32768 ? ma[a] - 65536 : ma[a]) || rdata[0].im != 0) begin failures++; $display("A %0d", a); end
      if (int'(rdata[1].re) != (mb[DEPTH-1-a] >= 32768 ? mb[DEPTH-1-a] - 65536 : mb[DEPTH-1-a])) begin failures++; $display("B %0d", a); end
    end
    idle_ports();
    // ---- FFT: complex words into ping-pong banks 0 and 1 ----
    mode = MODE_FFT;
    for (int a = 0; a < DEPTH / 2; a++) begin
      for (int pp = 0; pp < 2; pp++) begin
        we[pp] = 1; wpp[pp] = 1'(pp); waddr[pp] = 6'(a);
        wdata[pp] = '{im: 16'(1000 * pp + a + 500), re: 16'(1000 * pp + a)};
        @(negedge clk);
        we[pp] = 0;
      end
    end
    for (int a = 0; a < DEPTH / 2; a++) begin
      for (int pp = 0; pp < 2; pp++) begin
        re[1 - pp] = 1; rpp[1 - pp] = 1'(pp); raddr[1 - pp] = 6'(a);
        @(negedge clk);
        re[1 - pp] = 0;
        checks++;
        if (int'(rdata[1 - pp].re) != 1000 * pp + a || int'(rdata[1 - pp].im) != 1000 * pp + a + 500) begin
          failures++; $display("fft pp %0d addr %0d got %0d,%0d", pp, a, rdata[1-pp].re, rdata[1-pp].im);
        end
      end
    end
    // ---- shared mapping: bank 1 of FFT is the upper half of A and B ----
    mode = MODE_BLT;
    re[0] = 1; rpp[0] = 0; raddr[0] = 6'(DEPTH / 2 + 3);
    re[1] = 1; rpp[1] = 1; raddr[1] = 6'(3);
    @(negedge clk);
    checks++;
    if (int'(rdata[0].re) != 1003 || int'(rdata[1].re) != 503) begin
      failures++; $display("mapping: A[upper+3]=%0d B[3]=%0d", rdata[0].re, rdata[1].re);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
