// Testbench of the weight buffer: fills both halves with distinct random
// words, then reads them back in random order while the other half is
// being rewritten, checking the one-cycle read latency and that the halves
// do not disturb each other.
//
// The behaviour checked is the published design's; the stimulus, the
// reference model and the reduced sizes are this testbench's own choices.
module tb_weight_buffer;
  import abf_pkg::*;
  localparam int NBU = 4, DEPTH = 32;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we, wr_pp, re, rd_pp;
  logic [4:0] waddr, raddr;
  bfly_w_t wdata [NBU], rdata [NBU];
  int checks = 0, failures = 0;
  bfly_w_t model [2][DEPTH][NBU];

  weight_buffer #(.NBU(NBU), .DEPTH(DEPTH)) dut (.*);

  initial begin
    we = 0; re = 0; wr_pp = 0; rd_pp = 0; waddr = 0; raddr = 0;
    for (int u = 0; u < NBU; u++) wdata[u] = '0;
    @(negedge clk);
    for (int pp = 0; pp < 2; pp++)
      for (int a = 0; a < DEPTH; a++) begin
        we = 1; wr_pp = 1'(pp); waddr = 5'(a);
        for (int u = 0; u < NBU; u++) begin
          wdata[u] = {$urandom, $urandom};
          model[pp][a][u] = wdata[u];
        end
        @(negedge clk);
      end
    we = 0;
    // read half 0 while rewriting half 1
    for (int it = 0; it < 200; it++) begin
      int a;
      a = $urandom % DEPTH;
      re = 1; rd_pp = 0; raddr = 5'(a);
      we = 1; wr_pp = 1; waddr = 5'($urandom % DEPTH);
      for (int u = 0; u < NBU; u++) begin wdata[u] = {$urandom, $urandom}; model[1][waddr][u] = wdata[u]; end
      @(negedge clk);
      for (int u = 0; u < NBU; u++) begin
        checks++;
        if (rdata[u] != model[0][a][u]) begin failures++; $display("half0 addr %0d unit %0d", a, u); end
      end
    end
    we = 0;
    for (int a = 0; a < DEPTH; a++) begin
      re = 1; rd_pp = 1; raddr = 5'(a);
      @(negedge clk);
      for (int u = 0; u < NBU; u++) begin
        checks++;
        if (rdata[u] != model[1][a][u]) begin failures++; $display("half1 addr %0d unit %0d", a, u); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
