// Testbench of the double-buffered on-chip buffer: fills both halves, then
// reads one half in random order while rewriting the other, checking the
// one-cycle read latency and that the halves are independent.
//
// The behaviour checked is the published design's; the stimulus, the
// reference model and the reduced sizes are this testbench's own choices.
module tb_onchip_buffer;
  localparam int DEPTH = 32;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we, wr_pp, re, rd_pp;
  logic [4:0] waddr, raddr;
  logic [15:0] wdata, rdata;
  logic [15:0] model [2][DEPTH];
  int checks = 0, failures = 0;

  onchip_buffer #(.WIDTH(16), .DEPTH(DEPTH)) dut (.*);

  initial begin
    we = 0; re = 0; wr_pp = 0; rd_pp = 0; waddr = 0; raddr = 0; wdata = 0;
    @(negedge clk);
    for (int pp = 0; pp < 2; pp++)
      for (int a = 0; a < DEPTH; a++) begin
        we = 1; wr_pp = 1'(pp); waddr = 5'(a); wdata = 16'($urandom); model[pp][a] = wdata;
        @(negedge clk);
      end
    for (int it = 0; it < 300; it++) begin
      int a, h;
      a = $urandom % DEPTH; h = it / 150;
      re = 1; rd_pp = 1'(h); raddr = 5'(a);
      we = 1; wr_pp = 1'(1 - h); waddr = 5'($urandom % DEPTH); wdata = 16'($urandom);
      model[1 - h][waddr] = wdata;
      @(negedge clk);
      checks++;
      if (rdata != model[h][a]) begin failures++; $display("half %0d addr %0d", h, a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
