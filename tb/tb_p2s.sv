// Testbench of the parallel-to-serial converter: a behavioural bank array
// holds a 32-element vector in the rotated layout (written here with the
// rule bank = (row + popcount(col)) mod NBANK); P2S must return the
// elements in index order under random back-pressure, reading each column
// once, and signal done after the last one.
//
// The behaviour checked is the published design's; the stimulus, the
// reference model and the reduced sizes are this testbench's own choices.
module tb_p2s;
  import abf_pkg::*;
  localparam int NBANK = 4, COL_W = 4;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  logic [4:0] log2n;
  logic start, busy, rd_en, out_valid, out_ready, done;
  logic [COL_W-1:0] rd_col;
  cplx_t rd_data [NBANK];
  cplx_t out_data;
  int checks = 0, failures = 0, expect_i = 0, reads = 0, dones = 0;
  int mem [NBANK][16];

  p2s #(.NBANK(NBANK), .COL_W(COL_W)) dut (.*);

  function automatic int pc(input int v); int n = 0; for (int k = 0; k < 32; k++) n += (v >> k) & 1; return n; endfunction

  always @(posedge clk) begin
    if (rd_en) begin
      reads++;
      for (int b = 0; b < NBANK; b++) rd_data[b] <= '{im: 16'(mem[b][rd_col] + 1), re: 16'(mem[b][rd_col])};
    end
    if (rst_n && out_valid && out_ready) begin
      checks++;
      if (int'(out_data.re) != expect_i || int'(out_data.im) != expect_i + 1) begin
        failures++; $display("got %0d exp %0d", out_data.re, expect_i);
      end
      expect_i++;
    end
    if (done) dones++;
    out_ready <= ($urandom % 3) != 0;
  end

  initial begin
    start = 0; log2n = 5; out_ready = 1;
    for (int b = 0; b < NBANK; b++) rd_data[b] = '0;
    for (int i = 0; i < 32; i++) mem[(i % NBANK + pc(i / NBANK)) % NBANK][i / NBANK] = i;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    wait (dones == 1);
    repeat (3) @(negedge clk);
    checks++; if (expect_i != 32) begin failures++; $display("count %0d", expect_i); end
    checks++; if (reads != 8) begin failures++; $display("reads %0d", reads); end
    checks++; if (busy) begin failures++; $display("still busy"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
