// Testbench of the serial-to-parallel converter: streams vectors of 16 and
// 64 elements and checks every column write against the rotation rule
// bank = (row + popcount(column)) mod NBANK, computed here independently,
// including the 16-element layout of the published example
// (bank 0 holds x0, x7, x11, x14).
//
// The behaviour checked is the published design's; the stimulus, the
// reference model and the reduced sizes are this testbench's own choices.
module tb_s2p;
  import abf_pkg::*;
  localparam int NBANK = 4, COL_W = 4;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  logic [4:0] log2n;
  logic in_valid, wr_valid, wr_last, idle;
  cplx_t in_data;
  logic [COL_W-1:0] wr_col;
  cplx_t wr_data [NBANK];
  int checks = 0, failures = 0;
  int store [NBANK][16];
  int ncol_seen = 0;

  s2p #(.NBANK(NBANK), .COL_W(COL_W)) dut (.*);

  function automatic int pc(input int v); int n = 0; for (int k = 0; k < 32; k++) n += (v >> k) & 1; return n; endfunction

  always @(posedge clk) if (rst_n && wr_valid) begin
    for (int b = 0; b < NBANK; b++) begin
      int r;
      r = (b - pc(int'(wr_col)) + 4 * NBANK) % NBANK;
      checks++;
      if (int'(wr_data[b].re) != int'(wr_col) * NBANK + r) begin
        failures++; $display("col %0d bank %0d got %0d", wr_col, b, wr_data[b].re);
      end
      store[b][wr_col] = int'(wr_data[b].re);
    end
    ncol_seen++;
    checks++;
    if (wr_last != (int'(wr_col) == (1 << log2n) / NBANK - 1)) begin failures++; $display("wr_last wrong"); end
  end

  task automatic send(input int l2n);
    log2n = 5'(l2n);
    for (int i = 0; i < (1 << l2n); i++) begin
      @(negedge clk);
      if ($urandom % 3 == 0) begin in_valid = 0; @(negedge clk); end
      in_valid = 1; in_data = '{im: 16'(0), re: 16'(i)};
    end
    @(negedge clk); in_valid = 0;
    repeat (3) @(negedge clk);
  endtask

  initial begin
    in_valid = 0; in_data = '0; log2n = 4;
    repeat (2) @(negedge clk); rst_n = 1;
    send(4);
    // published 16-element layout, bank by bank
    checks++;
    if (!(store[0][0] == 0 && store[0][1] == 7 && store[0][2] == 11 && store[0][3] == 14 &&
          store[1][0] == 1 && store[1][1] == 4 && store[1][2] == 8  && store[1][3] == 15 &&
          store[3][0] == 3 && store[3][1] == 6 && store[3][2] == 10 && store[3][3] == 13)) begin
      failures++; $display("16-element layout differs from the published one");
    end
    checks++; if (!idle) begin failures++; $display("not idle"); end
    send(6);
    send(4);
    checks++; if (ncol_seen != 4 + 16 + 4) begin failures++; $display("columns %0d", ncol_seen); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
