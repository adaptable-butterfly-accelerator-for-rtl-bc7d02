// Testbench of the butterfly index generator. For N = 8..512 with eight
// banks it checks, cycle by cycle, that every set pairs (i, i + stride)
// for the current stage, that each set touches every bank once under the
// rotated layout, that every pair of a stage appears exactly once, that
// stages run from stride N/2 down to 1, the cycle count per stage
// (N/NBANK), the stage gap and the weight-address sequence. With four
// banks and N = 16 it checks the first cycle against the published example
// (x0, x8, x2, x10).
//
// The behaviour checked is the published design's; the stimulus, the
// reference model and the reduced sizes are this testbench's own choices.
module tb_bfly_index_gen;
  localparam int COL_W = 6;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  function automatic int pc(input int v); int n = 0; for (int k = 0; k < 32; k++) n += (v >> k) & 1; return n; endfunction

  // ---- eight banks ----
  logic [4:0] log2n; logic start, busy, valid, done;
  logic [COL_W+2:0] idx [8];
  logic [4:0] stage_log; logic [9:0] wt_addr;
  bfly_index_gen #(.NBANK(8), .COL_W(COL_W), .WA_W(10), .GAP(3)) dut (.*);

  // ---- four banks, published example ----
  logic start4, busy4, valid4, done4; logic [4:0] sl4; logic [5:0] wa4;
  logic [COL_W+1:0] idx4 [4];
  bfly_index_gen #(.NBANK(4), .COL_W(COL_W), .WA_W(6), .GAP(3)) dut4 (
    .clk, .rst_n, .log2n(5'd4), .start(start4), .busy(busy4), .valid(valid4), .idx(idx4),
    .stage_log(sl4), .wt_addr(wa4), .done(done4));

  task automatic run8(input int l2n);
    int n, cyc, gapc, exp_sl, wa, ngap;
    int seen [1024];
    n = 1 << l2n;
    log2n = 5'(l2n);
    foreach (seen[i]) seen[i] = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    exp_sl = l2n - 1; cyc = 0; gapc = 0; wa = 0; ngap = 0;
    while (!done) begin
      if (valid) begin
        logic [7:0] hit;
        int s;
        hit = 0;
        s = 1 << stage_log;
        checks++;
        if (int'(stage_log) != exp_sl) begin failures++; $display("stage %0d exp %0d", stage_log, exp_sl); end
        if (int'(wt_addr) != wa) begin failures++; $display("wt_addr %0d exp %0d", wt_addr, wa); end
        for (int k = 0; k < 4; k++) begin
          int lo, hi;
          lo = int'(idx[2*k]); hi = int'(idx[2*k+1]);
          checks++;
          if (hi != lo + s || ((lo >> stage_log) & 1) != 0 || hi >= n) begin failures++; $display("bad pair %0d %0d s=%0d", lo, hi, s); end
          seen[lo]++;
          hit[(lo % 8 + pc(lo / 8)) % 8] = 1;
          hit[(hi % 8 + pc(hi / 8)) % 8] = 1;
        end
        checks++; if (hit != 8'hff) begin failures++; $display("bank conflict"); end
        cyc++; wa++;
        if (cyc == n / 8) begin
          for (int i = 0; i < n; i++) if (((i >> stage_log) & 1) == 0) begin
            checks++; if (seen[i] != 1) begin failures++; $display("pair %0d seen %0d", i, seen[i]); end
          end
          foreach (seen[i]) seen[i] = 0;
          cyc = 0; exp_sl--;
        end
      end else if (busy) ngap++;
      @(negedge clk);
    end
    checks++; if (exp_sl != -1) begin failures++; $display("stages left %0d", exp_sl); end
    checks++; if (ngap != 3 * (l2n - 1)) begin failures++; $display("gap cycles %0d", ngap); end
  endtask

  initial begin
    start = 0; start4 = 0; log2n = 3;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int l = 3; l <= 9; l++) run8(l);
    // published example, four banks, N = 16, first stage (stride 8)
    @(negedge clk); start4 = 1; @(negedge clk); start4 = 0;
    checks++;
    if (!(idx4[0] == 0 && idx4[1] == 8 && idx4[2] == 2 && idx4[3] == 10)) begin
      failures++; $display("cycle0 %0d %0d %0d %0d", idx4[0], idx4[1], idx4[2], idx4[3]);
    end
    @(negedge clk);
    // this schedule finishes the column pair (0, 2) with its odd rows before
    // moving to columns (1, 3); the published example visits them the other
    // way round, which is equally conflict-free
    checks++;
    if (!(idx4[0] == 1 && idx4[1] == 9 && idx4[2] == 3 && idx4[3] == 11)) begin
      failures++; $display("cycle1 %0d %0d %0d %0d", idx4[0], idx4[1], idx4[2], idx4[3]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
