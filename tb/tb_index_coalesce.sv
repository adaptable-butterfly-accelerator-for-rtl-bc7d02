// Testbench of the read control / index coalescing block. Random
// conflict-free index sets (a random column per bank, permuted over the
// slots) are applied; the read address given to each bank and, one cycle
// later, the element delivered to each slot are compared with values
// worked out here from the rotation rule.
//
// The behaviour checked is the published design's; the stimulus, the
// reference model and the reduced sizes are this testbench's own choices.
module tb_index_coalesce;
  import abf_pkg::*;
  localparam int NBANK = 8, COL_W = 5, IDX_W = COL_W + 3;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid;
  logic [IDX_W-1:0] idx [NBANK];
  logic [COL_W-1:0] rd_addr [NBANK];
  cplx_t bank_q [NBANK], slot_q [NBANK];
  int checks = 0, failures = 0;

  index_coalesce #(.NBANK(NBANK), .COL_W(COL_W)) dut (.*);

  function automatic int pc(input int v); int n = 0; for (int k = 0; k < 32; k++) n += (v >> k) & 1; return n; endfunction

  int want [NBANK];
  int perm [NBANK];
  initial begin
    in_valid = 0;
    for (int k = 0; k < NBANK; k++) begin idx[k] = '0; bank_q[k] = '0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 300; it++) begin
      int col, row, i;
      for (int k = 0; k < NBANK; k++) perm[k] = k;
      perm.shuffle();
      @(negedge clk);
      in_valid = 1;
      for (int k = 0; k < NBANK; k++) begin
        // slot k takes an element that lives in bank perm[k]
        col = $urandom % (1 << COL_W);
        row = (perm[k] - pc(col) + 8 * NBANK) % NBANK;
        i = col * NBANK + row;
        idx[k] = IDX_W'(i);
        want[k] = i;
      end
      #1;
      for (int k = 0; k < NBANK; k++) begin
        checks++;
        if (int'(rd_addr[perm[k]]) != want[k] / NBANK) begin failures++; $display("addr bank %0d", perm[k]); end
      end
      @(posedge clk);
      // banks return the addressed elements
      for (int k = 0; k < NBANK; k++) bank_q[perm[k]] = '{im: 16'(0), re: 16'(want[k])};
      @(negedge clk);
      in_valid = 0;
      #1;
      for (int k = 0; k < NBANK; k++) begin
        checks++;
        if (int'(slot_q[k].re) != want[k]) begin failures++; $display("slot %0d got %0d exp %0d", k, slot_q[k].re, want[k]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
