// Testbench of the recover / write-control crossbar: random conflict-free
// index sets with tagged results; each bank must receive the result of the
// element that lives in it, at that element's column, and no bank may be
// written when the input is not valid.
//
// The behaviour checked is the published design's; the stimulus, the
// reference model and the reduced sizes are this testbench's own choices.
module tb_recover;
  import abf_pkg::*;
  localparam int NBANK = 8, COL_W = 5, IDX_W = COL_W + 3;
  logic in_valid;
  logic [IDX_W-1:0] idx [NBANK];
  cplx_t slot_d [NBANK];
  logic wr_en [NBANK];
  logic [COL_W-1:0] wr_addr [NBANK];
  cplx_t wr_data [NBANK];
  int checks = 0, failures = 0;

  recover #(.NBANK(NBANK), .COL_W(COL_W)) dut (.*);

  function automatic int pc(input int v); int n = 0; for (int k = 0; k < 32; k++) n += (v >> k) & 1; return n; endfunction

  initial begin
    for (int it = 0; it < 300; it++) begin
      int perm [NBANK];
      int col [NBANK];
      int row, v;
      for (int k = 0; k < NBANK; k++) perm[k] = k;
      perm.shuffle();
      v = (it % 5 != 0);
      in_valid = 1'(v);
      for (int k = 0; k < NBANK; k++) begin
        col[k] = $urandom % (1 << COL_W);
        row = (perm[k] - pc(col[k]) + 8 * NBANK) % NBANK;
        idx[k] = IDX_W'(col[k] * NBANK + row);
        slot_d[k] = '{im: 16'(k + 100), re: 16'(col[k] * NBANK + row)};
      end
      #1;
      for (int k = 0; k < NBANK; k++) begin
        checks++;
        if (wr_en[perm[k]] != 1'(v)) begin failures++; $display("enable"); end
        if (v) begin
          checks++;
          if (int'(wr_addr[perm[k]]) != col[k] || int'(wr_data[perm[k]].im) != k + 100) begin
            failures++; $display("bank %0d addr %0d data %0d", perm[k], wr_addr[perm[k]], wr_data[perm[k]].im);
          end
        end
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
