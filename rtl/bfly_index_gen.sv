// Butterfly index generator (part of the input manager of a butterfly
// engine).
//
// For a vector of N = 2**log2n elements it walks the log2n butterfly stages
// from stride N/2 down to stride 1 (the order of the published data-access
// diagram) and, in every cycle of a stage, names the NBANK/2 element pairs
// (i, i + stride) given to the NBANK/2 butterfly units. Slot 2k holds the
// lower and slot 2k+1 the upper index of unit k. Every stage takes
// N/NBANK cycles:
//
//   stride < NBANK (pairs inside one storage column): cycle t reads column t
//     whole; unit k gets row r_k, the k-th row whose stride bit is 0.
//   stride >= NBANK (pairs across columns c and c + stride/NBANK):
//     two cycles per column pair, the even rows first and then the odd rows;
//     unit k gets row 2k (+1) of both columns.
//
// With the rotated layout (bank = (row + popcount(col)) mod NBANK) each
// cycle touches every bank exactly once, as in the published 16-element
// example (x0,x8,x2,x10 then x7,x15,x5,x13 in the first stage). The
// schedule for other sizes is this implementation's generalisation.
//
// Timing: after `start` one set of indices per cycle (`valid`), with GAP
// idle cycles between stages so that the previous stage's write-backs have
// landed. `wt_addr` counts the compute cycles of the vector and addresses
// the weight buffer. `done` pulses one cycle after the last set.
module bfly_index_gen #(
  parameter int unsigned NBANK = 8,
  parameter int unsigned COL_W = 10,
  parameter int unsigned WA_W  = 11,
  parameter int unsigned GAP   = 3,
  localparam int unsigned IDX_W = COL_W + $clog2(NBANK)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [4:0]       log2n,
  input  logic             start,
  output logic             busy,
  output logic             valid,
  output logic [IDX_W-1:0] idx [NBANK],
  output logic [4:0]       stage_log,   // log2 of the current stride
  output logic [WA_W-1:0]  wt_addr,
  output logic             done
);
  localparam int unsigned LOG_B = $clog2(NBANK);
  localparam int unsigned NBU   = NBANK / 2;

  logic [4:0]       s_log;
  logic [COL_W-1:0] t;
  logic [3:0]       gap_cnt;
  logic             run, in_gap;
  logic [COL_W:0]   ncyc;

  assign ncyc = (COL_W+1)'((32'd1 << log2n) >> LOG_B);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; in_gap <= 1'b0; s_log <= '0; t <= '0; gap_cnt <= '0;
      wt_addr <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !run) begin
        run <= 1'b1; in_gap <= 1'b0; s_log <= log2n - 1'b1; t <= '0; wt_addr <= '0;
      end else if (run) begin
        if (in_gap) begin
          if (gap_cnt == 4'(GAP - 1)) in_gap <= 1'b0;
          gap_cnt <= gap_cnt + 1'b1;
        end else begin
          wt_addr <= wt_addr + 1'b1;
          if ((COL_W+1)'(t) + 1'b1 == ncyc) begin
            t <= '0;
            if (s_log == '0) begin
              run <= 1'b0; done <= 1'b1;
            end else begin
              s_log <= s_log - 1'b1;
              in_gap <= (GAP != 0);
              gap_cnt <= '0;
            end
          end else begin
            t <= t + 1'b1;
          end
        end
      end
    end
  end

  assign busy      = run;
  assign valid     = run && !in_gap;
  assign stage_log = s_log;

  always_comb begin
    logic [31:0] stride, lo, r, c_lo, c_hi, cp, ms;
    logic [IDX_W-1:0] hi;
    for (int k = 0; k < NBU; k++) begin
      ms = '0; cp = '0; c_lo = '0; c_hi = '0;
      stride = 32'd1 << s_log;
      if (32'(s_log) < LOG_B) begin
        // pair inside column t: k-th row with the stride bit clear
        r  = ((32'(k) >> s_log) << (s_log + 1)) | (32'(k) & (stride - 1));
        lo = (32'(t) << LOG_B) | r;
        hi = IDX_W'(lo + stride);
      end else begin
        ms   = 32'(s_log) - LOG_B;
        cp   = 32'(t) >> 1;
        c_lo = ((cp >> ms) << (ms + 1)) | (cp & ((32'd1 << ms) - 1));
        c_hi = c_lo + (32'd1 << ms);
        r    = 32'(2 * k) + 32'(t[0]);
        lo   = (c_lo << LOG_B) | r;
        hi   = IDX_W'((c_hi << LOG_B) | r);
      end
      idx[2*k]   = IDX_W'(lo);
      idx[2*k+1] = hi;
    end
  end

endmodule
