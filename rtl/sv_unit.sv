// SV unit of an attention engine: multiplies one row of S by the value
// matrix V with P_SV multipliers.
//
// Follows the published design: the SV unit takes the rows of S from the
// QK unit and multiplies them with the value vectors, and because S arrives
// row by row it can work on one row while QK produces the next. The double
// row buffer that makes this overlap possible, Q8.8 arithmetic instead of
// fp16, and the loop order (P_SV output columns at a time, walking over
// the L keys) are this implementation's own choices.
//
// Row timing: L*HEAD_D/P_SV cycles; results leave as HEAD_D/P_SV words of
// P_SV elements (o_valid, o_chunk).
module sv_unit
  import abf_pkg::*;
#(
  parameter int unsigned P_SV   = 8,
  parameter int unsigned HEAD_D = 64,
  parameter int unsigned MAX_L  = 1024,
  localparam int unsigned CH    = HEAD_D / P_SV,
  localparam int unsigned CW    = (CH > 1) ? $clog2(CH) : 1,
  localparam int unsigned AW    = $clog2(MAX_L * CH),
  localparam int unsigned LW    = $clog2(MAX_L + 1),
  localparam int unsigned LA    = $clog2(MAX_L)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [LW-1:0] n_keys,
  input  logic          s_valid,
  input  logic [LA-1:0] s_idx,
  input  logic          s_last,
  input  real_t         s_data,
  output logic          s_ready,
  output logic          v_re,
  output logic [AW-1:0] v_addr,
  input  real_t         v_data [P_SV],
  output logic          o_valid,
  output logic [CW-1:0] o_chunk,
  output real_t         o_data [P_SV],
  output logic          computing
);
  real_t pbuf [2][MAX_L];
  logic  full [2];
  logic  fh, ch;            // fill half, compute half
  logic  run;
  logic [LW-1:0] j;
  logic [CW-1:0] c;
  logic  rv, rv_last;
  logic [CW-1:0] rv_c;
  real_t p1;
  logic signed [31:0] acc [P_SV];

  assign s_ready   = !full[fh];
  assign v_re      = run;
  assign v_addr    = AW'(j * CH + c);
  assign computing = run;

  always_ff @(posedge clk) if (s_valid) pbuf[fh][s_idx[LA-1:0]] <= s_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full[0] <= 1'b0; full[1] <= 1'b0; fh <= 1'b0; ch <= 1'b0; run <= 1'b0;
      j <= '0; c <= '0; rv <= 1'b0; rv_last <= 1'b0; rv_c <= '0; p1 <= '0;
      o_valid <= 1'b0; o_chunk <= '0;
      for (int p = 0; p < P_SV; p++) begin acc[p] <= '0; o_data[p] <= '0; end
    end else begin
      o_valid <= 1'b0;
      if (s_valid && s_last) begin full[fh] <= 1'b1; fh <= ~fh; end
      rv      <= run;
      rv_last <= run && (j == n_keys - 1'b1);
      rv_c    <= c;
      p1      <= pbuf[ch][j[LA-1:0]];
      if (rv) begin
        for (int p = 0; p < P_SV; p++) begin
          if (rv_last) begin
            acc[p] <= '0;
            o_data[p] <= real_t'((acc[p] + 32'(p1) * 32'(v_data[p])) >>> FRAC_W);
          end else acc[p] <= acc[p] + 32'(p1) * 32'(v_data[p]);
        end
        if (rv_last) begin o_valid <= 1'b1; o_chunk <= rv_c; end
      end
      if (!run) begin
        if (full[ch]) begin run <= 1'b1; j <= '0; c <= '0; end
      end else if (j == n_keys - 1'b1) begin
        j <= '0;
        if (c == CW'(CH - 1)) begin run <= 1'b0; full[ch] <= 1'b0; ch <= ~ch; end
        else c <= c + 1'b1;
      end else j <= j + 1'b1;
    end
  end

endmodule
