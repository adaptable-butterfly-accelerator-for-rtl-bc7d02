// QK unit of an attention engine: one row of S = softmax(Q K^T / sqrt(d))
// at a time.
//
// Follows the published design: the QK unit does the query-key matrix
// product with P_QK multipliers and the softmax, and hands S to the SV
// unit row by row, so SV can start on a row while QK works on the next.
// A row of Q is started as soon as it is in the query buffer
// (q_rows_ready), which lets the attention processor start before the
// butterfly processor has produced all of Q.
//
// This implementation's own choices: Q8.8 fixed point instead of fp16;
// scaling by 1/sqrt(d) as a right shift (SCALE_SH); exp(x) evaluated as
// 2^(x*log2 e) with a linear fraction (2^-t ~ 1 - t/2) and a shift;
// normalisation with one divider at one element per cycle.
//
// Row timing: L*HEAD_D/P_QK cycles of dot products, L cycles of
// exponentials, L cycles of normalised output.
module qk_unit
  import abf_pkg::*;
#(
  parameter int unsigned P_QK     = 8,
  parameter int unsigned HEAD_D   = 64,
  parameter int unsigned MAX_L    = 1024,
  parameter int unsigned SCALE_SH = $clog2(HEAD_D) / 2,
  localparam int unsigned CH      = HEAD_D / P_QK,
  localparam int unsigned AW      = $clog2(MAX_L * CH),
  localparam int unsigned LW      = $clog2(MAX_L + 1),
  localparam int unsigned LA      = $clog2(MAX_L)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [LW-1:0] n_keys,
  input  logic [LW-1:0] n_rows,
  input  logic [LW-1:0] q_rows_ready,
  output logic          rd_en,
  output logic [AW-1:0] q_addr,
  output logic [AW-1:0] k_addr,
  input  real_t         q_data [P_QK],
  input  real_t         k_data [P_QK],
  input  logic          s_ready,
  output logic          s_valid,
  output logic [LA-1:0] s_idx,
  output logic          s_last,
  output real_t         s_data,
  output logic          scoring,
  output logic          busy
);
  typedef enum logic [2:0] {S_IDLE, S_SCORE, S_DRAIN, S_EXP, S_WAIT, S_NORM} state_e;
  state_e st;

  localparam int unsigned CW = (CH > 1) ? $clog2(CH) : 1;

  real_t score [MAX_L];
  logic [15:0] ebuf [MAX_L];

  logic          active;
  logic [LW-1:0] row, j;
  logic [CW-1:0] c;
  logic          rv;            // read data valid this cycle
  logic          rv_last;       // ... and it is the last chunk of a key
  logic [LW-1:0] rv_j;
  logic signed [39:0] acc;
  real_t         smax;
  logic [31:0]   esum;

  assign busy    = active;
  assign scoring = (st == S_SCORE);
  assign rd_en   = (st == S_SCORE);
  assign q_addr  = AW'(row * CH + c);
  assign k_addr  = AW'(j * CH + c);

  // dot product of one chunk (Q16.16)
  logic signed [39:0] dot;
  always_comb begin
    dot = '0;
    for (int p = 0; p < P_QK; p++) dot = dot + 40'(32'(q_data[p]) * 32'(k_data[p]));
  end
  logic signed [39:0] acc_n, sc_w;
  real_t sc_sat;
  always_comb begin
    acc_n = acc + dot;
    sc_w  = acc_n >>> (FRAC_W + SCALE_SH);
    sc_sat = (sc_w > 40'sd32767) ? 16'sh7fff : (sc_w < -40'sd32768) ? 16'sh8000 : real_t'(sc_w);
  end

  // exp(x) for x = score - max <= 0, Q8.8 in, Q8.8 out (0..1.0)
  function automatic logic [15:0] exp_neg(input logic signed [31:0] x);
    logic [31:0] ymag, ip, fr;
    ymag = 32'((-x) * 369) >> 8;          // |x| * log2(e), Q8.8
    ip = ymag >> 8;
    fr = ymag & 32'hff;
    if (ip >= 9) return 16'd0;
    return 16'((32'd256 - (fr >> 1)) >> ip);
  endfunction

  logic [15:0] e_cur;
  assign e_cur = exp_neg(32'(score[j[LA-1:0]]) - 32'(smax));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; active <= 1'b0; row <= '0; j <= '0; c <= '0;
      rv <= 1'b0; rv_last <= 1'b0; rv_j <= '0; acc <= '0; smax <= '0; esum <= '0;
      s_valid <= 1'b0; s_idx <= '0; s_last <= 1'b0; s_data <= '0;
    end else begin
      s_valid <= 1'b0;
      s_last  <= 1'b0;
      rv      <= (st == S_SCORE);
      rv_last <= (st == S_SCORE) && (c == CW'(CH - 1));
      rv_j    <= j;
      if (rv) begin
        if (rv_last) begin
          score[rv_j[LA-1:0]] <= sc_sat;
          acc <= '0;
          if (rv_j == 0 || sc_sat > smax) smax <= sc_sat;
        end else acc <= acc_n;
      end
      case (st)
        S_IDLE: begin
          if (start) begin active <= 1'b1; row <= '0; end
          else if (active && row == n_rows) active <= 1'b0;
          else if (active && q_rows_ready > row) begin
            st <= S_SCORE; j <= '0; c <= '0;
          end
        end
        S_SCORE: begin
          if (c == CW'(CH - 1)) begin
            c <= '0;
            if (j == n_keys - 1'b1) st <= S_DRAIN;
            else j <= j + 1'b1;
          end else c <= c + 1'b1;
        end
        S_DRAIN: if (!rv) begin st <= S_EXP; j <= '0; esum <= '0; end
        S_EXP: begin
          ebuf[j[LA-1:0]] <= e_cur;
          esum <= esum + 32'(e_cur);
          if (j == n_keys - 1'b1) st <= S_WAIT;
          j <= (j == n_keys - 1'b1) ? '0 : j + 1'b1;
        end
        S_WAIT: if (s_ready) st <= S_NORM;
        S_NORM: begin
          s_valid <= 1'b1;
          s_idx   <= j[LA-1:0];
          s_data  <= real_t'({8'b0, ebuf[j[LA-1:0]], 8'b0} / esum);
          s_last  <= (j == n_keys - 1'b1);
          if (j == n_keys - 1'b1) begin st <= S_IDLE; j <= '0; row <= row + 1'b1; end
          else j <= j + 1'b1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
