// Attention engine (AE): one QK unit, one SV unit and this head's slices of
// the query, key and value buffers.
//
// Follows the published design: each AE is made of one QK unit and one SV
// unit, serves one attention head, the buffers are double-buffered, and QK
// and SV are pipelined row by row. This implementation's own choices:
// element-wise loading through one write port (ld_buf selects Q, K or V);
// query and key slices split into P_QK banks and the value slice into P_SV
// banks (element column mod P) so each unit reads P elements per cycle.
module attention_engine
  import abf_pkg::*;
#(
  parameter int unsigned P_QK   = 8,
  parameter int unsigned P_SV   = 8,
  parameter int unsigned HEAD_D = 64,
  parameter int unsigned MAX_L  = 1024,
  localparam int unsigned LW    = $clog2(MAX_L + 1),
  localparam int unsigned LA    = $clog2(MAX_L),
  localparam int unsigned DW    = $clog2(HEAD_D),
  localparam int unsigned CHQ   = HEAD_D / P_QK,
  localparam int unsigned CHV   = HEAD_D / P_SV,
  localparam int unsigned AWQ   = $clog2(MAX_L * CHQ),
  localparam int unsigned AWV   = $clog2(MAX_L * CHV),
  localparam int unsigned CWV   = (CHV > 1) ? $clog2(CHV) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [LW-1:0] n_keys,
  input  logic [LW-1:0] n_rows,
  input  logic [LW-1:0] q_rows_ready,
  input  logic          wr_pp,
  input  logic          rd_pp,
  input  logic          ld_we,
  input  logic [1:0]    ld_buf,          // 0: query, 1: key, 2: value
  input  logic [LA-1:0] ld_row,
  input  logic [DW-1:0] ld_col,
  input  real_t         ld_data,
  output logic          o_valid,
  output logic [CWV-1:0] o_chunk,
  output real_t         o_data [P_SV],
  output logic          busy,
  output logic          ev_overlap       // QK scoring while SV computes
);
  logic          rd_en, v_re, s_ready, s_valid, s_last, scoring, computing, qk_busy;
  logic [AWQ-1:0] q_addr, k_addr;
  logic [AWV-1:0] v_addr;
  logic [LA-1:0] s_idx;
  real_t         s_data;
  real_t         q_data [P_QK], k_data [P_QK], v_data [P_SV];

  // banked buffer slices
  for (genvar b = 0; b < P_QK; b++) begin : g_qk_bank
    wire wsel = ld_we && (int'(ld_col) % P_QK == b);
    wire [AWQ-1:0] wa = AWQ'(ld_row * CHQ + int'(ld_col) / P_QK);
    onchip_buffer #(.WIDTH(16), .DEPTH(MAX_L * CHQ)) u_q (
      .clk, .we(wsel && ld_buf == 2'd0), .wr_pp, .waddr(wa), .wdata(ld_data),
      .re(rd_en), .rd_pp, .raddr(q_addr), .rdata(q_data[b]));
    onchip_buffer #(.WIDTH(16), .DEPTH(MAX_L * CHQ)) u_k (
      .clk, .we(wsel && ld_buf == 2'd1), .wr_pp, .waddr(wa), .wdata(ld_data),
      .re(rd_en), .rd_pp, .raddr(k_addr), .rdata(k_data[b]));
  end
  for (genvar b = 0; b < P_SV; b++) begin : g_v_bank
    wire wsel = ld_we && ld_buf == 2'd2 && (int'(ld_col) % P_SV == b);
    onchip_buffer #(.WIDTH(16), .DEPTH(MAX_L * CHV)) u_v (
      .clk, .we(wsel), .wr_pp, .waddr(AWV'(ld_row * CHV + int'(ld_col) / P_SV)), .wdata(ld_data),
      .re(v_re), .rd_pp, .raddr(v_addr), .rdata(v_data[b]));
  end

  qk_unit #(.P_QK(P_QK), .HEAD_D(HEAD_D), .MAX_L(MAX_L)) u_qk (
    .clk, .rst_n, .start, .n_keys, .n_rows, .q_rows_ready,
    .rd_en, .q_addr, .k_addr, .q_data, .k_data,
    .s_ready, .s_valid, .s_idx, .s_last, .s_data, .scoring, .busy(qk_busy));

  sv_unit #(.P_SV(P_SV), .HEAD_D(HEAD_D), .MAX_L(MAX_L)) u_sv (
    .clk, .rst_n, .n_keys, .s_valid, .s_idx, .s_last, .s_data, .s_ready,
    .v_re, .v_addr, .v_data, .o_valid, .o_chunk, .o_data, .computing);

  assign busy       = qk_busy || computing || !s_ready;
  assign ev_overlap = scoring && computing;

endmodule
