// Attention processor (AP): P_HEAD attention engines, one per head.
//
// Follows the published design: the AP holds P_HEAD attention engines that
// run the heads in parallel. Sharing one sequence configuration and one
// load port (with a head select) across the engines is this
// implementation's own choice.
module attention_processor
  import abf_pkg::*;
#(
  parameter int unsigned P_HEAD = 12,
  parameter int unsigned P_QK   = 8,
  parameter int unsigned P_SV   = 8,
  parameter int unsigned HEAD_D = 64,
  parameter int unsigned MAX_L  = 1024,
  localparam int unsigned LW    = $clog2(MAX_L + 1),
  localparam int unsigned LA    = $clog2(MAX_L),
  localparam int unsigned DW    = $clog2(HEAD_D),
  localparam int unsigned HW    = (P_HEAD > 1) ? $clog2(P_HEAD) : 1,
  localparam int unsigned CWV   = (HEAD_D / P_SV > 1) ? $clog2(HEAD_D / P_SV) : 1
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
  input  logic [HW-1:0] ld_head,
  input  logic [1:0]    ld_buf,
  input  logic [LA-1:0] ld_row,
  input  logic [DW-1:0] ld_col,
  input  real_t         ld_data,
  output logic          o_valid [P_HEAD],
  output logic [CWV-1:0] o_chunk [P_HEAD],
  output real_t         o_data  [P_HEAD][P_SV],
  output logic          busy,
  output logic          ev_overlap
);
  logic h_busy [P_HEAD], h_ovl [P_HEAD];

  for (genvar h = 0; h < P_HEAD; h++) begin : g_ae
    attention_engine #(.P_QK(P_QK), .P_SV(P_SV), .HEAD_D(HEAD_D), .MAX_L(MAX_L)) u_ae (
      .clk, .rst_n, .start, .n_keys, .n_rows, .q_rows_ready, .wr_pp, .rd_pp,
      .ld_we(ld_we && ld_head == HW'(h)), .ld_buf, .ld_row, .ld_col, .ld_data,
      .o_valid(o_valid[h]), .o_chunk(o_chunk[h]), .o_data(o_data[h]),
      .busy(h_busy[h]), .ev_overlap(h_ovl[h]));
  end

  always_comb begin
    busy = 1'b0; ev_overlap = 1'b0;
    for (int h = 0; h < P_HEAD; h++) begin busy |= h_busy[h]; ev_overlap |= h_ovl[h]; end
  end

endmodule
