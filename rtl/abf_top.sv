// Adaptable butterfly accelerator, top level.
//
// Follows the published architecture: a butterfly processor (BP) of P_BE
// butterfly engines with P_BU butterfly units each, which runs both
// butterfly linear layers and FFTs; a post-processing processor (PostP)
// for shortcut addition and layer normalisation, fed from the shortcut
// buffer; and an attention processor (AP) of P_HEAD attention engines with
// P_QK / P_SV multipliers, present only when P_QK and P_SV are non-zero.
// The defaults are the published final design point
// <P_BE, P_BU, P_QK, P_SV> = <64, 4, 0, 0> with buffers of depth 1024.
//
// This implementation's own choices: the off-chip memory and its
// interface are outside this module, so every engine stream, the weight
// loads, the shortcut-buffer loads and the attention-buffer loads are top
// level ports; engine 0's output can be routed into PostP (route_postp);
// the AP gets its query, key and value rows through a load port with a
// head select, and starts row r of Q as soon as q_rows_ready > r.
//
// Lint note: at the default parameters (P_QK = P_SV = 0) no attention
// processor is built, so the ap_* inputs are unused and its outputs are
// tied to zero; the ports stay so the interface does not change with the
// configuration.
module abf_top
  import abf_pkg::*;
#(
  parameter int unsigned P_BE      = 64,
  parameter int unsigned P_BU      = 4,
  parameter int unsigned P_QK      = 0,
  parameter int unsigned P_SV      = 0,
  parameter int unsigned P_HEAD    = 12,
  parameter int unsigned HEAD_D    = 64,
  parameter int unsigned MAX_L     = 1024,
  parameter int unsigned BUF_DEPTH = 1024,
  parameter int unsigned WDEPTH    = 2048,
  localparam int unsigned WA_W     = $clog2(WDEPTH),
  localparam int unsigned BA_W     = $clog2(BUF_DEPTH),
  localparam int unsigned LW       = $clog2(MAX_L + 1),
  localparam int unsigned LA       = $clog2(MAX_L),
  localparam int unsigned DW       = $clog2(HEAD_D),
  localparam int unsigned HW       = (P_HEAD > 1) ? $clog2(P_HEAD) : 1,
  localparam int unsigned PSV_P    = (P_SV > 0) ? P_SV : 1,
  localparam int unsigned CWV      = (P_SV > 0 && HEAD_D / PSV_P > 1) ? $clog2(HEAD_D / PSV_P) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  // layer configuration of the butterfly processor
  input  logic            mode,
  input  logic [4:0]      log2n,
  input  logic            w_sel,
  input  logic            route_postp,
  // weight loads
  input  logic            w_we   [P_BE],
  input  logic            w_pp,
  input  logic [WA_W-1:0] w_addr,
  input  bfly_w_t         w_data [P_BU],
  // engine streams
  input  logic            in_valid  [P_BE],
  output logic            in_ready  [P_BE],
  input  cplx_t           in_data   [P_BE],
  output logic            out_valid [P_BE],
  input  logic            out_ready [P_BE],
  output cplx_t           out_data  [P_BE],
  // shortcut buffer and layer-norm parameters
  input  logic            sc_we,
  input  logic            sc_wpp,
  input  logic [BA_W-1:0] sc_waddr,
  input  real_t           sc_wdata,
  input  logic            sc_rpp,
  input  logic            g_we,
  input  logic [BA_W-1:0] g_addr,
  input  real_t           g_gamma,
  input  real_t           g_beta,
  output logic            pp_valid,
  output real_t           pp_data,
  // attention processor
  input  logic            ap_start,
  input  logic [LW-1:0]   ap_n_keys,
  input  logic [LW-1:0]   ap_n_rows,
  input  logic [LW-1:0]   ap_q_rows_ready,
  input  logic            ap_wr_pp,
  input  logic            ap_rd_pp,
  input  logic            ap_ld_we,
  input  logic [HW-1:0]   ap_ld_head,
  input  logic [1:0]      ap_ld_buf,
  input  logic [LA-1:0]   ap_ld_row,
  input  logic [DW-1:0]   ap_ld_col,
  input  real_t           ap_ld_data,
  output logic            ap_o_valid [P_HEAD],
  output logic [CWV-1:0]  ap_o_chunk [P_HEAD],
  output real_t           ap_o_data  [P_HEAD][PSV_P],
  // status
  output logic            bp_idle,
  output logic            postp_busy,
  output logic            ap_busy,
  output logic [3:0]      bp_events,
  output logic            ap_overlap
);
  // ---------------- butterfly processor ----------------
  logic  be_out_valid [P_BE];
  logic  be_out_ready [P_BE];
  logic  x_ready;

  bfly_processor #(.P_BE(P_BE), .P_BU(P_BU), .DEPTH(BUF_DEPTH), .WDEPTH(WDEPTH)) u_bp (
    .clk, .rst_n, .mode, .log2n, .w_sel, .w_we, .w_pp, .w_addr, .w_data,
    .in_valid, .in_ready, .in_data,
    .out_valid(be_out_valid), .out_ready(be_out_ready), .out_data,
    .idle(bp_idle), .events(bp_events));

  always_comb begin
    for (int e = 0; e < P_BE; e++) begin
      out_valid[e]    = be_out_valid[e];
      be_out_ready[e] = out_ready[e];
    end
    if (route_postp) begin
      out_valid[0]    = 1'b0;
      be_out_ready[0] = x_ready;
    end
  end

  // ---------------- shortcut buffer and PostP ----------------
  logic            sc_re;
  logic [BA_W-1:0] sc_raddr;
  real_t           sc_rdata;

  onchip_buffer #(.WIDTH(16), .DEPTH(BUF_DEPTH)) u_sc_buf (
    .clk, .we(sc_we), .wr_pp(sc_wpp), .waddr(sc_waddr), .wdata(sc_wdata),
    .re(sc_re), .rd_pp(sc_rpp), .raddr(sc_raddr), .rdata(sc_rdata));

  postp #(.DEPTH(BUF_DEPTH)) u_postp (
    .clk, .rst_n, .log2n, .g_we, .g_addr, .g_gamma, .g_beta,
    .x_valid(route_postp && be_out_valid[0]), .x_ready, .x_data(out_data[0].re),
    .sc_re, .sc_raddr, .sc_rdata, .y_valid(pp_valid), .y_data(pp_data), .busy(postp_busy));

  // ---------------- attention processor ----------------
  if (P_QK > 0 && P_SV > 0) begin : g_ap
    attention_processor #(.P_HEAD(P_HEAD), .P_QK(P_QK), .P_SV(P_SV), .HEAD_D(HEAD_D), .MAX_L(MAX_L)) u_ap (
      .clk, .rst_n, .start(ap_start), .n_keys(ap_n_keys), .n_rows(ap_n_rows),
      .q_rows_ready(ap_q_rows_ready), .wr_pp(ap_wr_pp), .rd_pp(ap_rd_pp),
      .ld_we(ap_ld_we), .ld_head(ap_ld_head), .ld_buf(ap_ld_buf), .ld_row(ap_ld_row),
      .ld_col(ap_ld_col), .ld_data(ap_ld_data),
      .o_valid(ap_o_valid), .o_chunk(ap_o_chunk), .o_data(ap_o_data),
      .busy(ap_busy), .ev_overlap(ap_overlap));
  end else begin : g_no_ap
    always_comb begin
      ap_busy = 1'b0; ap_overlap = 1'b0;
      for (int h = 0; h < P_HEAD; h++) begin
        ap_o_valid[h] = 1'b0; ap_o_chunk[h] = '0;
        for (int p = 0; p < PSV_P; p++) ap_o_data[h][p] = '0;
      end
    end
  end

endmodule
