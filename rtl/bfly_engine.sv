// Butterfly engine (BE): the adaptable memory system and NBU adaptable
// butterfly units, configurable at run time for FFT or butterfly linear
// transformation (BLT).
//
// Data path (one vector of N = 2**log2n elements at a time):
//   serial in -> S2P (rotated column layout) -> butterfly buffer banks
//   -> index coalescing crossbar -> NBU butterfly units (weights from the
//   weight buffer) -> recover crossbar -> same banks (in place), repeated
//   for the log2n stages -> P2S -> serial out.
// There are NBANK = 2*NBU banks so that every cycle feeds all units.
//
// Control: each of the two ping-pong banks is EMPTY, FULL (loaded) or DONE
// (computed). Three independent sequencers move vectors through them in
// order: load (S2P into an EMPTY bank), compute (index generator on a FULL
// bank) and output (P2S from a DONE bank). The overlap each mode allows is
// the published one:
//   BLT: A and B are separate memories, so loading the next vector and
//        emitting the previous one both overlap the computation.
//   FFT: both ping-pong banks live in A and B together and computation
//        needs the read and write ports of both, so it runs alone; only
//        output of one vector overlaps the load of the next.
// When a sequencer must wait for the other side, the input is stalled
// (in_ready low) or the output simply waits.
//
// Output order is storage order, so an FFT result (natural-order input,
// stride N/2 first) comes out in bit-reversed frequency order.
//
// Configuration (`mode`, `log2n`, `w_sel`) must only change while `idle`.
// Limits: NBANK <= N; N <= NBANK*DEPTH (BLT) or NBANK*DEPTH/2 (FFT);
// log2n * N / NBANK <= WDEPTH.
//
// From the published design: the data path above, NBANK = 2*NBU, the
// per-mode overlap rules and run-time switching between FFT and BLT. This
// implementation's own choices: the three-sequencer control with bank
// states, the stall rule (ld_wait) between vectors, pipeline depths, and
// storing weights in schedule order.
//
// Lint notes: the index generator's stage output and the P2S busy output
// are left unconnected on purpose; the weight address already encodes the
// stage and out_busy tracks the P2S sequence.
module bfly_engine
  import abf_pkg::*;
#(
  parameter int unsigned NBU    = 4,
  parameter int unsigned DEPTH  = 1024,
  parameter int unsigned WDEPTH = 2048,
  localparam int unsigned NBANK = 2 * NBU,
  localparam int unsigned COL_W = $clog2(DEPTH),
  localparam int unsigned IDX_W = COL_W + $clog2(NBANK),
  localparam int unsigned WA_W  = $clog2(WDEPTH)
) (
  input  logic            clk,
  input  logic            rst_n,
  // layer configuration
  input  logic            mode,       // bfly_mode_e
  input  logic [4:0]      log2n,
  input  logic            w_sel,      // weight-buffer half used by this layer
  // weight loading
  input  logic            w_we,
  input  logic            w_pp,
  input  logic [WA_W-1:0] w_addr,
  input  bfly_w_t         w_data [NBU],
  // serial input stream
  input  logic            in_valid,
  output logic            in_ready,
  input  cplx_t           in_data,
  // serial output stream
  output logic            out_valid,
  input  logic            out_ready,
  output cplx_t           out_data,
  // status
  output logic            idle,
  output logic            ev_stall,      // input held back this cycle
  output logic            ev_ovl_ld_cp,  // load overlapped computation
  output logic            ev_ovl_out_cp, // output overlapped computation
  output logic            ev_ovl_ld_out  // load overlapped output
);
  localparam int unsigned DAW = $clog2(DEPTH);

  typedef enum logic [1:0] {B_EMPTY, B_FULL, B_DONE} bank_state_e;
  bank_state_e st [2];
  logic ld_pp, cp_pp, out_pp;

  // ---------------- load: S2P ----------------
  logic             s2p_wv, s2p_last, s2p_idle;
  logic [COL_W-1:0] s2p_col;
  cplx_t            s2p_data [NBANK];
  logic             in_fire;

  // ---------------- compute ----------------
  logic             cp_busy, cp_start;
  logic             ig_busy, ig_valid, ig_done;
  logic [IDX_W-1:0] ig_idx [NBANK];
  logic [4:0]       ig_stage;
  logic [WA_W-1:0]  ig_waddr;
  logic [COL_W-1:0] rd_addr [NBANK];
  cplx_t            bank_q0 [NBANK], bank_q1 [NBANK];
  cplx_t            slot_q [NBANK];
  bfly_w_t          wq [NBU];
  logic             v1;
  logic             bu_ov [NBU];
  cplx_t            bu_o [NBANK];
  logic [IDX_W-1:0] idx_d1 [NBANK], idx_d2 [NBANK], idx_d3 [NBANK];
  logic             v2, v3;
  logic             rc_we [NBANK];
  logic [COL_W-1:0] rc_addr [NBANK];
  cplx_t            rc_data [NBANK];

  // ---------------- output: P2S ----------------
  logic             out_busy, out_start, p2s_done, p2s_rd;
  logic [COL_W-1:0] p2s_col;

  // ---------------- sequencing ----------------
  logic fft;
  assign fft = (mode == MODE_FFT);

  assign out_start = !out_busy && (st[out_pp] == B_DONE) && !(fft && cp_busy);
  assign cp_start  = !cp_busy && (st[cp_pp] == B_FULL) &&
                     (!fft || (!out_busy && !out_start && s2p_idle));
  // in FFT mode a loaded vector waiting for computation blocks a new load
  // ld_wait holds the input between the last element of a vector and the
  // cycle its last column is written, so the next vector never starts
  // before the load bank has switched
  logic [IDX_W-1:0] in_cnt;
  logic             ld_wait;
  assign in_ready  = (st[ld_pp] == B_EMPTY) && !ld_wait &&
                     !(fft && (cp_busy || cp_start || (s2p_idle && st[cp_pp] == B_FULL)));
  assign in_fire   = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st[0] <= B_EMPTY; st[1] <= B_EMPTY;
      ld_pp <= 1'b0; cp_pp <= 1'b0; out_pp <= 1'b0;
      cp_busy <= 1'b0; out_busy <= 1'b0;
      in_cnt <= '0; ld_wait <= 1'b0;
    end else begin
      if (in_fire) begin
        if (in_cnt == IDX_W'((1 << log2n) - 1)) begin in_cnt <= '0; ld_wait <= 1'b1; end
        else in_cnt <= in_cnt + 1'b1;
      end
      if (s2p_wv && s2p_last) ld_wait <= 1'b0;
      if (s2p_wv && s2p_last) begin
        st[ld_pp] <= B_FULL;
        ld_pp <= ~ld_pp;
      end
      if (cp_start) cp_busy <= 1'b1;
      if (cp_busy && !ig_busy && !v1 && !v2 && !v3 && !ig_done) begin
        cp_busy <= 1'b0;
        st[cp_pp] <= B_DONE;
        cp_pp <= ~cp_pp;
      end
      if (out_start) out_busy <= 1'b1;
      if (p2s_done) begin
        out_busy <= 1'b0;
        st[out_pp] <= B_EMPTY;
        out_pp <= ~out_pp;
      end
    end
  end

  s2p #(.NBANK(NBANK), .COL_W(COL_W)) u_s2p (
    .clk, .rst_n, .log2n, .in_valid(in_fire), .in_data,
    .wr_valid(s2p_wv), .wr_col(s2p_col), .wr_data(s2p_data), .wr_last(s2p_last), .idle(s2p_idle)
  );

  bfly_index_gen #(.NBANK(NBANK), .COL_W(COL_W), .WA_W(WA_W), .GAP(3)) u_ig (
    .clk, .rst_n, .log2n, .start(cp_start), .busy(ig_busy), .valid(ig_valid),
    .idx(ig_idx), .stage_log(ig_stage), .wt_addr(ig_waddr), .done(ig_done)
  );

  index_coalesce #(.NBANK(NBANK), .COL_W(COL_W)) u_ic (
    .clk, .rst_n, .in_valid(ig_valid), .idx(ig_idx), .rd_addr,
    .bank_q(bank_q0), .slot_q
  );

  weight_buffer #(.NBU(NBU), .DEPTH(WDEPTH)) u_wb (
    .clk, .we(w_we), .wr_pp(w_pp), .waddr(w_addr), .wdata(w_data),
    .re(ig_valid), .rd_pp(w_sel), .raddr(ig_waddr), .rdata(wq)
  );

  // index pipeline alongside the data
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; v3 <= 1'b0;
      for (int k = 0; k < NBANK; k++) begin idx_d1[k] <= '0; idx_d2[k] <= '0; idx_d3[k] <= '0; end
    end else begin
      v1 <= ig_valid; v2 <= v1; v3 <= v2;
      for (int k = 0; k < NBANK; k++) begin
        idx_d1[k] <= ig_idx[k]; idx_d2[k] <= idx_d1[k]; idx_d3[k] <= idx_d2[k];
      end
    end
  end

  for (genvar u = 0; u < NBU; u++) begin : g_bu
    bfly_unit u_bu (
      .clk, .rst_n, .mode, .in_valid(v1),
      .in1(slot_q[2*u]), .in2(slot_q[2*u+1]), .w(wq[u]),
      .out_valid(bu_ov[u]), .out1(bu_o[2*u]), .out2(bu_o[2*u+1])
    );
  end

  recover #(.NBANK(NBANK), .COL_W(COL_W)) u_rc (
    .in_valid(v3), .idx(idx_d3), .slot_d(bu_o),
    .wr_en(rc_we), .wr_addr(rc_addr), .wr_data(rc_data)
  );

  // ---------------- butterfly buffer banks ----------------
  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    logic          we [2], wpp [2], re [2], rpp [2];
    logic [DAW-1:0] wa [2], ra [2];
    cplx_t         wd [2], rd [2];
    assign we[0] = s2p_wv;    assign wpp[0] = ld_pp;  assign wa[0] = s2p_col;    assign wd[0] = s2p_data[b];
    assign we[1] = rc_we[b];  assign wpp[1] = cp_pp;  assign wa[1] = rc_addr[b]; assign wd[1] = rc_data[b];
    assign re[0] = ig_valid;  assign rpp[0] = cp_pp;  assign ra[0] = rd_addr[b];
    assign re[1] = p2s_rd;    assign rpp[1] = out_pp; assign ra[1] = p2s_col;
    assign bank_q0[b] = rd[0];
    assign bank_q1[b] = rd[1];
    bfly_buffer #(.DEPTH(DEPTH)) u_buf (
      .clk, .mode, .we, .wpp, .waddr(wa), .wdata(wd), .re, .rpp, .raddr(ra), .rdata(rd)
    );
  end

  p2s #(.NBANK(NBANK), .COL_W(COL_W)) u_p2s (
    .clk, .rst_n, .log2n, .start(out_start), .busy(),
    .rd_en(p2s_rd), .rd_col(p2s_col), .rd_data(bank_q1),
    .out_valid, .out_data, .out_ready, .done(p2s_done)
  );

  assign idle = (st[0] == B_EMPTY) && (st[1] == B_EMPTY) && s2p_idle && !cp_busy && !out_busy;
  assign ev_stall      = in_valid && !in_ready;
  assign ev_ovl_ld_cp  = in_fire && cp_busy;
  assign ev_ovl_out_cp = out_valid && cp_busy;
  assign ev_ovl_ld_out = in_fire && out_valid;

  // BU results must line up with the index pipeline
  always_ff @(posedge clk) assert (bu_ov[0] == v3) else $error("bfly_engine: pipeline misaligned");

endmodule
