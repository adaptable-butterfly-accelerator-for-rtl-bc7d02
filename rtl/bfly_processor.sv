// Butterfly processor (BP): P_BE butterfly engines side by side.
//
// All engines share one layer configuration (mode, vector length, weight
// half) and each has its own serial input and output stream and its own
// weight buffer, so P_BE vectors (for example P_BE token rows of a layer)
// are transformed at once. The engine count and the shared run-time
// configuration follow the published design; giving every engine an
// independent stream is this implementation's choice, standing in for the
// off-chip interface that feeds them.
module bfly_processor
  import abf_pkg::*;
#(
  parameter int unsigned P_BE   = 64,
  parameter int unsigned P_BU   = 4,
  parameter int unsigned DEPTH  = 1024,
  parameter int unsigned WDEPTH = 2048,
  localparam int unsigned WA_W  = $clog2(WDEPTH)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            mode,
  input  logic [4:0]      log2n,
  input  logic            w_sel,
  input  logic            w_we   [P_BE],
  input  logic            w_pp,
  input  logic [WA_W-1:0] w_addr,
  input  bfly_w_t         w_data [P_BU],
  input  logic            in_valid  [P_BE],
  output logic            in_ready  [P_BE],
  input  cplx_t           in_data   [P_BE],
  output logic            out_valid [P_BE],
  input  logic            out_ready [P_BE],
  output cplx_t           out_data  [P_BE],
  output logic            idle,
  output logic [3:0]      events      // stall, load||compute, output||compute, load||output
);
  logic eng_idle [P_BE];
  logic ev [P_BE][4];

  for (genvar e = 0; e < P_BE; e++) begin : g_be
    bfly_engine #(.NBU(P_BU), .DEPTH(DEPTH), .WDEPTH(WDEPTH)) u_be (
      .clk, .rst_n, .mode, .log2n, .w_sel,
      .w_we(w_we[e]), .w_pp, .w_addr, .w_data,
      .in_valid(in_valid[e]), .in_ready(in_ready[e]), .in_data(in_data[e]),
      .out_valid(out_valid[e]), .out_ready(out_ready[e]), .out_data(out_data[e]),
      .idle(eng_idle[e]),
      .ev_stall(ev[e][0]), .ev_ovl_ld_cp(ev[e][1]), .ev_ovl_out_cp(ev[e][2]), .ev_ovl_ld_out(ev[e][3])
    );
  end

  always_comb begin
    idle = 1'b1;
    events = '0;
    for (int e = 0; e < P_BE; e++) begin
      idle = idle & eng_idle[e];
      for (int k = 0; k < 4; k++) events[k] = events[k] | ev[e][k];
    end
  end

endmodule
