// One bank of the butterfly buffers, shared by both modes.
//
// The bank holds two 16-bit memories, input buffer A and input buffer B,
// each DEPTH words with one write and one registered read port. Two
// logical ping-pong banks (pp = 0/1) are mapped onto them by mode:
//
//   butterfly linear: ping-pong bank 0 is buffer A, bank 1 is buffer B;
//     real data, full depth, and A and B work independently, so a load
//     into one can run beside computation on the other.
//   FFT: a complex word needs 32 bits, so ping-pong bank 0 is the lower
//     halves of A (real part) and B (imaginary part) and bank 1 the upper
//     halves; DEPTH/2 complex words each. Every access now uses both
//     memories, so only one write and one read can happen per cycle.
//
// This mapping is the published memory-sharing scheme. The bank offers
// two logical write ports (0: load, 1: compute write-back) and two logical
// read ports (0: compute, 1: output); each physical memory takes whichever
// port addresses it. Sharing conflicts are the controller's to avoid and
// are checked by assertions.
//
// Timing: writes take effect at the clock edge; read data appear in the
// cycle after the request.
module bfly_buffer
  import abf_pkg::*;
#(
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          mode,          // bfly_mode_e, held per layer
  // write ports
  input  logic          we   [2],
  input  logic          wpp  [2],
  input  logic [AW-1:0] waddr[2],
  input  cplx_t         wdata[2],
  // read ports
  input  logic          re   [2],
  input  logic          rpp  [2],
  input  logic [AW-1:0] raddr[2],
  output cplx_t         rdata[2]
);

  real_t mem_a [DEPTH];
  real_t mem_b [DEPTH];

  // physical address of a logical access
  function automatic logic [AW-1:0] phys(input logic pp, input logic [AW-1:0] a, input logic m);
    return (m == MODE_FFT) ? {pp, a[AW-2:0]} : a;
  endfunction

  // which logical ports hit memory A / B
  logic wa [2], wb [2], ra [2], rb [2];
  always_comb begin
    for (int p = 0; p < 2; p++) begin
      wa[p] = we[p] && (mode == MODE_FFT || !wpp[p]);
      wb[p] = we[p] && (mode == MODE_FFT ||  wpp[p]);
      ra[p] = re[p] && (mode == MODE_FFT || !rpp[p]);
      rb[p] = re[p] && (mode == MODE_FFT ||  rpp[p]);
    end
  end

  real_t qa, qb;
  logic  rsel_pp [2];
  logic  mode_q;

  always_ff @(posedge clk) begin
    // memory A: real parts
    if (wa[0])      mem_a[phys(wpp[0], waddr[0], mode)] <= wdata[0].re;
    else if (wa[1]) mem_a[phys(wpp[1], waddr[1], mode)] <= wdata[1].re;
    // memory B: second real bank or imaginary parts
    if (wb[0])      mem_b[phys(wpp[0], waddr[0], mode)] <= (mode == MODE_FFT) ? wdata[0].im : wdata[0].re;
    else if (wb[1]) mem_b[phys(wpp[1], waddr[1], mode)] <= (mode == MODE_FFT) ? wdata[1].im : wdata[1].re;
    if (ra[0])      qa <= mem_a[phys(rpp[0], raddr[0], mode)];
    else if (ra[1]) qa <= mem_a[phys(rpp[1], raddr[1], mode)];
    if (rb[0])      qb <= mem_b[phys(rpp[0], raddr[0], mode)];
    else if (rb[1]) qb <= mem_b[phys(rpp[1], raddr[1], mode)];
    rsel_pp[0] <= rpp[0];
    rsel_pp[1] <= rpp[1];
    mode_q <= mode;
  end

  always_comb begin
    for (int p = 0; p < 2; p++) begin
      if (mode_q == MODE_FFT) rdata[p] = '{im: qb, re: qa};
      else                    rdata[p] = '{im: '0, re: (rsel_pp[p] ? qb : qa)};
    end
  end

  // each physical memory serves one write and one read per cycle
  always_ff @(posedge clk) begin
    assert (!(wa[0] && wa[1])) else $error("bfly_buffer: write conflict on A");
    assert (!(wb[0] && wb[1])) else $error("bfly_buffer: write conflict on B");
    assert (!(ra[0] && ra[1])) else $error("bfly_buffer: read conflict on A");
    assert (!(rb[0] && rb[1])) else $error("bfly_buffer: read conflict on B");
  end

endmodule
