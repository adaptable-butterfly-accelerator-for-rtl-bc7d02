// Adaptable butterfly unit (BU).
//
// One BU holds four real multipliers, one add/subtract stage, one add stage,
// two output demultiplexers and a complex adder/subtractor. Eight operand
// multiplexers pick the multiplier inputs according to `mode`:
//
//   butterfly linear (MODE_BLT), real data, four independent weights
//     out1 = in1*w1 + in2*w3          out2 = in1*w2 + in2*w4
//   FFT (MODE_FFT), complex data, one complex twiddle w = w1 + j*w2
//     t    = in2 * w  (the four multipliers form the complex product)
//     out1 = in1 + t                   out2 = in1 - t
//
// In BLT mode the demultiplexers send the two adder results straight out;
// in FFT mode they send them to the complex add/sub. This wiring and the
// operand pairing of every multiplier follow the published diagram of the
// unit; the number format (Q8.8 fixed point, products truncated, sums
// wrapping) and the two-stage pipeline are this implementation's choice.
//
// Timing: fully pipelined, one pair per cycle, results appear two cycles
// after the operands (register after the multipliers, register at the
// output). `mode` is a layer-level setting and must be held while data
// are in flight.
module bfly_unit
  import abf_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      mode,        // bfly_mode_e
  input  logic      in_valid,
  input  cplx_t     in1,
  input  cplx_t     in2,
  input  bfly_w_t   w,
  output logic      out_valid,
  output cplx_t     out1,
  output cplx_t     out2
);

  // ---- operand multiplexers ----
  real_t m0_a, m0_b, m1_a, m1_b, m2_a, m2_b, m3_a, m3_b;
  always_comb begin
    if (mode == MODE_FFT) begin
      m0_a = in2.re; m0_b = w.w1;   // re*wr
      m1_a = in2.im; m1_b = w.w2;   // im*wi
      m2_a = in2.re; m2_b = w.w2;   // re*wi
      m3_a = in2.im; m3_b = w.w1;   // im*wr
    end else begin
      m0_a = in1.re; m0_b = w.w1;
      m1_a = in2.re; m1_b = w.w3;
      m2_a = in1.re; m2_b = w.w2;
      m3_a = in2.re; m3_b = w.w4;
    end
  end

  // ---- stage 1: multipliers ----
  real_t p0, p1, p2, p3;
  cplx_t in1_d;
  logic  v1, mode_d;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0;
      p0 <= '0; p1 <= '0; p2 <= '0; p3 <= '0;
      in1_d <= '0;
      mode_d <= 1'b0;
    end else begin
      v1 <= in_valid;
      p0 <= fx_mul(m0_a, m0_b);
      p1 <= fx_mul(m1_a, m1_b);
      p2 <= fx_mul(m2_a, m2_b);
      p3 <= fx_mul(m3_a, m3_b);
      in1_d <= in1;
      mode_d <= mode;
    end
  end

  // ---- stage 2: real adders, demultiplexers, complex add/sub ----
  real_t s0, s1;
  cplx_t o1, o2;
  always_comb begin
    s0 = (mode_d == MODE_FFT) ? real_t'(p0 - p1) : real_t'(p0 + p1);  // +/- adder
    s1 = real_t'(p2 + p3);                                           // + adder
    if (mode_d == MODE_FFT) begin
      o1.re = real_t'(in1_d.re + s0);
      o1.im = real_t'(in1_d.im + s1);
      o2.re = real_t'(in1_d.re - s0);
      o2.im = real_t'(in1_d.im - s1);
    end else begin
      o1 = '{im: '0, re: s0};
      o2 = '{im: '0, re: s1};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out1 <= '0;
      out2 <= '0;
    end else begin
      out_valid <= v1;
      out1 <= o1;
      out2 <= o2;
    end
  end

endmodule
