// Shared types, constants and helper functions of the adaptable butterfly
// accelerator.
//
// Numbers are 16-bit two's-complement fixed point with FRAC_W fractional
// bits (Q8.8 by default). This departs from the original design, which
// uses IEEE half-precision floating point; the word width (16 bit real,
// 32 bit complex) is kept so that the buffer organisation is unchanged.
// A complex number is packed as {imag, real}; in butterfly-linear mode only
// the real half is meaningful.
//
// The bank mapping functions implement the conflict-free data layout of the
// butterfly buffers: element i lives in column c = i / NBANK at row
// r = i % NBANK, and the column is rotated down by the starting position
// P_c = popcount(c), so its bank is (r + popcount(c)) mod NBANK.
//
// The 16-bit word follows the published design; the Q8.8 fixed-point
// format that replaces its half-precision floating point is this design's
// own choice, as are the packed layouts of the structs.
package abf_pkg;

  localparam int unsigned DATA_W = 16;   // real word width
  localparam int unsigned FRAC_W = 8;    // fractional bits of the fixed point format

  typedef logic signed [DATA_W-1:0] real_t;
  typedef struct packed {
    real_t im;
    real_t re;
  } cplx_t;

  // Four weights of one butterfly-linear pair, or one complex twiddle
  // (w1 = real part, w2 = imaginary part) in FFT mode.
  typedef struct packed {
    real_t w4;
    real_t w3;
    real_t w2;
    real_t w1;
  } bfly_w_t;

  typedef enum logic {
    MODE_BLT = 1'b0,   // butterfly linear transformation (real data)
    MODE_FFT = 1'b1    // radix-2 FFT (complex data)
  } bfly_mode_e;

  // Fixed-point multiply with truncation towards minus infinity.
  function automatic real_t fx_mul(input real_t a, input real_t b);
    logic signed [2*DATA_W-1:0] p;
    p = a * b;
    return real_t'(p >>> FRAC_W);
  endfunction

  // Population count of a column number (the "bit-count" of Fig. 9b / 11).
  function automatic int unsigned popcount(input logic [31:0] v);
    int unsigned n;
    n = 0;
    for (int k = 0; k < 32; k++) n += int'(v[k]);
    return n;
  endfunction

  // Bank that holds element `idx` when there are 2**log_b banks:
  // (row + popcount(column)) mod NBANK.
  function automatic int unsigned bank_of(input logic [31:0] idx, input int unsigned log_b);
    logic [31:0] row, col;
    row = idx & ((32'd1 << log_b) - 1);
    col = idx >> log_b;
    return (row + popcount(col)) & ((32'd1 << log_b) - 1);
  endfunction

endpackage
