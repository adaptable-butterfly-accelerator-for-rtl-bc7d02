// Weight buffer of a butterfly engine.
//
// Holds, for each of the NBU butterfly units, one 64-bit weight word per
// compute cycle of a vector: the four real weights w1..w4 of a
// butterfly-linear pair, or a complex twiddle factor (w1 = real,
// w2 = imaginary) in FFT mode. Word `a` is read in compute cycle `a` of
// every vector, so the host stores the weights in the order the index
// generator visits the pairs. Because a layer applies the same weights to
// every input vector, the buffer is double-buffered per layer: `rd_pp`
// selects the half in use while the host may fill the other half. The
// published design only names this buffer; its organisation is this
// implementation's.
//
// Timing: registered read, data one cycle after `re`.
module weight_buffer
  import abf_pkg::*;
#(
  parameter int unsigned NBU   = 4,
  parameter int unsigned DEPTH = 2048,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic          wr_pp,
  input  logic [AW-1:0] waddr,
  input  bfly_w_t       wdata [NBU],
  input  logic          re,
  input  logic          rd_pp,
  input  logic [AW-1:0] raddr,
  output bfly_w_t       rdata [NBU]
);
  bfly_w_t mem [NBU][2*DEPTH];

  always_ff @(posedge clk) begin
    for (int u = 0; u < NBU; u++) begin
      if (we) mem[u][{wr_pp, waddr}] <= wdata[u];
      if (re) rdata[u] <= mem[u][{rd_pp, raddr}];
    end
  end

endmodule
