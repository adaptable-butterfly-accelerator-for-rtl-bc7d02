// Double-buffered on-chip buffer (key, query, value and shortcut buffers).
//
// Two halves of DEPTH words each. The producer writes one half (`wr_pp`)
// while the consumer reads the other (`rd_pp`), so transfers overlap
// computation. The published design states that all on-chip buffers are
// double-buffered and gives their depth (1024); the port arrangement is
// this implementation's.
//
// Timing: writes at the clock edge, read data one cycle after `re`.
module onchip_buffer #(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic             wr_pp,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic             rd_pp,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [2*DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[{wr_pp, waddr}] <= wdata;
    if (re) rdata <= mem[{rd_pp, raddr}];
  end

endmodule
