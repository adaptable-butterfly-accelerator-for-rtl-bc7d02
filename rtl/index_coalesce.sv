// Read control and index coalescing of a butterfly engine.
//
// Read side (same cycle as the indices): for each slot's element index the
// bank is found with a bit-count of the column bits plus an add of the row
// bits, bank = (row + popcount(col)) mod NBANK, and that bank is given the
// element's column as its read address. The indices are registered.
// Data side (next cycle): a crossbar takes the NBANK bank outputs and
// places each element in its slot, so that slots 2k and 2k+1 form the pair
// of butterfly unit k. The bit-count/add/crossbar structure follows the
// published index-coalescing module; merging the read-address generation
// into it is this implementation's choice.
//
// The indices of one set must fall in distinct banks (the index generator
// guarantees it; an assertion checks it).
module index_coalesce
  import abf_pkg::*;
#(
  parameter int unsigned NBANK = 8,
  parameter int unsigned COL_W = 10,
  localparam int unsigned IDX_W = COL_W + $clog2(NBANK)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [IDX_W-1:0] idx [NBANK],
  output logic [COL_W-1:0] rd_addr [NBANK],
  input  cplx_t            bank_q [NBANK],
  output cplx_t            slot_q [NBANK]
);
  localparam int unsigned LOG_B = $clog2(NBANK);

  logic [IDX_W-1:0] idx_q [NBANK];

  always_comb begin
    for (int b = 0; b < NBANK; b++) rd_addr[b] = '0;
    for (int k = 0; k < NBANK; k++)
      rd_addr[bank_of(32'(idx[k]), LOG_B)] = COL_W'(idx[k] >> LOG_B);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int k = 0; k < NBANK; k++) idx_q[k] <= '0;
    else if (in_valid) for (int k = 0; k < NBANK; k++) idx_q[k] <= idx[k];
  end

  always_comb begin
    for (int k = 0; k < NBANK; k++) slot_q[k] = bank_q[bank_of(32'(idx_q[k]), LOG_B)];
  end

  // every bank read at most once per set
  always_ff @(posedge clk) begin
    if (in_valid) begin
      logic [NBANK-1:0] hit;
      hit = '0;
      for (int k = 0; k < NBANK; k++) hit[bank_of(32'(idx[k]), LOG_B)] = 1'b1;
      assert (&hit) else $error("index_coalesce: bank conflict");
    end
  end

endmodule
