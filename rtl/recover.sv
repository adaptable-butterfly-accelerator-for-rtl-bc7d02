// Recover module and write control of a butterfly engine.
//
// Takes the NBANK results of the butterfly units (slot 2k and 2k+1 are the
// two outputs of unit k) together with the element indices they belong to,
// and routes every result back to the bank and column it was read from:
// bank = (row + popcount(col)) mod NBANK, address = col. Data thus stay in
// their storage order from stage to stage (in-place computation). The
// published design names this block and states its purpose; the inverse
// crossbar is this implementation's. Purely combinational.
module recover
  import abf_pkg::*;
#(
  parameter int unsigned NBANK = 8,
  parameter int unsigned COL_W = 10,
  localparam int unsigned IDX_W = COL_W + $clog2(NBANK)
) (
  input  logic             in_valid,
  input  logic [IDX_W-1:0] idx [NBANK],
  input  cplx_t            slot_d [NBANK],
  output logic             wr_en [NBANK],
  output logic [COL_W-1:0] wr_addr [NBANK],
  output cplx_t            wr_data [NBANK]
);
  localparam int unsigned LOG_B = $clog2(NBANK);

  always_comb begin
    logic [LOG_B-1:0] b;
    for (int i = 0; i < NBANK; i++) begin
      wr_en[i] = 1'b0; wr_addr[i] = '0; wr_data[i] = '0;
    end
    for (int k = 0; k < NBANK; k++) begin
      b = LOG_B'(bank_of(32'(idx[k]), LOG_B));
      wr_en[b]   = in_valid;
      wr_addr[b] = COL_W'(idx[k] >> LOG_B);
      wr_data[b] = slot_d[k];
    end
  end

endmodule
