// Serial-to-parallel converter (S2P) of the butterfly memory system.
//
// Serial elements arrive one per accepted `in_valid`. A counter numbers them
// within the current vector of 2**log2n elements; its low bits give the row
// r inside a column of NBANK elements and its high bits the column c. Once a
// column is packed, it is written to all NBANK banks at address c, rotated
// down by the column's starting position P_c = popcount(c): row r goes to
// bank (r + popcount(c)) mod NBANK. The bit-count plus add that produces
// the rotation, and the rotation rule itself, follow the published S2P; the
// one-element-per-cycle input and the registered output are this
// implementation's choices.
//
// Timing: the column write (`wr_valid`) is issued one cycle after its last
// element is accepted. `wr_last` marks the last column of a vector, after
// which the counter restarts at zero. `idle` is high when no vector is
// partly received and no write is pending.
module s2p
  import abf_pkg::*;
#(
  parameter int unsigned NBANK = 8,
  parameter int unsigned COL_W = 10
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [4:0]       log2n,       // vector length 2**log2n, >= NBANK
  input  logic             in_valid,
  input  cplx_t            in_data,
  output logic             wr_valid,
  output logic [COL_W-1:0] wr_col,
  output cplx_t            wr_data [NBANK],
  output logic             wr_last,
  output logic             idle
);
  localparam int unsigned LOG_B = $clog2(NBANK);

  logic [COL_W+LOG_B-1:0] cnt;
  cplx_t                  pack [NBANK];
  logic [LOG_B-1:0]       row;
  logic [COL_W-1:0]       col;
  logic                   last_elem;

  assign row = cnt[LOG_B-1:0];
  assign col = COL_W'(cnt >> LOG_B);
  assign last_elem = (32'(cnt) == (32'd1 << log2n) - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt      <= '0;
      wr_valid <= 1'b0;
      wr_col   <= '0;
      wr_last  <= 1'b0;
      for (int b = 0; b < NBANK; b++) begin
        pack[b]    <= '0;
        wr_data[b] <= '0;
      end
    end else begin
      wr_valid <= 1'b0;
      wr_last  <= 1'b0;
      if (in_valid) begin
        pack[row] <= in_data;
        cnt <= last_elem ? '0 : cnt + 1'b1;
        if (row == LOG_B'(NBANK - 1)) begin
          // pack & permutation: rotate by the column's starting position
          for (int r = 0; r < NBANK; r++) begin
            wr_data[(r + popcount(32'(col))) % NBANK] <= (r == NBANK - 1) ? in_data : pack[r];
          end
          wr_valid <= 1'b1;
          wr_col   <= col;
          wr_last  <= last_elem;
        end
      end
    end
  end

  assign idle = (cnt == '0) && !wr_valid;

endmodule
