// Parallel-to-serial converter (P2S) of the butterfly memory system.
//
// After `start`, P2S reads the 2**log2n / NBANK columns of a vector in
// order, one column per read of all NBANK banks at the same address. The
// read data come back rotated by the column's starting position
// popcount(c); P2S undoes that rotation (row r is taken from bank
// (r + popcount(c)) mod NBANK) and sends the NBANK elements out one by one
// with a valid/ready handshake. The output is therefore in storage-index
// order. The block is only named in the published design; the un-rotation
// mirrors the S2P rule and the simple read/wait/emit sequence, which
// emits NBANK elements every NBANK+2 cycles, is this implementation's.
//
// Timing: `rd_en`/`rd_col` are registered-read requests; `rd_data` must be
// valid in the following cycle. `done` pulses for one cycle after the last
// element has been accepted.
module p2s
  import abf_pkg::*;
#(
  parameter int unsigned NBANK = 8,
  parameter int unsigned COL_W = 10
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [4:0]       log2n,
  input  logic             start,
  output logic             busy,
  output logic             rd_en,
  output logic [COL_W-1:0] rd_col,
  input  cplx_t            rd_data [NBANK],
  output logic             out_valid,
  output cplx_t            out_data,
  input  logic             out_ready,
  output logic             done
);
  localparam int unsigned LOG_B = $clog2(NBANK);

  typedef enum logic [1:0] {S_IDLE, S_ISSUE, S_WAIT, S_EMIT} state_e;
  state_e           state;
  logic [COL_W:0]   col;
  logic [LOG_B-1:0] idx;
  cplx_t            hold [NBANK];
  logic [COL_W:0]   ncols;

  assign ncols = (COL_W+1)'((32'd1 << log2n) >> LOG_B);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      col   <= '0;
      idx   <= '0;
      done  <= 1'b0;
      for (int b = 0; b < NBANK; b++) hold[b] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE:  if (start) begin col <= '0; state <= S_ISSUE; end
        S_ISSUE: state <= S_WAIT;
        S_WAIT: begin
          for (int r = 0; r < NBANK; r++)
            hold[r] <= rd_data[(r + popcount(32'(col))) % NBANK];
          idx   <= '0;
          state <= S_EMIT;
        end
        S_EMIT: if (out_ready) begin
          if (idx == LOG_B'(NBANK - 1)) begin
            if (col + 1'b1 == ncols) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              state <= S_ISSUE;
            end
            col <= col + 1'b1;
          end
          idx <= idx + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy      = (state != S_IDLE);
  assign rd_en     = (state == S_ISSUE);
  assign rd_col    = col[COL_W-1:0];
  assign out_valid = (state == S_EMIT);
  assign out_data  = hold[idx];

endmodule
