// Post-processing processor (PostP): shortcut addition followed by layer
// normalisation over one vector of N = 2^log2n elements.
//
// Follows the published design: PostP holds adders for the shortcut
// connection and the logic for layer normalisation, with the shortcut
// operand read from the shortcut buffer. The following are this
// implementation's own choices: Q8.8 fixed point instead of fp16; one
// element per cycle; mean and variance from running sums divided by the
// power-of-two length with shifts; a 16-step bit-serial square root and a
// single divider for 1/std; an affine scale/offset (gamma, beta) table
// loaded through a write port.
//
// Protocol: elements stream in on x_valid/x_data with index x_idx; the
// shortcut element for the same index is read from `sc_rdata` one cycle
// after `sc_re` (the block drives sc_raddr = x_idx). After the last
// element the block normalises the stored vector and streams it out on
// y_valid/y_data. It accepts a new vector only after the previous output
// finishes (x_ready).
module postp
  import abf_pkg::*;
#(
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [4:0]    log2n,
  input  logic          g_we,
  input  logic [AW-1:0] g_addr,
  input  real_t         g_gamma,
  input  real_t         g_beta,
  input  logic          x_valid,
  output logic          x_ready,
  input  real_t         x_data,
  output logic          sc_re,
  output logic [AW-1:0] sc_raddr,
  input  real_t         sc_rdata,
  output logic          y_valid,
  output real_t         y_data,
  output logic          busy
);
  typedef enum logic [2:0] {S_IN, S_DRAIN, S_SQRT, S_DIV, S_OUT} state_e;
  state_e st;

  real_t ybuf  [DEPTH];
  real_t gamma [DEPTH];
  real_t beta  [DEPTH];

  always_ff @(posedge clk) if (g_we) begin gamma[g_addr] <= g_gamma; beta[g_addr] <= g_beta; end

  logic [AW:0]        cnt_in, cnt_out;
  logic               v1;
  logic [AW-1:0]      a1;
  real_t              x1;
  logic signed [31:0] sum;
  logic signed [47:0] sumsq;
  real_t              mean;
  logic [31:0]        var_q;      // Q16.16, non-negative
  logic [31:0]        rem;
  logic [15:0]        root;       // Q8.8 standard deviation
  logic [4:0]         sq_i;
  real_t              inv_std;    // Q8.8

  wire [AW:0] n_elem = (AW+1)'(1) << log2n;

  assign x_ready  = (st == S_IN);
  assign sc_re    = x_valid && x_ready;
  assign sc_raddr = cnt_in[AW-1:0];
  assign busy     = (st != S_IN) || (cnt_in != 0) || v1;

  // shortcut addition
  real_t ysum;
  assign ysum = x1 + sc_rdata;

  // statistics from the running sums (combinational, used in S_DRAIN)
  logic signed [31:0] mean_w;
  logic signed [47:0] ex2_w, var_w;
  always_comb begin
    mean_w = sum >>> log2n;
    ex2_w  = sumsq >>> log2n;
    var_w  = ex2_w - 48'(mean_w * mean_w) + 48'sd1;   // + epsilon (one LSB)
  end

  // bit-serial square-root step of a Q16.16 value: 16 result bits
  logic [33:0] trial;
  assign trial = {rem, var_q[31:30]} - {16'b0, root, 2'b01};

  // normalise, scale and offset one element
  logic [AW-1:0] oa;
  real_t         od;
  logic signed [31:0] centred, normed, scaled;
  assign oa = cnt_out[AW-1:0];
  always_comb begin
    centred = 32'(ybuf[oa]) - 32'(mean);
    normed  = (centred * 32'(inv_std)) >>> FRAC_W;
    scaled  = (normed * 32'(gamma[oa])) >>> FRAC_W;
    od      = real_t'(scaled) + beta[oa];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IN; cnt_in <= '0; cnt_out <= '0; v1 <= 1'b0; a1 <= '0; x1 <= '0;
      sum <= '0; sumsq <= '0; mean <= '0; var_q <= '0; rem <= '0; root <= '0;
      sq_i <= '0; inv_std <= '0; y_valid <= 1'b0; y_data <= '0;
    end else begin
      y_valid <= 1'b0;
      v1 <= sc_re;
      a1 <= cnt_in[AW-1:0];
      x1 <= x_data;
      if (sc_re) cnt_in <= cnt_in + 1'b1;
      if (v1) begin
        ybuf[a1] <= ysum;
        sum   <= sum + 32'(ysum);
        sumsq <= sumsq + 48'(32'(ysum) * 32'(ysum));
      end
      case (st)
        S_IN: if (sc_re && cnt_in == n_elem - 1'b1) st <= S_DRAIN;
        S_DRAIN: if (!v1) begin
          mean  <= real_t'(mean_w);
          var_q <= var_w < 0 ? 32'd1 : (var_w > 48'hffff_ffff ? 32'hffff_ffff : var_w[31:0]);
          rem <= '0; root <= '0; sq_i <= '0;
          st <= S_SQRT;
        end
        S_SQRT: begin
          if (!trial[33]) begin rem <= trial[31:0]; root <= {root[14:0], 1'b1}; end
          else begin rem <= {rem[29:0], var_q[31:30]}; root <= {root[14:0], 1'b0}; end
          var_q <= {var_q[29:0], 2'b00};
          sq_i <= sq_i + 1'b1;
          if (sq_i == 5'd15) st <= S_DIV;
        end
        S_DIV: begin
          inv_std <= (root == 0) ? real_t'(16'sh7fff)
                   : (32'h0001_0000 / {16'b0, root} > 32'h7fff ? real_t'(16'sh7fff)
                                                               : real_t'(32'h0001_0000 / {16'b0, root}));
          cnt_out <= '0;
          st <= S_OUT;
        end
        S_OUT: begin
          y_valid <= 1'b1;
          y_data  <= od;
          cnt_out <= cnt_out + 1'b1;
          if (cnt_out == n_elem - 1'b1) begin
            st <= S_IN; cnt_in <= '0; sum <= '0; sumsq <= '0;
          end
        end
        default: st <= S_IN;
      endcase
    end
  end

endmodule
