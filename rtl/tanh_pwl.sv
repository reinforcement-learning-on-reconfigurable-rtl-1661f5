// tanh_pwl: piecewise-linear hyperbolic tangent for action squashing.
//
// The stochastic action is squashed into [-1, 1] by tanh before it becomes a
// laser power. tanh is odd, so the unit works on |x| and restores the sign.
// For |x| < 4 it interpolates linearly between 17 knots K[j] = tanh(j/4),
// j = 0..16, each rounded to 14 fraction bits (round(16384 * tanh(j/4)));
// for |x| >= 4 it returns K[16] = tanh(4). The largest error against tanh is
// about 0.006.
//
// Input x: 16-bit signed, 12 fraction bits (range about +-8). Output y:
// 16-bit signed, 14 fraction bits. One pipeline register: y and out_valid
// follow x and in_valid by one cycle.
//
// Approximating tanh piecewise by polynomials follows the published
// controller; the degree (1), the 16 segments and the formats are this
// design's choices.
module tanh_pwl
  import rl_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  fx_t  x,
  output logic out_valid,
  output fx_t  y
);
  localparam int unsigned NSEG = 16;
  localparam logic [14:0] K [NSEG+1] = '{
    15'd0,     15'd4013,  15'd7571,  15'd10406, 15'd12478, 15'd13898,
    15'd14830, 15'd15423, 15'd15795, 15'd16024, 15'd16165, 15'd16251,
    15'd16303, 15'd16335, 15'd16354, 15'd16366, 15'd16373
  };

  logic        neg;
  logic [15:0] ax;       // |x|, 12 fraction bits
  logic [3:0]  seg;      // knot index: |x| in units of 0.25
  logic [9:0]  frac;     // position inside the segment, 10 bits
  logic [14:0] k0, k1, dk;
  logic [24:0] interp;
  logic [14:0] mag;

  always_comb begin
    neg  = x[15];
    ax   = neg ? 16'(-x) : 16'(x);
    seg  = ax[13:10];
    frac = ax[9:0];
    k0   = K[5'(seg)];
    k1   = K[5'(seg) + 5'd1];
    dk   = k1 - k0;
    interp = ({10'd0, k0} << 10) + 25'(dk) * 25'(frac);
    if (ax >= 16'(4 << FX_FRAC)) mag = K[NSEG];
    else                         mag = interp[24:10];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= '0;
    end else begin
      out_valid <= in_valid;
      y         <= neg ? -fx_t'({1'b0, mag}) : fx_t'({1'b0, mag});
    end
  end
endmodule
