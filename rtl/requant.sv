// requant: requantizes a 32-bit accumulator value to INT8.
//
// Computes q = clamp(round(x * mult / 2^shift) + zero_point, -128, 127) with
// a signed 64-bit product and round-half-up, using precomputed per-layer
// constants (a fixed-point scale and an activation zero point). The design
// requantizes with precomputed scales and zero points after max pooling; the
// fixed-point form of the scale (integer multiplier plus right shift) and the
// rounding rule are this implementation's choices. Combinational.
module requant
  import armor_pkg::*;
(
  input  acc_t   x,
  input  quant_t q,
  output act_t   y
);
  logic signed [63:0] prod, rnd, shifted, biased;

  always_comb begin
    prod    = 64'(x) * $signed({32'd0, q.mult});
    rnd     = (q.shift == '0) ? 64'sd0 : (64'sd1 <<< (q.shift - 1'b1));
    shifted = (prod + rnd) >>> q.shift;
    biased  = shifted + 64'(q.zero_point);
    if (biased > 64'sd127)       y = 8'sd127;
    else if (biased < -64'sd128) y = -8'sd128;
    else                         y = act_t'(biased);
  end
endmodule
