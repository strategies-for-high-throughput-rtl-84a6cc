// lnpu: one lane of the local node-processing pass.
//
// For each block of a layer it takes the lane's saved q value and the layer's global
// results (first minimum f, second minimum s, sign product) and computes
//   min   = s if |q| == f, else f           (minimum over the other edges)
//   sign  = sign product XOR sign(q)        (sign product over the other edges)
//   r     = sign * floor(0.75 * min)        (scaled min-sum, a = 0.75)
//   p     = sat(q + r)                      (new APP value)
// The selection rule, the scaling factor and the update equations are the paper's; the
// rounding of 0.75 * min as (3 * min) >> 2 and the saturation to +-511 are this design's.
// Purely combinational.
module lnpu
  import ldpc_pkg::*;
(
  input  llr_t q,
  input  mag_t min1,
  input  mag_t min2,
  input  logic sgn,
  output llr_t r_new,
  output llr_t p_new
);

  mag_t mag, mn;
  logic [W:0] scaled;
  logic neg;

  always_comb begin
    mag    = q[W-1] ? mag_t'(-q) : mag_t'(q);
    mn     = (mag != min1) ? min1 : min2;
    scaled = ((W+1)'(mn) * 3) >> 2;
    neg    = sgn ^ q[W-1];
    r_new  = neg ? -llr_t'(scaled) : llr_t'(scaled);
    p_new  = sat((W+1)'(q) + (W+1)'(r_new));
  end

endmodule
