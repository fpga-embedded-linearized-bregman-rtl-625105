// lbi_shrink: soft-threshold (shrink) function of one lane.
//
// beta = max(|v| - lambda, 0) * sign(v): values inside [-lambda, lambda]
// become 0, the others move towards 0 by lambda. lambda is taken as
// non-negative. With lambda = 0 the function is the identity, which the
// store phase uses to write v back through the same path before writing
// beta. Combinational.
module lbi_shrink
  import lbi_pkg::*;
(
  input  word_t v,
  input  word_t lambda,
  output word_t beta
);

  always_comb begin
    if (v > lambda)        beta = v - lambda;
    else if (v < -lambda)  beta = v + lambda;
    else                   beta = '0;
  end

endmodule
