// lbi_v_add: the per-lane 20-bit adder computing v + d.
//
// d = (y_k - sum beta) * mu_k is broadcast to every lane; each lane adds it
// to the v word it reads from port B. The sum wraps in 20 bits like a plain
// full adder; the data scaling keeps v inside the range. Combinational.
module lbi_v_add
  import lbi_pkg::*;
(
  input  word_t v,
  input  word_t d,
  output word_t sum
);

  always_comb sum = v + d;

endmodule
