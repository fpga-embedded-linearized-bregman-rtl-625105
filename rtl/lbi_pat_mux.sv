// lbi_pat_mux: the PAT input multiplexer of one lane.
//
// Passes the beta word read from port A to the parallel adder tree, or the
// constant 0 when the lane lies beyond column k of the last parallel row.
// Because 0 is the additive identity, masked lanes do not disturb the sum.
// Purely combinational.
module lbi_pat_mux
  import lbi_pkg::*;
(
  input  logic  sel,   // 1: pass din, 0: output the constant 0
  input  word_t din,
  output word_t dout
);

  always_comb dout = sel ? din : word_t'(0);

endmodule
