// lbi_err_sub: error subtractor e = y_k - sum(beta_1..beta_k).
//
// A 20-bit adder with its second operand inverted and carry-in 1, i.e. a
// two's-complement subtractor. The beta sum arrives from the adder tree
// one parallel row per cycle; on the first row the minuend is y_k from the
// multiplexer tree, on later rows it is the running result, so the
// register accumulates y_k - sum over all rows. The result is valid one
// cycle after the last row sum.
module lbi_err_sub
  import lbi_pkg::*;
(
  input  logic  clk,
  input  logic  valid,   // sum_in holds a row sum
  input  logic  first,   // first row of the iteration: start from y_in
  input  word_t y_in,
  input  word_t sum_in,
  output word_t e
);

  word_t minuend;
  always_comb minuend = first ? y_in : e;

  always_ff @(posedge clk) begin
    if (valid) e <= minuend + ~sum_in + word_t'(1);
  end

endmodule
