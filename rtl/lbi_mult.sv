// lbi_mult: registered multiplier d = e * mu_k.
//
// e is a signed data word (16 fraction bits), mu_k an unsigned word with
// 19 fraction bits. The full product is rounded to nearest (ties towards
// +infinity) back to 16 fraction bits and saturated to the 20-bit range.
// The result is registered when en is high: one cycle of latency.
module lbi_mult
  import lbi_pkg::*;
(
  input  logic  clk,
  input  logic  en,
  input  word_t e,
  input  mu_t   mu,
  output word_t d
);

  localparam int unsigned PW = DATA_W + MU_W + 1;

  logic signed [PW-1:0] prod, rounded;
  word_t                d_next;

  localparam logic signed [PW-1:0] DMAX = PW'(2**(DATA_W-1) - 1);
  localparam logic signed [PW-1:0] DMIN = -PW'(2**(DATA_W-1));

  always_comb begin
    prod    = PW'(e) * $signed({1'b0, mu});
    rounded = (prod + (PW'(1) <<< (MU_FRAC - 1))) >>> MU_FRAC;
    if (rounded > DMAX)      d_next = word_t'(DMAX);
    else if (rounded < DMIN) d_next = word_t'(DMIN);
    else                     d_next = rounded[DATA_W-1:0];
  end

  always_ff @(posedge clk) begin
    if (en) d <= d_next;
  end

endmodule
