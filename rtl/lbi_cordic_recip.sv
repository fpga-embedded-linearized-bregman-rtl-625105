// lbi_cordic_recip: pipelined CORDIC divider producing mu_k = 1/k.
//
// Linear-mode (non-restoring) CORDIC: stage i compares the sign of the
// residual r, subtracts or adds k * 2^-i to it and adds or subtracts 2^-i
// to the quotient z, starting from r = 1, z = 0. After STAGES stages z
// approximates 1/k within 2^-(STAGES-1), i.e. one LSB of the 19-fraction-bit
// output. The pipeline moves only when adv is high: the controller pushes
// STAGES-1 values of k before the first iteration and one more at each new
// iteration, so the output always holds mu for the current k while the
// inputs run STAGES-1 iterations ahead. Each stage keeps its k, so the
// pipeline holds STAGES different divisions at once.
module lbi_cordic_recip
  import lbi_pkg::*;
#(
  parameter int unsigned STAGES = 20,
  parameter int unsigned KW     = 19    // width of k
) (
  input  logic          clk,
  input  logic          adv,
  input  logic [KW-1:0] k_in,
  output mu_t           mu
);

  // residual scaled by 2^(STAGES-1): integer arithmetic, exact
  localparam int unsigned RW = KW + STAGES + 1;
  localparam int unsigned ZW = STAGES + 2;   // quotient, STAGES-1 fraction bits

  typedef logic signed [RW-1:0] res_t;
  typedef logic signed [ZW-1:0] quo_t;

  res_t          r [STAGES+1];
  quo_t          z [STAGES+1];
  logic [KW-1:0] k [STAGES+1];

  always_comb begin
    r[0] = res_t'(1) <<< (STAGES - 1);
    z[0] = '0;
    k[0] = k_in;
  end

  for (genvar i = 0; i < STAGES; i++) begin : g_stage
    res_t step;
    always_comb step = res_t'({1'b0, k[i]}) <<< (STAGES - 1 - i);
    always_ff @(posedge clk) begin
      if (adv) begin
        if (!r[i][RW-1]) begin
          r[i+1] <= r[i] - step;
          z[i+1] <= z[i] + (quo_t'(1) <<< (STAGES - 1 - i));
        end else begin
          r[i+1] <= r[i] + step;
          z[i+1] <= z[i] - (quo_t'(1) <<< (STAGES - 1 - i));
        end
        k[i+1] <= k[i];
      end
    end
  end

  // z is in (0, 2) for k >= 1; align to MU_FRAC fraction bits
  always_comb begin
    if (STAGES - 1 >= MU_FRAC) mu = mu_t'(z[STAGES] >>> (STAGES - 1 - MU_FRAC));
    else                       mu = mu_t'(z[STAGES] <<< (MU_FRAC - (STAGES - 1)));
  end

endmodule
