// lbi_store_ctrl: writing unit of the LBI core (store phase).
//
// After the read phase has produced d, this unit takes over the BRAM
// addresses and updates v and beta for parallel rows 0..t_hat, two cycles
// per row, counted from the cycle after start (s = 0, 1, ...):
//   s = 2t, 2t+1   port B reads v row t (address V_AP + t) in both cycles
//   s = 2t+1       the lane computes v + d, shrink with lambda = 0 (identity),
//                  and registers the new v
//   s = 2t+2       port A writes the new v to V_AP + t; the shrink now uses
//                  lambda on the same v + d and registers beta
//   s = 2t+3       port A writes beta to BETA_AP + t
// Rows overlap, so the last write is at s = 2(t_hat+1)+1 and the phase lasts
// 2(t_hat+1) + 2 cycles; done is high in its last cycle. In row t_hat only
// the columns marked by the unary code are written (columns j <= k).
module lbi_store_ctrl #(
  parameter int unsigned M       = 1024,
  parameter int unsigned AW      = 10,
  parameter int unsigned BETA_AP = 0,
  parameter int unsigned V_AP    = 341
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          start,      // one-cycle pulse from the main control
  input  logic [AW-1:0] t_hat,
  input  logic [M-1:0]  unary,
  output logic          active,
  output logic [AW-1:0] b_addr,
  output logic [AW-1:0] a_addr,
  output logic          a_we,
  output logic [M-1:0]  we_mask,
  output logic          lam_on,     // shrink uses lambda (else 0)
  output logic          done
);

  localparam int unsigned SW = AW + 3;

  logic [SW-1:0] s;
  logic [AW-1:0] wr_row;

  always_ff @(posedge clk) begin
    if (rst) begin
      active <= 1'b0;
      s      <= '0;
    end else if (start) begin
      active <= 1'b1;
      s      <= '0;
    end else if (active) begin
      s <= s + 1'b1;
      if (done) active <= 1'b0;
    end
  end

  always_comb begin
    b_addr  = AW'(V_AP) + AW'(s >> 1);
    wr_row  = AW'((s - SW'(2)) >> 1);
    a_we    = active && (s >= SW'(2));
    a_addr  = (s[0] ? AW'(BETA_AP) : AW'(V_AP)) + wr_row;
    we_mask = (wr_row == t_hat) ? unary : '1;
    lam_on  = active && !s[0] && (s >= SW'(2));
    done    = active && (s == (SW'(t_hat) << 1) + SW'(3));
  end

endmodule
