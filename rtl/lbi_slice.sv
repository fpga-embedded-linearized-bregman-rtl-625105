// lbi_slice: one BRAM slice (lane m) of the LBI core.
//
// Holds the dual-port BRAM of the lane and the per-lane datapath around it:
// the PAT input multiplexer on the port-A output (beta towards the adder
// tree), the v + d adder and the shrink on the port-B output (v), and a
// register that holds the shrink result until it is written back through
// port A. The shrink threshold lambda_eff is 0 in the cycle that produces
// the new v and lambda in the cycle that produces the new beta, so one
// shrink unit serves both writes. Port B also serves host loading and
// reading while the core is idle. The port-B output is brought out for the
// multiplexer tree that picks y_k and for host reads.
module lbi_slice
  import lbi_pkg::*;
#(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic [AW-1:0] a_addr,
  input  logic          a_we,
  input  logic [AW-1:0] b_addr,
  input  logic          b_we,
  input  word_t         b_wdata,
  input  logic          pat_sel,
  input  word_t         d,
  input  word_t         lambda_eff,
  output word_t         pat_out,
  output word_t         b_rdata
);

  word_t a_rdata, v_sum, shrunk, wb_q;

  lbi_bram #(.DEPTH(DEPTH), .AW(AW)) u_bram (
    .clk     (clk),
    .a_addr  (a_addr),
    .a_we    (a_we),
    .a_wdata (wb_q),
    .a_rdata (a_rdata),
    .b_addr  (b_addr),
    .b_we    (b_we),
    .b_wdata (b_wdata),
    .b_rdata (b_rdata)
  );

  lbi_pat_mux u_mux (.sel(pat_sel), .din(a_rdata), .dout(pat_out));

  lbi_v_add u_vadd (.v(b_rdata), .d(d), .sum(v_sum));

  lbi_shrink u_shrink (.v(v_sum), .lambda(lambda_eff), .beta(shrunk));

  always_ff @(posedge clk) wb_q <= shrunk;

endmodule
