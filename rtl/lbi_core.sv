// lbi_core: FPGA-style linearized Bregman iteration (LBI) core for trend
// break detection.
//
// Solves min lambda*|beta|_1 + 0.5*|beta|_2^2 s.t. A*beta = y, A lower
// triangular of ones, by L iterations of
//   k = ((i-1) mod N) + 1,  e = y_k - sum_{s<=k} beta_s,  d = e / k,
//   v_j += d and beta_j = shrink(v_j, lambda) for j = 1..k.
// The vectors are spread over M dual-port BRAM lanes: entry j (1-based)
// lives in lane (j-1) mod M, parallel row (j-1) div M. Each BRAM is split
// into three slices of DEPTH/3 words: beta at BETA_AP = 0, v at V_AP and y
// at Y_AP. A pipelined adder tree (PAT) sums one parallel row per cycle, a
// pipelined multiplexer tree (PMT) picks y_k, an accumulating subtractor
// forms e, a multiplier forms d with mu_k = 1/k from a pipelined CORDIC,
// and the lanes update v and beta two cycles per row.
//
// Interface: load y (and v, beta start values, normally 0) through the
// host port while busy is low: host_we writes host_wdata to word host_addr
// of lane host_lane; host_rdata returns the word addressed in the previous
// cycle. Set n_len (N), l_iters (L) and lambda and pulse start. busy stays
// high for C = 21 + sum_i (3*ceil(k_i/M) + ceil(log2 M) + 6) cycles and
// done pulses in the last of them. N may be at most M * (DEPTH/3).
module lbi_core
  import lbi_pkg::*;
#(
  parameter int unsigned M      = 1024,
  parameter int unsigned DEPTH  = 1024,
  parameter int unsigned STAGES = 20,
  // derived
  parameter int unsigned AW      = $clog2(DEPTH),
  parameter int unsigned SLICE   = DEPTH / 3,
  parameter int unsigned BETA_AP = 0,
  parameter int unsigned V_AP    = SLICE,
  parameter int unsigned Y_AP    = 2 * SLICE,
  parameter int unsigned NW      = $clog2(M * SLICE + 1),
  parameter int unsigned D       = $clog2(M),
  parameter int unsigned LW      = $clog2(M)
) (
  input  logic          clk,
  input  logic          rst,
  // run control
  input  logic          start,
  input  logic [NW-1:0] n_len,
  input  logic [31:0]   l_iters,
  input  word_t         lambda,
  output logic          busy,
  output logic          done,
  output logic [31:0]   iter_cnt,   // iterations started in this run
  output logic [NW-1:0] k_cur,      // cyclic index k of the current iteration
  // host access to the BRAMs (ignored while busy)
  input  logic          host_we,
  input  logic [LW-1:0] host_lane,
  input  logic [AW-1:0] host_addr,
  input  word_t         host_wdata,
  output word_t         host_rdata
);

  // ---------------------------------------------------------------- control
  logic          init, new_iter, store_start, cordic_adv, mc_done;
  logic [NW-1:0] cordic_k;

  logic [NW-1:0] k;
  logic [LW-1:0] lane, pmt_sel;
  logic [AW-1:0] t_hat, it_a_addr, it_b_addr;
  logic [M-1:0]  unary, pat_sel;
  logic          k_wrap, rd_active, pat_valid, pat_first, mul_en, read_done;

  logic          st_active, st_a_we, lam_on, store_done;
  logic [AW-1:0] st_a_addr, st_b_addr;
  logic [M-1:0]  we_mask;

  lbi_main_ctrl #(.STAGES(STAGES), .NW(NW)) u_main (
    .clk, .rst, .start, .n_len, .l_iters,
    .read_done, .store_done,
    .init, .new_iter, .store_start, .cordic_adv, .cordic_k, .iter_cnt,
    .busy, .done (mc_done)
  );
  assign done  = mc_done;
  assign k_cur = k;

  lbi_iter_ctrl #(
    .M(M), .AW(AW), .NW(NW), .BETA_AP(BETA_AP), .Y_AP(Y_AP), .D(D), .LW(LW)
  ) u_iter (
    .clk, .rst, .init, .new_iter, .n_len,
    .k, .lane, .t_hat, .unary, .k_wrap, .rd_active,
    .a_addr (it_a_addr), .b_addr (it_b_addr),
    .pat_sel, .pat_valid, .pat_first, .pmt_sel, .mul_en, .read_done
  );

  lbi_store_ctrl #(.M(M), .AW(AW), .BETA_AP(BETA_AP), .V_AP(V_AP)) u_store (
    .clk, .rst, .start (store_start), .t_hat, .unary,
    .active (st_active), .b_addr (st_b_addr), .a_addr (st_a_addr),
    .a_we (st_a_we), .we_mask, .lam_on, .done (store_done)
  );

  // ------------------------------------------------------------ BRAM lanes
  logic [AW-1:0] a_addr, b_addr;
  word_t         pat_in [M];
  word_t         b_row  [M];
  word_t         d, e, y_k, row_sum, lambda_eff;
  mu_t           mu;
  logic          sum_valid, sum_first;
  logic [LW-1:0] host_lane_q;

  always_comb begin
    a_addr     = st_active ? st_a_addr : it_a_addr;
    b_addr     = st_active ? st_b_addr : (busy ? it_b_addr : host_addr);
    lambda_eff = lam_on ? lambda : word_t'(0);
  end

  for (genvar m = 0; m < M; m++) begin : g_lane
    lbi_slice #(.DEPTH(DEPTH), .AW(AW)) u_slice (
      .clk,
      .a_addr,
      .a_we       (st_a_we && we_mask[m]),
      .b_addr,
      .b_we       (host_we && !busy && host_lane == LW'(m)),
      .b_wdata    (host_wdata),
      .pat_sel    (pat_sel[m]),
      .d,
      .lambda_eff,
      .pat_out    (pat_in[m]),
      .b_rdata    (b_row[m])
    );
  end

  always_ff @(posedge clk) host_lane_q <= host_lane;
  assign host_rdata = b_row[host_lane_q];

  // -------------------------------------------------------- shared datapath
  lbi_pat #(.M(M), .D(D)) u_pat (
    .clk, .rst, .in_valid (pat_valid), .in_first (pat_first), .in_data (pat_in),
    .out_valid (sum_valid), .out_first (sum_first), .out_sum (row_sum)
  );

  lbi_pmt #(.M(M), .D(D)) u_pmt (
    .clk, .in_data (b_row), .in_sel (pmt_sel), .out_data (y_k)
  );

  lbi_err_sub u_err (
    .clk, .valid (sum_valid), .first (sum_first), .y_in (y_k), .sum_in (row_sum), .e
  );

  lbi_cordic_recip #(.STAGES(STAGES), .KW(NW)) u_cordic (
    .clk, .adv (cordic_adv), .k_in (cordic_k), .mu
  );

  lbi_mult u_mult (.clk, .en (mul_en), .e, .mu, .d);

  a_n_fits: assert property (@(posedge clk) disable iff (rst)
      start |-> (n_len >= NW'(1) && n_len <= NW'(M * SLICE)))
    else $error("lbi_core: N = %0d outside 1..%0d", n_len, M * SLICE);

endmodule
