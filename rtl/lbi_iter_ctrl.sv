// lbi_iter_ctrl: iteration control of the LBI core (read phase).
//
// Keeps the cyclic iteration index k (1..N), the column of y_k in its
// parallel row, lane = (k-1) mod M, the index t_hat = (k-1) div M of the
// last parallel row that contributes to the beta sum, and a unary
// (thermometer) code with lane+1 ones that marks the contributing columns
// of that last row. At each new_iter pulse k advances; when the code is
// full (M ones) it restarts at a single one and t_hat increments, and when
// k reaches N all of them reload (k = 1, t_hat = 0). The unary code is a
// shift register that takes in a '1' per iteration.
//
// Read phase, counted from the cycle after new_iter (r = 0, 1, ...):
//   r = 0..t_hat      port A reads beta row r (address BETA_AP + r); port B
//                     reads the y row t_hat (address Y_AP + t_hat)
//   r + 1             the row is on the BRAM outputs; pat_sel/pat_valid/
//                     pat_first are registered here to line up with it;
//                     columns beyond lane are masked in row t_hat only
//   r + 1 + D         the PAT (and the PMT for y_k) deliver the row result
//   t_hat + D + 2     the accumulated error is final; mul_en and read_done
// so the phase lasts (t_hat + 1) + D + 2 cycles, D = ceil(log2 M).
module lbi_iter_ctrl #(
  parameter int unsigned M       = 1024,
  parameter int unsigned AW      = 10,
  parameter int unsigned NW      = 19,
  parameter int unsigned BETA_AP = 0,
  parameter int unsigned Y_AP    = 682,
  parameter int unsigned D       = (M > 1) ? $clog2(M) : 1,
  parameter int unsigned LW      = (M > 1) ? $clog2(M) : 1
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          init,       // master reset of the counters before a run
  input  logic          new_iter,   // one-cycle pulse: start the next iteration
  input  logic [NW-1:0] n_len,      // signal length N
  output logic [NW-1:0] k,
  output logic [LW-1:0] lane,
  output logic [AW-1:0] t_hat,
  output logic [M-1:0]  unary,
  output logic          k_wrap,     // k == N: next iteration restarts at k = 1
  output logic          rd_active,
  output logic [AW-1:0] a_addr,
  output logic [AW-1:0] b_addr,
  output logic [M-1:0]  pat_sel,
  output logic          pat_valid,
  output logic          pat_first,
  output logic [LW-1:0] pmt_sel,
  output logic          mul_en,
  output logic          read_done
);

  localparam int unsigned RW = AW + 7;

  logic [RW-1:0] r;
  logic [AW-1:0] t;
  logic          row_phase;   // a beta row is being addressed in this cycle

  always_comb k_wrap = (k == n_len);

  // counters of Fig. "iteration control": k, unary code, t_hat
  always_ff @(posedge clk) begin
    if (rst || init) begin
      k     <= '0;
      lane  <= '0;
      t_hat <= '0;
      unary <= '0;
    end else if (new_iter) begin
      if (k_wrap || k == '0) begin
        k     <= NW'(1);
        lane  <= '0;
        t_hat <= '0;
        unary <= M'(1);
      end else if (lane == LW'(M - 1)) begin
        k     <= k + 1'b1;
        lane  <= '0;
        t_hat <= t_hat + 1'b1;
        unary <= M'(1);
      end else begin
        k     <= k + 1'b1;
        lane  <= lane + 1'b1;
        unary <= {unary[M-2:0], 1'b1};
      end
    end
  end

  // read-phase cycle counter
  always_ff @(posedge clk) begin
    if (rst || init) begin
      rd_active <= 1'b0;
      r         <= '0;
    end else if (new_iter) begin
      rd_active <= 1'b1;
      r         <= '0;
    end else if (rd_active) begin
      r <= r + 1'b1;
      if (read_done) rd_active <= 1'b0;
    end
  end

  always_comb begin
    row_phase = rd_active && (r <= RW'(t_hat));
    t         = r[AW-1:0];
    // offset pointer plus parallel-row pointer
    a_addr    = AW'(BETA_AP) + t;
    b_addr    = AW'(Y_AP) + t_hat;
    read_done = rd_active && (r == RW'(t_hat) + RW'(D) + RW'(2));
    mul_en    = read_done;
  end

  // selection of the PAT input multiplexers, aligned with the BRAM output
  always_ff @(posedge clk) begin
    if (rst || init) begin
      pat_valid <= 1'b0;
      pat_first <= 1'b0;
      pat_sel   <= '0;
    end else begin
      pat_valid <= row_phase;
      pat_first <= row_phase && (r == '0);
      pat_sel   <= (t == t_hat) ? unary : '1;
    end
  end

  always_comb pmt_sel = lane;

  a_unary_thermometer: assert property (@(posedge clk) disable iff (rst)
      (k != '0) |-> (unary == M'((({{M{1'b0}}, 1'b1} << (lane + 1)) - 1))))
    else $error("lbi_iter_ctrl: unary code does not match lane");

endmodule
