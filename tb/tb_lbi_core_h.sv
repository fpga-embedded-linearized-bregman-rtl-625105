// tb_lbi_core_h: test harness around one lbi_core instance.
//
// run_case loads a generated piecewise-constant noisy profile y (v and beta
// start at 0) through the host port, runs L iterations, counts the busy
// cycles, and compares them with the cycle formula and with an expected
// count (when non-zero). It then reads back every beta and v word and
// compares it with a bit-true software run of the algorithm using
// tb_lbi_ref_pkg. It also counts how often each mechanism of the core
// fired: k wrap-around at N, advance of t_hat to a new parallel row, masked
// PAT inputs, masked store writes, CORDIC pre-fill pushes, and non-zero and
// zero beta results.
module tb_lbi_core_h
  import lbi_pkg::*;
  import tb_lbi_ref_pkg::*;
#(
  parameter int unsigned M     = 4,
  parameter int unsigned DEPTH = 1024
) (
  input logic clk
);

  localparam int unsigned SLICE = DEPTH / 3;
  localparam int unsigned AW    = $clog2(DEPTH);
  localparam int unsigned NW    = $clog2(M * SLICE + 1);
  localparam int unsigned LW    = $clog2(M);

  logic          rst = 1'b1, start = 1'b0, busy, done, host_we = 1'b0;
  logic [NW-1:0] n_len = '0, k_cur;
  logic [31:0]   l_iters = '0, iter_cnt;
  word_t         lambda = '0, host_wdata = '0, host_rdata;
  logic [LW-1:0] host_lane = '0;
  logic [AW-1:0] host_addr = '0;

  lbi_core #(.M(M), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  longint busy_cycles = 0;
  int n_wrap = 0, n_rowadv = 0, n_patmask = 0, n_stmask = 0, n_prefill = 0;
  int n_nonzero = 0, n_zero = 0, n_done = 0;

  always @(posedge clk) begin
    if (busy) busy_cycles <= busy_cycles + 1;
    if (dut.new_iter && dut.k_wrap) n_wrap++;
    if (dut.new_iter && !dut.k_wrap && dut.k != '0 && dut.lane == LW'(M - 1)) n_rowadv++;
    if (dut.pat_valid && dut.pat_sel != '1) n_patmask++;
    if (dut.st_a_we && dut.we_mask != '1) n_stmask++;
    if (dut.cordic_adv && !dut.new_iter) n_prefill++;
    if (done) n_done++;
  end

  task automatic host_write(int lane, int addr, longint val);
    @(negedge clk);
    host_we = 1'b1; host_lane = LW'(lane); host_addr = AW'(addr); host_wdata = word_t'(val);
    @(negedge clk);
    host_we = 1'b0;
  endtask

  task automatic host_read(int lane, int addr, output longint val);
    @(negedge clk);
    host_lane = LW'(lane); host_addr = AW'(addr);
    @(negedge clk);
    val = longint'(host_rdata);
  endtask

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL M=%0d: %s", M, what);
    end
  endtask

  task automatic run_case(int n, int l, longint lam, longint exp_c, int seed);
    longint y[], v[], b[];
    longint s, e, d, got, lev, c_formula;
    int nbr;
    y = new[n + 1]; v = new[n + 1]; b = new[n + 1];
    void'($urandom(seed));
    // piecewise-constant profile with a few level shifts plus small noise,
    // kept within |y| < 1 (16 fraction bits)
    lev = 0;
    nbr = 0;
    for (int j = 1; j <= n; j++) begin
      if (j == 1 || ($urandom % (n / 3 + 1)) == 0) begin
        lev = longint'($urandom % 40000) - 20000;
        nbr++;
      end
      y[j] = lev + longint'($urandom % 2001) - 1000;
      v[j] = 0;
      b[j] = 0;
    end
    rst = 1'b0;
    for (int j = 1; j <= n; j++) begin
      host_write((j - 1) % M, 2 * SLICE + (j - 1) / M, y[j]);
      host_write((j - 1) % M, SLICE + (j - 1) / M, 0);
      host_write((j - 1) % M, (j - 1) / M, 0);
    end
    // reference run
    for (int i = 1; i <= l; i++) begin
      int k;
      k = ((i - 1) % n) + 1;
      s = 0;
      for (int j = 1; j <= k; j++) s += b[j];
      e = w20(y[k] - s);
      d = mul_ref(e, mu_ref(k));
      for (int j = 1; j <= k; j++) begin
        v[j] = w20(v[j] + d);
        b[j] = shr_ref(v[j], lam);
      end
    end
    // hardware run
    @(negedge clk);
    n_len = NW'(n); l_iters = 32'(l); lambda = word_t'(lam);
    busy_cycles = 0;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (busy) @(negedge clk);
    c_formula = cycles_ref(n, l, M);
    check(busy_cycles == c_formula,
          $sformatf("N=%0d L=%0d cycles %0d, formula %0d", n, l, busy_cycles, c_formula));
    if (exp_c != 0)
      check(busy_cycles == exp_c,
            $sformatf("N=%0d L=%0d cycles %0d, expected %0d", n, l, busy_cycles, exp_c));
    check(iter_cnt == 32'(l), $sformatf("iteration count %0d != %0d", iter_cnt, l));
    for (int j = 1; j <= n; j++) begin
      host_read((j - 1) % M, (j - 1) / M, got);
      check(got == b[j], $sformatf("N=%0d L=%0d beta[%0d] = %0d, expected %0d", n, l, j, got, b[j]));
      if (b[j] != 0) n_nonzero++; else n_zero++;
      host_read((j - 1) % M, SLICE + (j - 1) / M, got);
      check(got == v[j], $sformatf("N=%0d L=%0d v[%0d] = %0d, expected %0d", n, l, j, got, v[j]));
    end
    $display("M=%0d N=%0d L=%0d: %0d cycles (formula %0d), %0d non-zero beta", M, n, l,
             busy_cycles, c_formula, n_nonzero);
  endtask

endmodule
