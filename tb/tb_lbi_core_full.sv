// tb_lbi_core_full: the LBI core at its default size, 1024 BRAM lanes of
// 1024 words, run end to end on the three parameter sets of the core's
// validation table that use 1024 lanes: N=5000/L=5000 (124301 cycles),
// N=10000/L=10000 (321781 cycles) and N=15000/L=15000 (592461 cycles),
// plus N=2100/L=2500 so that k wraps back to 1. Loads generated profiles
// through the host port, checks the cycle counts against the published
// numbers and the cycle formula, and every beta and v word against a
// bit-true software model.
module tb_lbi_core_full
  import lbi_pkg::*;
  import tb_lbi_ref_pkg::*;
;
  localparam int unsigned M     = 1024;
  localparam int unsigned DEPTH = 1024;

  logic clk = 1'b0;
  always #5 clk = ~clk;

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

  lbi_core dut (.*);

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


  initial begin
    #40000000;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    repeat (4) @(negedge clk);
    run_case(5000, 5000, 600, 124301, 11);
    run_case(10000, 10000, 600, 321781, 12);
    run_case(15000, 15000, 600, 592461, 14);
    run_case(2100, 2500, 600, 0, 13);
    check(n_wrap > 0,    "k wrap-around never happened");
    check(n_rowadv > 0,  "t_hat never advanced");
    check(n_patmask > 0, "PAT input masking never happened");
    check(n_stmask > 0,  "store masking never happened");
    check(n_prefill > 0, "CORDIC never pre-filled");
    check(n_nonzero > 0 && n_zero > 0, "shrink outputs not both zero and non-zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
