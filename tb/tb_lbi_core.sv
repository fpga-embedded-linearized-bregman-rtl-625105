// tb_lbi_core: end-to-end test of the LBI core.
//
// Runs the parameter sets (N, number of BRAM lanes M, L) of the core's
// validation table: with M = 4 lanes N=10/L=10, N=10/L=100, N=100/L=100,
// N=100/L=1000, N=1000/L=1000, with M = 128 lanes N=1000/L=1000, and with
// M = 2048 lanes (1024 words each) N=15000/L=15000. Checks each run's cycle
// count against the published counts (155, 1361, 4721, 47021, 384521,
// 26269, 442989) and every beta and v word against a bit-true software
// model. Each mechanism of the core must fire at least once. The M = 2048
// run goes in parallel with the small runs to save simulation time; the
// instances share only the clock.
module tb_lbi_core;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  tb_lbi_core_h #(.M(4),   .DEPTH(1024)) h4   (.clk);
  tb_lbi_core_h #(.M(128), .DEPTH(32))   h128 (.clk);
  tb_lbi_core_h #(.M(2048), .DEPTH(1024)) h2048 (.clk);

  int checks, failures;

  task automatic need(int count, string what);
    checks++;
    if (count == 0) begin
      failures++;
      $display("FAIL: mechanism never exercised: %s", what);
    end
  endtask

  initial begin
    #100000000;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", h4.checks + h128.checks + h2048.checks,
             h4.failures + h128.failures + h2048.failures + 1);
    $finish;
  end

  initial begin
    repeat (4) @(negedge clk);
    fork
      begin
        h4.run_case(10, 10, 600, 155, 1);
        h4.run_case(10, 100, 600, 1361, 2);
        h4.run_case(100, 100, 600, 4721, 3);
        h4.run_case(100, 1000, 600, 47021, 4);
        h4.run_case(1000, 1000, 600, 384521, 5);
        h128.run_case(1000, 1000, 600, 26269, 6);
      end
      h2048.run_case(15000, 15000, 600, 442989, 7);
    join
    checks   = h4.checks + h128.checks + h2048.checks;
    failures = h4.failures + h128.failures + h2048.failures;
    need(h4.n_wrap,                 "k wrap-around at N");
    need(h4.n_rowadv + h128.n_rowadv, "t_hat advance to the next parallel row");
    need(h4.n_patmask + h128.n_patmask, "masked PAT inputs in the last row");
    need(h4.n_stmask + h128.n_stmask,   "masked writes in the last row");
    need(h4.n_prefill,              "CORDIC pre-fill");
    need(h4.n_nonzero + h128.n_nonzero, "non-zero shrink result");
    need(h4.n_zero + h128.n_zero,       "zero shrink result");
    need(h4.n_done,                 "done pulse");
    $display("mechanisms: wraps=%0d row_adv=%0d pat_mask=%0d store_mask=%0d prefill=%0d nonzero=%0d zero=%0d",
             h4.n_wrap + h128.n_wrap, h4.n_rowadv + h128.n_rowadv, h4.n_patmask + h128.n_patmask,
             h4.n_stmask + h128.n_stmask, h4.n_prefill + h128.n_prefill,
             h4.n_nonzero + h128.n_nonzero, h4.n_zero + h128.n_zero);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
