// tb_lbi_main_ctrl: runs the main control against simple models of the
// read phase (read_done R cycles after new_iter) and store phase (store_done
// S cycles after store_start) and checks: one init cycle, STAGES-1 CORDIC
// pre-fill pushes with k = 1, 2, ... wrapping at N, one push per new_iter,
// exactly L iterations, one hand-over cycle between the phases, and
// busy = 1 + (STAGES-1) + L*(1+R+1+S) + 1 cycles.
module tb_lbi_main_ctrl;
  localparam int unsigned STAGES = 20, NW = 10;
  localparam int R = 5, S = 4;
  logic clk = 0, rst = 1, start = 0, read_done = 0, store_done = 0;
  always #5 clk = ~clk;
  logic [NW-1:0] n_len = NW'(7), cordic_k;
  logic [31:0] l_iters, iter_cnt;
  logic init, new_iter, store_start, cordic_adv, busy, done;
  lbi_main_ctrl #(.STAGES(STAGES), .NW(NW)) dut (.*);
  int checks = 0, failures = 0;
  int n_init, n_push, n_new, n_hand, n_busy, n_done, rd_cnt, st_cnt, exp_k;
  bit rd_run, st_run, bad_k, bad_hand, read_done_seen;
  int l_iters_list [4] = '{1, 3, 10, 0};
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  // phase models and counters
  always @(posedge clk) begin
    if (busy) n_busy++;
    if (init) n_init++;
    if (done) n_done++;
    if (store_start) begin
      n_hand++;
      if (!read_done_seen) bad_hand = 1;
    end
    if (cordic_adv) begin
      n_push++;
      if (cordic_k != NW'(exp_k)) bad_k = 1;
      exp_k = (exp_k == 7) ? 1 : exp_k + 1;
    end
    if (new_iter) begin n_new++; rd_run <= 1; rd_cnt <= 0; end
    if (rd_run) begin
      rd_cnt <= rd_cnt + 1;
      if (rd_cnt == R - 1) rd_run <= 0;
    end
    if (store_start) begin st_run <= 1; st_cnt <= 0; end
    if (st_run) begin
      st_cnt <= st_cnt + 1;
      if (st_cnt == S - 1) st_run <= 0;
    end
  end
  always @(posedge clk) begin
    if (new_iter) read_done_seen <= 0;
    else if (read_done) read_done_seen <= 1;
  end
  always_comb read_done  = rd_run && rd_cnt == R - 1;
  always_comb store_done = st_run && st_cnt == S - 1;
  initial begin
    #2000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
  initial begin
    rd_run = 0; st_run = 0;
    repeat (2) @(negedge clk);
    rst = 0;
    foreach (l_iters_list[c]) begin
      n_init = 0; n_push = 0; n_new = 0; n_hand = 0; n_busy = 0; n_done = 0;
      exp_k = 1; bad_k = 0; bad_hand = 0;
      l_iters = l_iters_list[c];
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      while (busy) @(negedge clk);
      check(n_init == 1, "one init cycle");
      check(n_new == l_iters_list[c], $sformatf("%0d new_iter, exp %0d", n_new, l_iters_list[c]));
      check(n_hand == l_iters_list[c], "one hand-over per iteration");
      check(n_push == STAGES - 1 + l_iters_list[c], $sformatf("CORDIC pushes %0d", n_push));
      check(!bad_k, "CORDIC k sequence");
      check(!bad_hand, "hand-over only after read_done");
      check(n_done == 1, "one done pulse");
      check(iter_cnt == l_iters_list[c], "iter_cnt");
      check(n_busy == 1 + (STAGES - 1) + l_iters_list[c] * (1 + R + 1 + S) + 1,
            $sformatf("busy %0d cycles", n_busy));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
