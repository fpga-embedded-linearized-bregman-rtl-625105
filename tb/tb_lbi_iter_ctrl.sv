// tb_lbi_iter_ctrl: drives the iteration control with M = 4 lanes and
// N = 11 through 40 iterations (three wrap-arounds of k) and checks, for
// each iteration: k, lane = (k-1) mod M, t_hat = (k-1) div M, the unary
// code, the port-A row addresses and the port-B y-row address during the
// read phase, the PAT input selects and valid/first flags one cycle later,
// and that read_done comes ceil(k/M) + log2(M) + 2 cycles after new_iter.
module tb_lbi_iter_ctrl;
  localparam int unsigned M = 4, AW = 8, NW = 10, YAP = 170, D = 2;
  logic clk = 0, rst = 1, init = 0, new_iter = 0;
  always #5 clk = ~clk;
  logic [NW-1:0] n_len = NW'(11), k;
  logic [1:0] lane, pmt_sel;
  logic [AW-1:0] t_hat, a_addr, b_addr;
  logic [M-1:0] unary, pat_sel;
  logic k_wrap, rd_active, pat_valid, pat_first, mul_en, read_done;
  lbi_iter_ctrl #(.M(M), .AW(AW), .NW(NW), .BETA_AP(0), .Y_AP(YAP)) dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    #200000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
  initial begin
    int ek, rows, cyc, nvalid;
    repeat (2) @(negedge clk);
    rst = 0; init = 1;
    @(negedge clk); init = 0;
    for (int i = 1; i <= 40; i++) begin
      ek = ((i - 1) % 11) + 1;
      rows = (ek + M - 1) / M;
      @(negedge clk); new_iter = 1;
      @(negedge clk); new_iter = 0;
      check(k == NW'(ek), $sformatf("k=%0d exp %0d", k, ek));
      check(lane == 2'((ek - 1) % M) && pmt_sel == lane, "lane");
      check(t_hat == AW'((ek - 1) / M), $sformatf("t_hat=%0d k=%0d", t_hat, ek));
      check(unary == M'((1 << ((ek - 1) % M + 1)) - 1), $sformatf("unary=%b k=%0d", unary, ek));
      check(k_wrap == (ek == 11), "k_wrap");
      cyc = 1; nvalid = 0;
      while (!read_done) begin
        if (cyc <= rows) begin
          check(a_addr == AW'(cyc - 1), $sformatf("a_addr=%0d row %0d", a_addr, cyc - 1));
          check(b_addr == AW'(YAP + rows - 1), "b_addr");
        end
        if (pat_valid) begin
          nvalid++;
          check(pat_first == (nvalid == 1), "pat_first");
          check(pat_sel == ((nvalid == rows) ? unary : '1), $sformatf("pat_sel=%b row %0d", pat_sel, nvalid));
        end
        check(!mul_en, "mul_en early");
        @(negedge clk);
        cyc++;
      end
      check(mul_en, "mul_en with read_done");
      check(nvalid == rows, $sformatf("valid rows %0d exp %0d", nvalid, rows));
      check(cyc == rows + D + 2, $sformatf("read phase %0d cycles, exp %0d", cyc, rows + D + 2));
      @(negedge clk);
      check(!rd_active, "rd_active after done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
