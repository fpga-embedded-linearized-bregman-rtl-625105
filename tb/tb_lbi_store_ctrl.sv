// tb_lbi_store_ctrl: for several t_hat and unary codes checks the store
// schedule cycle by cycle: port-B v-row reads (two cycles per row), port-A
// writes of v then beta one and two cycles later, the write mask in the last
// row, lambda on only in the beta cycles, and a phase of 2*(t_hat+1)+2 cycles.
module tb_lbi_store_ctrl;
  localparam int unsigned M = 4, AW = 8, VAP = 85;
  logic clk = 0, rst = 1, start = 0;
  always #5 clk = ~clk;
  logic [AW-1:0] t_hat, b_addr, a_addr;
  logic [M-1:0] unary, we_mask;
  logic active, a_we, lam_on, done;
  lbi_store_ctrl #(.M(M), .AW(AW), .BETA_AP(0), .V_AP(VAP)) dut (.*);
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
    int rows, s, row;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int c = 0; c < 12; c++) begin
      t_hat = AW'(c % 5);
      unary = M'((1 << (c % M + 1)) - 1);
      rows = c % 5 + 1;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      for (s = 0; s < 2 * rows + 2; s++) begin
        check(active, "active");
        check(done == (s == 2 * rows + 1), $sformatf("done at s=%0d", s));
        if (s <= 2 * rows - 1) check(b_addr == AW'(VAP + s / 2), $sformatf("b_addr=%0d s=%0d", b_addr, s));
        check(a_we == (s >= 2), $sformatf("a_we s=%0d", s));
        check(lam_on == (s >= 2 && s % 2 == 0), $sformatf("lam_on s=%0d", s));
        if (s >= 2) begin
          row = (s - 2) / 2;
          check(a_addr == AW'((s % 2 == 0 ? VAP : 0) + row), $sformatf("a_addr=%0d s=%0d", a_addr, s));
          check(we_mask == ((row == rows - 1) ? unary : '1), $sformatf("mask=%b s=%0d", we_mask, s));
        end
        @(negedge clk);
      end
      check(!active && !a_we, "idle after done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
