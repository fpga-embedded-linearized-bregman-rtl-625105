// tb_lbi_err_sub: feeds y and a sequence of row sums and checks that the
// register holds y minus the running sum (20-bit wrap), restarting at first.
module tb_lbi_err_sub;
  import lbi_pkg::*;
  import tb_lbi_ref_pkg::*;
  logic clk = 0, valid = 0, first = 0;
  always #5 clk = ~clk;
  word_t y_in, sum_in, e;
  longint acc;
  int checks = 0, failures = 0;
  lbi_err_sub dut (.*);
  initial begin
    #500000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
  initial begin
    for (int it = 0; it < 200; it++) begin
      int rows;
      rows = $urandom_range(1, 8);
      for (int r = 0; r < rows; r++) begin
        @(negedge clk);
        valid = 1; first = (r == 0);
        y_in = word_t'($urandom); sum_in = word_t'($urandom);
        acc = (r == 0) ? w20(longint'(y_in) - longint'(sum_in)) : w20(acc - longint'(sum_in));
        if ($urandom_range(0, 3) == 0) begin
          @(negedge clk);   // idle cycle: e must hold
          valid = 0; y_in = word_t'($urandom); sum_in = word_t'($urandom);
        end
      end
      @(negedge clk);
      valid = 0; first = 0;
      checks++;
      if (longint'(e) != acc) begin failures++; $display("FAIL e=%0d exp=%0d", e, acc); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
