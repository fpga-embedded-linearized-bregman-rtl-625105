// tb_lbi_mult: d = e * mu against exact integer arithmetic with rounding to
// nearest and saturation; checks the one-cycle latency and the hold when
// en is low.
module tb_lbi_mult;
  import lbi_pkg::*;
  import tb_lbi_ref_pkg::*;
  logic clk = 0, en = 0;
  always #5 clk = ~clk;
  word_t e, d;
  mu_t mu;
  int checks = 0, failures = 0;
  longint expd;
  lbi_mult dut (.*);
  initial begin
    #200000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
  initial begin
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      e = word_t'($urandom);
      mu = (i % 3 == 0) ? mu_t'(1 << 19) : mu_t'($urandom % (1 << 19));
      if (i == 5) begin e = word_t'(-524288); mu = mu_t'((1 << 19) + 1); end
      en = 1;
      expd = mul_ref(longint'(e), longint'(mu));
      @(negedge clk);
      en = 0;
      e = word_t'($urandom);
      checks++;
      if (longint'(d) != expd) begin failures++; $display("FAIL e*mu: %0d vs %0d", d, expd); end
      @(negedge clk);
      checks++;
      if (longint'(d) != expd) begin failures++; $display("FAIL hold: %0d vs %0d", d, expd); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
