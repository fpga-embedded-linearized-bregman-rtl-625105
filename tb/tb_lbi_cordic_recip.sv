// tb_lbi_cordic_recip: pre-fills the CORDIC with STAGES-1 values of k, then
// advances it once per step with idle cycles in between, and checks that
// the output is 1/k of the value pushed STAGES-1 steps earlier, within one
// LSB of 2^-19 of the real quotient, and equal to the software recurrence.
module tb_lbi_cordic_recip;
  import lbi_pkg::*;
  import tb_lbi_ref_pkg::*;
  localparam int unsigned KW = 19;
  logic clk = 0, adv = 0;
  always #5 clk = ~clk;
  logic [KW-1:0] k_in;
  mu_t mu;
  lbi_cordic_recip #(.STAGES(20), .KW(KW)) dut (.*);
  longint ks [$];
  int checks = 0, failures = 0;
  initial begin
    #2000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
  function automatic longint pick(int n);
    if (n < 40) return n + 1;
    if (n % 5 == 0) return 349184;
    return longint'($urandom_range(1, 349184));
  endfunction
  initial begin
    real exact;
    longint kk;
    for (int n = 0; n < 19; n++) begin
      kk = pick(n); @(negedge clk); adv = 1; k_in = KW'(kk); ks.push_back(kk);
    end
    for (int n = 19; n < 600; n++) begin
      kk = pick(n); @(negedge clk); adv = 1; k_in = KW'(kk); ks.push_back(kk);
      @(negedge clk); adv = 0;
      repeat ($urandom_range(0, 3)) @(negedge clk);
      exact = 524288.0 / real'(ks[0]);
      checks += 2;
      if (real'(mu) > exact + 1.0 || real'(mu) < exact - 1.0) begin
        failures++; $display("FAIL 1/%0d: %0d vs %f", ks[0], mu, exact);
      end
      if (longint'(mu) != mu_ref(ks[0])) begin
        failures++; $display("FAIL 1/%0d: %0d vs recurrence %0d", ks[0], mu, mu_ref(ks[0]));
      end
      void'(ks.pop_front());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
