// tb_lbi_shrink: the soft threshold against max(|v|-lambda,0)*sign(v),
// including lambda = 0 (identity) and values at +-lambda.
module tb_lbi_shrink;
  import lbi_pkg::*;
  import tb_lbi_ref_pkg::*;
  word_t v, lambda, beta;
  int checks = 0, failures = 0;
  lbi_shrink dut (.*);
  task automatic one(longint vv, longint ll);
    v = word_t'(vv); lambda = word_t'(ll);
    #1;
    checks++;
    if (longint'(beta) != shr_ref(vv, ll)) begin
      failures++; $display("FAIL shrink(%0d,%0d) = %0d", vv, ll, beta);
    end
  endtask
  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
  initial begin
    one(1000, 0); one(-1000, 0); one(500, 500); one(-500, 500); one(501, 500); one(-501, 500);
    one(0, 300); one(200000, 65536); one(-200000, 65536);
    for (int i = 0; i < 1000; i++) one(longint'($urandom % 400000) - 200000, longint'($urandom % 70000));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
