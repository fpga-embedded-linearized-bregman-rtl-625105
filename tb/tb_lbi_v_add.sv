// tb_lbi_v_add: the v + d adder against 20-bit wrapping integer addition.
module tb_lbi_v_add;
  import lbi_pkg::*;
  import tb_lbi_ref_pkg::*;
  word_t v, d, sum;
  int checks = 0, failures = 0;
  lbi_v_add dut (.*);
  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
  initial begin
    for (int i = 0; i < 1000; i++) begin
      v = word_t'($urandom); d = word_t'($urandom);
      if (i < 500) d = word_t'($signed(d) >>> 6);
      #1;
      checks++;
      if (longint'(sum) != w20(longint'(v) + longint'(d))) begin
        failures++; $display("FAIL %0d + %0d = %0d", v, d, sum);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
