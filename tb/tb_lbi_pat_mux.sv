// tb_lbi_pat_mux: the PAT input multiplexer passes its input when selected
// and gives 0 otherwise.
module tb_lbi_pat_mux;
  import lbi_pkg::*;
  logic sel;
  word_t din, dout;
  int checks = 0, failures = 0;
  lbi_pat_mux dut (.*);
  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
  initial begin
    for (int i = 0; i < 500; i++) begin
      sel = $urandom_range(0, 1); din = word_t'($urandom);
      #1;
      checks++;
      if (dout != (sel ? din : word_t'(0))) begin failures++; $display("FAIL sel=%0d din=%0d dout=%0d", sel, din, dout); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
