// tb_lbi_pmt: streams random rows and column indices into multiplexer trees
// of 8 and 5 lanes, one per cycle, and checks that the selected word comes
// out after exactly ceil(log2 M) cycles.
module tb_lbi_pmt;
  import lbi_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  word_t in8 [8], in5 [5], o8, o5;
  logic [2:0] sel8, sel5;
  lbi_pmt #(.M(8)) dut8 (.clk, .in_data(in8), .in_sel(sel8), .out_data(o8));
  lbi_pmt #(.M(5)) dut5 (.clk, .in_data(in5), .in_sel(sel5), .out_data(o5));
  word_t q8 [$], q5 [$];
  int checks = 0, failures = 0;
  initial begin
    #200000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
  initial begin
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      if (n >= 3) begin
        checks += 2;
        if (o8 != q8[0]) begin failures++; $display("FAIL M=8 at %0d: %0d vs %0d", n, o8, q8[0]); end
        if (o5 != q5[0]) begin failures++; $display("FAIL M=5 at %0d: %0d vs %0d", n, o5, q5[0]); end
        void'(q8.pop_front()); void'(q5.pop_front());
      end
      for (int i = 0; i < 8; i++) in8[i] = word_t'($urandom);
      for (int i = 0; i < 5; i++) in5[i] = word_t'($urandom);
      sel8 = 3'($urandom_range(0, 7)); sel5 = 3'($urandom_range(0, 4));
      q8.push_back(in8[sel8]); q5.push_back(in5[sel5]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
