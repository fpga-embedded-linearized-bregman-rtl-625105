// tb_lbi_pat: streams random rows into adder trees of 8 and of 6 lanes
// (the latter padded with zero leaves) one per cycle and checks every sum
// (20-bit wrap) and the valid/first flags after exactly ceil(log2 M) cycles.
module tb_lbi_pat;
  import lbi_pkg::*;
  import tb_lbi_ref_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  logic in_valid = 0, in_first = 0, ov8, of8, ov6, of6;
  word_t in8 [8], in6 [6], s8, s6;
  lbi_pat #(.M(8)) dut8 (.clk, .rst, .in_valid, .in_first, .in_data(in8), .out_valid(ov8), .out_first(of8), .out_sum(s8));
  lbi_pat #(.M(6)) dut6 (.clk, .rst, .in_valid, .in_first, .in_data(in6), .out_valid(ov6), .out_first(of6), .out_sum(s6));
  longint q8 [$], q6 [$];
  bit qf [$], qv [$];
  int checks = 0, failures = 0, cyc = 0;
  initial begin
    #200000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
  initial begin
    longint a, b;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      if (n >= 3) begin   // outputs of the row entered 3 cycles ago
        checks += 3;
        if (ov8 != qv[0] || ov6 != qv[0]) begin failures++; $display("FAIL valid at %0d", n); end
        if (of8 != qf[0] || of6 != qf[0]) begin failures++; $display("FAIL first at %0d", n); end
        if (longint'(s8) != q8[0] || longint'(s6) != q6[0]) begin
          failures++; $display("FAIL sum at %0d: %0d/%0d vs %0d/%0d", n, s8, s6, q8[0], q6[0]);
        end
        void'(q8.pop_front()); void'(q6.pop_front()); void'(qf.pop_front()); void'(qv.pop_front());
      end
      in_valid = $urandom_range(0, 1); in_first = $urandom_range(0, 1);
      a = 0; b = 0;
      for (int i = 0; i < 8; i++) begin
        in8[i] = word_t'($urandom);
        a += longint'(in8[i]);
        if (i < 6) begin in6[i] = word_t'($urandom); b += longint'(in6[i]); end
      end
      q8.push_back(w20(a)); q6.push_back(w20(b)); qf.push_back(in_first); qv.push_back(in_valid);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
