// tb_lbi_slice: one BRAM lane. Loads v and beta rows through port B, then
// runs the two-cycles-per-row store schedule (port-B v reads, port-A writes
// of v with lambda = 0 and of beta with lambda) for several rows and random
// d, and checks the stored v = v + d and beta = shrink(v + d, lambda), the
// masked and unmasked PAT output of port-A beta reads, and port-B reads.
module tb_lbi_slice;
  import lbi_pkg::*;
  import tb_lbi_ref_pkg::*;
  localparam int unsigned DEPTH = 48, AW = 6, VAP = 16, ROWS = 6;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [AW-1:0] a_addr = '0, b_addr = '0;
  logic a_we = 0, b_we = 0, pat_sel = 1;
  word_t b_wdata = '0, d = '0, lambda_eff = '0, pat_out, b_rdata;
  lbi_slice #(.DEPTH(DEPTH)) dut (.*);
  longint v [ROWS], b [ROWS];
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    #500000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
  initial begin
    longint lam, dd;
    for (int t = 0; t < ROWS; t++) begin
      v[t] = longint'($urandom % 60000) - 30000; b[t] = 0;
      @(negedge clk); b_we = 1; b_addr = AW'(VAP + t); b_wdata = word_t'(v[t]);
      @(negedge clk); b_addr = AW'(t); b_wdata = '0;
    end
    @(negedge clk); b_we = 0;
    for (int rep = 0; rep < 20; rep++) begin
      dd = longint'($urandom % 20000) - 10000;
      lam = longint'($urandom % 8000);
      d = word_t'(dd);
      // store schedule, s = 0 .. 2*ROWS+1
      for (int s = 0; s < 2 * ROWS + 2; s++) begin
        @(negedge clk);
        b_addr = AW'(VAP + s / 2);
        a_we = (s >= 2);
        a_addr = AW'((s % 2 == 0 ? VAP : 0) + (s - 2) / 2);
        lambda_eff = (s >= 2 && s % 2 == 0) ? word_t'(lam) : word_t'(0);
      end
      @(negedge clk); a_we = 0; lambda_eff = '0;
      for (int t = 0; t < ROWS; t++) begin
        v[t] = w20(v[t] + dd);
        b[t] = shr_ref(v[t], lam);
      end
      // read back: beta through port A / PAT mux, v through port B
      for (int t = 0; t < ROWS; t++) begin
        @(negedge clk); a_addr = AW'(t); b_addr = AW'(VAP + t); pat_sel = 1;
        @(negedge clk);
        check(longint'(pat_out) == b[t], $sformatf("beta[%0d]=%0d exp %0d", t, pat_out, b[t]));
        check(longint'(b_rdata) == v[t], $sformatf("v[%0d]=%0d exp %0d", t, b_rdata, v[t]));
        pat_sel = 0;
        #1;
        check(pat_out == '0, "masked PAT output");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
