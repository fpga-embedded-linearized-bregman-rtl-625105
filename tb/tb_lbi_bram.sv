// tb_lbi_bram: checks the dual-port BRAM against an array model: random
// writes on both ports (never to the same address in one cycle), one-cycle
// read latency, read-first behaviour when a port reads the address it writes.
module tb_lbi_bram;
  import lbi_pkg::*;
  localparam int unsigned DEPTH = 64, AW = 6;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [AW-1:0] a_addr = '0, b_addr = '1;
  logic a_we = 0, b_we = 0;
  word_t a_wdata = '0, b_wdata = '0, a_rdata, b_rdata;
  lbi_bram #(.DEPTH(DEPTH)) dut (.*);
  longint model [DEPTH];
  longint exp_a, exp_b;
  int checks = 0, failures = 0;
  initial begin
    #200000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
  initial begin
    // initialise through both ports
    for (int i = 0; i < DEPTH; i += 2) begin
      @(negedge clk);
      a_we = 1; a_addr = AW'(i); a_wdata = word_t'(i * 7 - 100); model[i] = i * 7 - 100;
      b_we = 1; b_addr = AW'(i + 1); b_wdata = word_t'(-i * 13); model[i + 1] = -i * 13;
    end
    @(negedge clk); a_we = 0; b_we = 0;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      a_addr = AW'($urandom); b_addr = AW'($urandom);
      a_we = $urandom_range(0, 1); b_we = $urandom_range(0, 1);
      if (a_addr == b_addr) b_we = 0;
      a_wdata = word_t'($urandom); b_wdata = word_t'($urandom);
      exp_a = model[a_addr]; exp_b = model[b_addr];
      if (a_we) model[a_addr] = longint'(a_wdata);
      if (b_we) model[b_addr] = longint'(b_wdata);
      @(negedge clk);
      checks += 2;
      if (longint'(a_rdata) != exp_a) begin failures++; $display("FAIL A: %0d vs %0d", a_rdata, exp_a); end
      if (longint'(b_rdata) != exp_b) begin failures++; $display("FAIL B: %0d vs %0d", b_rdata, exp_b); end
      a_we = 0; b_we = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
