// lbi_bram: one true dual-port block RAM of the LBI core (one "BRAM(m)").
//
// Lane m of the core keeps the entries m + t*M of beta, y and v, each
// vector in its own address slice (see lbi_core). Both ports can read and
// write; reads are synchronous with one cycle of latency and return the
// word stored before a write in the same cycle (read-first), as FPGA block
// RAMs can be configured to do. The depth default of 1024 words of 20 bits
// corresponds to the 20-kbit blocks of the larger target device. Writing
// the same address from both ports in one cycle is not allowed and is
// checked by an assertion.
module lbi_bram
  import lbi_pkg::*;
#(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  // port A: beta reads in the read phase, v/beta write-back in the store phase
  input  logic [AW-1:0] a_addr,
  input  logic          a_we,
  input  word_t         a_wdata,
  output word_t         a_rdata,
  // port B: y and v reads, host loading
  input  logic [AW-1:0] b_addr,
  input  logic          b_we,
  input  word_t         b_wdata,
  output word_t         b_rdata
);

  word_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_we) mem[a_addr] <= a_wdata;
    a_rdata <= mem[a_addr];
  end

  always_ff @(posedge clk) begin
    if (b_we) mem[b_addr] <= b_wdata;
    b_rdata <= mem[b_addr];
  end

  a_no_write_collision: assert property (@(posedge clk) !(a_we && b_we && a_addr == b_addr))
    else $error("lbi_bram: both ports write address %0d", a_addr);

endmodule
