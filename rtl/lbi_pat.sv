// lbi_pat: parallel adder tree (PAT) summing one parallel row of beta.
//
// The M words of a row enter together; a binary tree of 20-bit adders with
// a register after every level produces their sum D = ceil(log2 M) cycles
// later. A new row may enter every cycle. When M is not a power of two the
// missing leaves are tied to 0. in_valid and in_first travel with the data
// so that the error subtractor knows which output starts an iteration.
// Adders wrap in 20 bits; the input scaling keeps the sum in range.
module lbi_pat
  import lbi_pkg::*;
#(
  parameter int unsigned M = 1024,
  parameter int unsigned D = (M > 1) ? $clog2(M) : 1
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  in_valid,
  input  logic  in_first,
  input  word_t in_data [M],
  output logic  out_valid,
  output logic  out_first,
  output word_t out_sum
);

  localparam int unsigned LEAVES = 1 << D;

  // level 0: the inputs, padded with zero leaves
  logic [LEAVES-1:0][DATA_W-1:0] leaf;
  for (genvar i = 0; i < LEAVES; i++) begin : g_leaf
    if (i < M) begin : g_used
      assign leaf[i] = in_data[i];
    end else begin : g_pad
      assign leaf[i] = '0;
    end
  end

  // level l holds LEAVES >> l registered partial sums
  for (genvar l = 1; l <= D; l++) begin : g_level
    localparam int unsigned NODES = LEAVES >> l;
    logic [2*NODES-1:0][DATA_W-1:0] prev;
    logic [NODES-1:0][DATA_W-1:0]   node, q;
    logic                           vld, fst, prev_vld, prev_fst;
    if (l == 1) begin : g_in
      assign prev     = leaf;
      assign prev_vld = in_valid;
      assign prev_fst = in_first;
    end else begin : g_in
      assign prev     = g_level[l-1].q;
      assign prev_vld = g_level[l-1].vld;
      assign prev_fst = g_level[l-1].fst;
    end
    for (genvar i = 0; i < NODES; i++) begin : g_node
      assign node[i] = prev[2*i] + prev[2*i+1];
    end
    always_ff @(posedge clk) q <= node;
    always_ff @(posedge clk) begin
      if (rst) begin
        vld <= 1'b0;
        fst <= 1'b0;
      end else begin
        vld <= prev_vld;
        fst <= prev_fst;
      end
    end
  end

  assign out_sum   = g_level[D].q[0];
  assign out_valid = g_level[D].vld;
  assign out_first = g_level[D].fst;

endmodule
