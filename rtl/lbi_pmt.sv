// lbi_pmt: pipelined multiplexer tree (PMT) picking y_k out of a row.
//
// The parallel row holding y_k is read through port B; the tree of 2:1
// multiplexers selects column (k-1) mod M. Level l uses bit l-1 of the
// column index, which is delayed along the pipeline with the data. The
// tree has the same D = ceil(log2 M) register levels as the adder tree,
// so y_k leaves it in the same cycle as the first row sum of the PAT.
module lbi_pmt
  import lbi_pkg::*;
#(
  parameter int unsigned M  = 1024,
  parameter int unsigned D  = (M > 1) ? $clog2(M) : 1
) (
  input  logic         clk,
  input  word_t        in_data [M],
  input  logic [D-1:0] in_sel,
  output word_t        out_data
);

  localparam int unsigned LEAVES = 1 << D;

  logic [LEAVES-1:0][DATA_W-1:0] leaf;
  for (genvar i = 0; i < LEAVES; i++) begin : g_leaf
    if (i < M) begin : g_used
      assign leaf[i] = in_data[i];
    end else begin : g_pad
      assign leaf[i] = '0;
    end
  end

  // level l: LEAVES >> l registered 2:1 multiplexers and the delayed key
  for (genvar l = 1; l <= D; l++) begin : g_level
    localparam int unsigned NODES = LEAVES >> l;
    logic [2*NODES-1:0][DATA_W-1:0] prev;
    logic [NODES-1:0][DATA_W-1:0]   node, q;
    logic [D-1:0]                   prev_sel, sel;
    if (l == 1) begin : g_in
      assign prev     = leaf;
      assign prev_sel = in_sel;
    end else begin : g_in
      assign prev     = g_level[l-1].q;
      assign prev_sel = g_level[l-1].sel;
    end
    for (genvar i = 0; i < NODES; i++) begin : g_node
      assign node[i] = prev_sel[l-1] ? prev[2*i+1] : prev[2*i];
    end
    always_ff @(posedge clk) begin
      q   <= node;
      sel <= prev_sel;
    end
  end

  assign out_data = g_level[D].q[0];

endmodule
