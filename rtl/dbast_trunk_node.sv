// dbast_trunk_node: one trunk node of the dual-purpose bi-direction adder & search tree.
//
// The node is a single adder that serves two purposes, as drawn in the paper's Fig. 13(a):
//   adder path   (search = 0)  y = a + b
//   search path  (search = 1)  input b passes through an additive inverter, so the adder
//                              forms a - b, and a sign detector after the adder reports
//                              whether a < b: y = {0..., sign(a - b)}.
// In search mode a is the query coordinate and b the node's threshold, so y[0] = 1 means
// "go to the left child". Purely combinational; the tree registers between levels.
module dbast_trunk_node #(
  parameter int W = 19
) (
  input  logic                search,
  input  logic signed [W-1:0] a,
  input  logic signed [W-1:0] b,
  output logic signed [W-1:0] y
);
  logic signed [W-1:0] b_eff;
  logic signed [W:0]   s;

  assign b_eff = search ? -b : b;            // additive inverter on the search path
  assign s     = {a[W-1], a} + {b_eff[W-1], b_eff};
  assign y     = search ? W'(s[W]) : s[W-1:0];   // sign detector or sum
endmodule
