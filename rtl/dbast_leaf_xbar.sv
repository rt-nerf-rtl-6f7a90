// dbast_leaf_xbar: crossbar-based search register of one leaf of the adder & search tree.
//
// Holds ENTRIES coordinate/value pairs of a coordinate-encoded (COO) sparse matrix, the
// pairs that the trunk nodes above route to this leaf (paper Fig. 13(b): coordinates
// A, B, C with values A, B, C, one equality comparator each, and a multiplexer driven by
// the comparators). A query coordinate is compared with every stored coordinate at once;
// the value of the matching entry is returned, or zero (hit = 0) when no entry matches,
// i.e. the element is a zero of the sparse matrix. The compare is combinational; the
// entries are written one at a time through the cfg port and cleared by clr.
// The number of entries (3) is the number printed in Fig. 13(b).
module dbast_leaf_xbar
  import rtnerf_pkg::*;
#(
  parameter int ENTRIES = 3
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clr,
  input  logic                       cfg_we,
  input  logic [$clog2(ENTRIES)-1:0] cfg_slot,
  input  coord_t                     cfg_x,
  input  coord_t                     cfg_y,
  input  data_t                      cfg_value,
  input  coord_t                     q_x,
  input  coord_t                     q_y,
  output logic                       hit,
  output data_t                      value
);
  logic [ENTRIES-1:0] vld;
  coord_t             cx  [ENTRIES];
  coord_t             cy  [ENTRIES];
  data_t              val [ENTRIES];
  logic [ENTRIES-1:0] match;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      vld <= '0;
    else if (clr)    vld <= '0;
    else if (cfg_we) vld[cfg_slot] <= 1'b1;
  end

  always_ff @(posedge clk) begin
    if (cfg_we) begin
      cx[cfg_slot]  <= cfg_x;
      cy[cfg_slot]  <= cfg_y;
      val[cfg_slot] <= cfg_value;
    end
  end

  always_comb begin
    value = '0;
    for (int e = 0; e < ENTRIES; e++) begin
      match[e] = vld[e] && (cx[e] == q_x) && (cy[e] == q_y);
      if (match[e]) value = val[e];
    end
  end
  assign hit = |match;
endmodule
