// dbast: dual-purpose bi-direction adder & search tree.
//
// A binary tree of LEAVES leaf nodes and LEAVES-1 trunk nodes (heap numbering: node 1 is
// the root, node n has children 2n and 2n+1, heap indices LEAVES .. 2*LEAVES-1 are the
// leaves). Every trunk node is a dbast_trunk_node: an adder that can also compare.
// Sub-tree A is rooted at node 2 and covers leaves 0 .. LEAVES/2-1; sub-tree B is rooted
// at node 3 and covers the other half (paper Fig. 12).
//
// Mode TREE_ADD (Fig. 12(a)): all trunk nodes add. Data flows up: add_in is registered in
// the leaves, every level adds and registers, and the sum of all LEAVES inputs comes out
// ADD_LAT = log2(LEAVES)+1 cycles after add_valid, together with the sum of sub-tree A.
// Mode TREE_MIXED (Fig. 12(b)): sub-tree A keeps adding its LEAVES/2 inputs (sum_a valid,
// sum_all not); the trunk nodes of sub-tree B become comparators and its leaves crossbar
// search registers. Data flows down: a query coordinate (s_x, s_y) enters node 3, each
// level's node on the path compares one coordinate (x or y, per node) with its threshold
// and steers the query left (coordinate < threshold) or right, and the leaf reached
// matches the coordinate against its stored COO entries (paper Fig. 11). The answer comes
// log2(LEAVES) cycles after s_valid; one query is accepted per cycle.
// Thresholds and leaf entries are written through the cfg port (cfg_leaf = 0: threshold of
// trunk node cfg_idx; cfg_leaf = 1: entry cfg_slot of search leaf cfg_idx, numbered
// 0 .. LEAVES/2-1 inside sub-tree B); cfg_clr empties every leaf.
// From the paper: the node circuit, the two modes, the leaf crossbar, the top-down search.
// This design's choices: pipelining one register per level, the "less goes left" rule,
// the widths, and which half searches in mixed mode.
module dbast
  import rtnerf_pkg::*;
#(
  parameter int LEAVES       = 8,   // Fig. 12: 8 leaves, 4 per sub-tree
  parameter int LEAF_ENTRIES = 3,   // Fig. 13(b): coordinates A, B, C
  parameter int TW           = DATA_W + $clog2(LEAVES)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  tree_mode_e               mode,
  // adder path
  input  logic                     add_valid,
  input  data_t [LEAVES-1:0]       add_in,
  output logic                     sum_valid,
  output logic signed [TW-1:0]     sum_all,
  output logic signed [TW-1:0]     sum_a,
  // search path
  input  logic                     s_valid,
  input  coord_t                   s_x,
  input  coord_t                   s_y,
  output logic                     r_valid,
  output logic                     r_hit,
  output data_t                    r_data,
  // configuration
  input  logic                     cfg_clr,
  input  logic                     cfg_we,
  input  logic                     cfg_leaf,
  input  logic [6:0]               cfg_idx,
  input  logic [3:0]               cfg_slot,
  input  logic                     cfg_dim,
  input  logic [15:0]              cfg_thr,
  input  coord_t                   cfg_x,
  input  coord_t                   cfg_y,
  input  data_t                    cfg_value
);
  localparam int D          = $clog2(LEAVES);   // trunk levels
  localparam int HALF       = LEAVES / 2;
  localparam int ADD_LAT    = D + 1;

  // ---------------- node configuration ----------------
  logic signed [TW-1:0] thr [LEAVES];
  logic [LEAVES-1:0]    dim;
  always_ff @(posedge clk) begin
    if (cfg_we && !cfg_leaf && cfg_idx < 7'(LEAVES)) begin
      thr[cfg_idx[$clog2(LEAVES)-1:0]] <= TW'($signed({1'b0, cfg_thr}));
      dim[cfg_idx[$clog2(LEAVES)-1:0]] <= cfg_dim;
    end
  end

  // A trunk node n >= 2 belongs to sub-tree B when its ancestor on level 1 is node 3.
  function automatic logic in_b(input int n);
    int m;
    m = n;
    for (int k = 0; k < 8; k++) if (m > 3) m = m >> 1;
    return (m == 3);
  endfunction

  // Level of trunk node n, the root being level 0.
  function automatic int level_of(input int n);
    int l;
    l = 0;
    for (int m = 2; m <= n; m = m * 2) l++;
    return l;
  endfunction

  // ---------------- registers ----------------
  logic signed [TW-1:0] leaf_q [LEAVES];        // leaf input registers (adder path)
  logic signed [TW-1:0] node_q [LEAVES];        // registered node outputs, index 1..LEAVES-1
  logic [ADD_LAT-1:0]   add_v;
  logic signed [TW-1:0] sum_a_d;                // sub-tree A delayed to align with the root

  // search pipeline: after level k (1..D-1) has been evaluated
  logic [D-1:1]         sv;                     // sv[k]: a query has passed level k
  coord_t               sx [1:D-1];
  coord_t               sy [1:D-1];
  logic [7:0]           snext [1:D-1];          // heap index of the next node on the path

  // ---------------- trunk nodes ----------------
  logic signed [TW-1:0] node_a [LEAVES];
  logic signed [TW-1:0] node_b [LEAVES];
  logic signed [TW-1:0] node_y [LEAVES];
  logic [LEAVES-1:0]    node_search;

  always_comb begin
    for (int n = 0; n < LEAVES; n++) begin
      node_a[n] = '0; node_b[n] = '0; node_search[n] = 1'b0;
    end
    for (int n = 1; n < LEAVES; n++) begin
      int lvl;
      coord_t qx, qy;
      lvl = level_of(n);
      qx  = '0;
      qy  = '0;
      node_search[n] = (mode == TREE_MIXED) && (n >= 2) && in_b(n);
      if (node_search[n]) begin
        if (lvl == 1) begin qx = s_x; qy = s_y; end
        else          begin qx = sx[lvl-1]; qy = sy[lvl-1]; end
        node_a[n] = TW'($signed({1'b0, dim[n] ? qy : qx}));
        node_b[n] = thr[n];
      end else if (2*n >= LEAVES) begin
        node_a[n] = leaf_q[2*n - LEAVES];
        node_b[n] = leaf_q[2*n + 1 - LEAVES];
      end else begin
        node_a[n] = node_q[2*n];
        node_b[n] = node_q[2*n + 1];
      end
    end
  end

  assign node_y[0] = '0;   // heap index 0 names no node; tied off for the path select below

  for (genvar n = 1; n < LEAVES; n++) begin : g_node
    dbast_trunk_node #(.W(TW)) u_node (
      .search (node_search[n]),
      .a      (node_a[n]),
      .b      (node_b[n]),
      .y      (node_y[n])
    );
  end

  // ---------------- adder path registers ----------------
  always_ff @(posedge clk) begin
    for (int l = 0; l < LEAVES; l++) leaf_q[l] <= TW'(add_in[l]);
    for (int n = 1; n < LEAVES; n++) node_q[n] <= node_y[n];
    sum_a_d <= node_q[2];
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) add_v <= '0;
    else        add_v <= {add_v[ADD_LAT-2:0], add_valid};
  end
  assign sum_valid = add_v[ADD_LAT-1];
  assign sum_all   = node_q[1];
  assign sum_a     = sum_a_d;

  // ---------------- search path ----------------
  // Level k node on the path: 3 for k = 1, snext[k-1] below. Its sign picks the child.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sv <= '0;
    else begin
      sv[1] <= s_valid && (mode == TREE_MIXED);
      for (int k = 2; k < D; k++) sv[k] <= sv[k-1];
    end
  end
  always_ff @(posedge clk) begin
    sx[1] <= s_x;
    sy[1] <= s_y;
    snext[1] <= 8'(6) + (node_y[3][0] ? 8'd0 : 8'd1);
    for (int k = 2; k < D; k++) begin
      sx[k] <= sx[k-1];
      sy[k] <= sy[k-1];
      snext[k] <= 8'(2 * int'(snext[k-1])) + (node_y[snext[k-1][$clog2(LEAVES)-1:0]][0] ? 8'd0 : 8'd1);
    end
  end

  // ---------------- search leaves (sub-tree B) ----------------
  logic [HALF-1:0] leaf_hit;
  data_t           leaf_val [HALF];
  for (genvar l = 0; l < HALF; l++) begin : g_leaf
    dbast_leaf_xbar #(.ENTRIES(LEAF_ENTRIES)) u_xbar (
      .clk       (clk),
      .rst_n     (rst_n),
      .clr       (cfg_clr),
      .cfg_we    (cfg_we && cfg_leaf && cfg_idx == 7'(l)),
      .cfg_slot  (cfg_slot[$clog2(LEAF_ENTRIES)-1:0]),
      .cfg_x     (cfg_x),
      .cfg_y     (cfg_y),
      .cfg_value (cfg_value),
      .q_x       (sx[D-1]),
      .q_y       (sy[D-1]),
      .hit       (leaf_hit[l]),
      .value     (leaf_val[l])
    );
  end

  // Leaf reached: heap index snext[D-1] in LEAVES+HALF .. 2*LEAVES-1.
  logic [$clog2(HALF)-1:0] leaf_sel;
  assign leaf_sel = snext[D-1][$clog2(HALF)-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_valid <= 1'b0;
      r_hit   <= 1'b0;
      r_data  <= '0;
    end else begin
      r_valid <= sv[D-1];
      r_hit   <= leaf_hit[leaf_sel];
      r_data  <= leaf_hit[leaf_sel] ? leaf_val[leaf_sel] : data_t'(0);
    end
  end

  if (LEAVES < 8 || (LEAVES & (LEAVES - 1)) != 0) begin : g_bad_leaves
    $error("dbast: LEAVES must be a power of two >= 8");
  end
endmodule
