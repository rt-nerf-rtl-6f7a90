// tb_dbast: tests both modes of the dual-purpose adder & search tree.
// Adder mode: random 8-input vectors every cycle; sum_all and sum_a must appear 4 cycles
// later and equal the testbench's sums. Mixed mode: sub-tree B is configured as a search
// tree like the paper's Fig. 11 example (node 3 splits x at 128, its children split y at
// 196 and 128) with up to 3 COO entries per leaf, among them (1,195), (3,161), (5,182);
// random queries of stored and absent coordinates must return the stored value or zero
// 3 cycles later, while sub-tree A keeps adding. Also counts the mode switches.
module tb_dbast;
  import rtnerf_pkg::*;
  localparam int L = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  tree_mode_e mode;
  logic add_valid, sum_valid, s_valid, r_valid, r_hit;
  data_t [L-1:0] add_in;
  logic signed [18:0] sum_all, sum_a;
  coord_t s_x, s_y; data_t r_data;
  logic cfg_clr, cfg_we, cfg_leaf, cfg_dim; logic [6:0] cfg_idx; logic [3:0] cfg_slot;
  logic [15:0] cfg_thr; coord_t cfg_x, cfg_y; data_t cfg_value;
  dbast #(.LEAVES(L), .LEAF_ENTRIES(3)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  typedef struct { int all; int a; int cyc; bit mixed; } sexp_t;
  typedef struct { data_t v; int cyc; } rexp_t;
  sexp_t sq [$];
  rexp_t rq [$];

  always @(posedge clk) if (rst_n) begin
    if (sum_valid) begin
      sexp_t e;
      checks++;
      if (sq.size() == 0) begin failures++; $display("unexpected sum"); end
      else begin
        e = sq.pop_front();
        if ((!e.mixed && sum_all != e.all) || sum_a != e.a || cyc - e.cyc != 4) begin
          failures++; $display("sum got %0d/%0d exp %0d/%0d lat %0d", sum_all, sum_a, e.all, e.a, cyc - e.cyc);
        end
      end
    end
    if (r_valid) begin
      rexp_t e;
      checks++;
      if (rq.size() == 0) begin failures++; $display("unexpected search result"); end
      else begin
        e = rq.pop_front();
        if (r_data != e.v || r_hit != (e.v != 0) || cyc - e.cyc != 3) begin
          failures++; $display("search got %0d exp %0d lat %0d", r_data, e.v, cyc - e.cyc);
        end
      end
    end
  end

  // reference search tree: leaf number for a coordinate
  function automatic int leaf_of(int x, int y);
    if (x < 128) return (y < 196) ? 0 : 1;
    else         return (y < 128) ? 2 : 3;
  endfunction

  int    ex [4][3], ey [4][3];
  data_t ev [4][3];
  int    en [4];

  task automatic cfg_node(int idx, bit d, int thr);
    cfg_we = 1; cfg_leaf = 0; cfg_idx = 7'(idx); cfg_dim = d; cfg_thr = 16'(thr);
    @(posedge clk); #1; cfg_we = 0;
  endtask
  task automatic cfg_entry(int x, int y, data_t v);
    int lf;
    lf = leaf_of(x, y);
    if (en[lf] == 3) return;
    cfg_we = 1; cfg_leaf = 1; cfg_idx = 7'(lf); cfg_slot = 4'(en[lf]);
    cfg_x = coord_t'(x); cfg_y = coord_t'(y); cfg_value = v;
    ex[lf][en[lf]] = x; ey[lf][en[lf]] = y; ev[lf][en[lf]] = v; en[lf]++;
    @(posedge clk); #1; cfg_we = 0;
  endtask
  function automatic data_t lookup(int x, int y);
    int lf;
    lf = leaf_of(x, y);
    for (int k = 0; k < en[lf]; k++) if (ex[lf][k] == x && ey[lf][k] == y) return ev[lf][k];
    return 0;
  endfunction

  int switches = 0;
  initial begin
    mode = TREE_ADD; add_valid = 0; add_in = '0; s_valid = 0; s_x = 0; s_y = 0;
    cfg_clr = 0; cfg_we = 0; cfg_leaf = 0; cfg_dim = 0; cfg_idx = 0; cfg_slot = 0;
    cfg_thr = 0; cfg_x = 0; cfg_y = 0; cfg_value = 0;
    for (int l = 0; l < 4; l++) en[l] = 0;
    repeat (2) @(posedge clk); rst_n = 1; #1;
    // ---- adder mode
    for (int n = 0; n < 200; n++) begin
      int s, sa;
      s = 0; sa = 0;
      add_valid = ($urandom_range(3) != 0);
      for (int l = 0; l < L; l++) begin
        add_in[l] = (n < 4) ? ((n % 2 == 1) ? 16'sh7fff : 16'sh8000) : data_t'($urandom);
        s += int'(add_in[l]);
        if (l < L/2) sa += int'(add_in[l]);
      end
      if (add_valid) sq.push_back('{s, sa, cyc, 1'b0});
      @(posedge clk); #1;
    end
    add_valid = 0;
    repeat (6) @(posedge clk); #1;
    // ---- configure sub-tree B (Fig. 11 thresholds) and its leaves
    cfg_clr = 1; @(posedge clk); #1; cfg_clr = 0;
    cfg_node(3, 0, 128);   // x
    cfg_node(6, 1, 196);   // y
    cfg_node(7, 1, 128);   // y
    cfg_entry(1, 195, 16'sd101);
    cfg_entry(3, 161, 16'sd303);
    cfg_entry(5, 182, -16'sd55);
    for (int k = 0; k < 20; k++) cfg_entry($urandom_range(255), $urandom_range(255), data_t'($urandom_range(1, 999)));
    mode = TREE_MIXED; switches++;
    // the paper's example query first
    s_valid = 1; s_x = 3; s_y = 161; rq.push_back('{16'sd303, cyc});
    @(posedge clk); #1;
    for (int n = 0; n < 300; n++) begin
      int x, y, s, sa, lf, k;
      if ($urandom_range(1) == 1) begin
        lf = $urandom_range(3);
        if (en[lf] > 0) begin k = $urandom_range(en[lf]-1); x = ex[lf][k]; y = ey[lf][k]; end
        else begin x = $urandom_range(255); y = $urandom_range(255); end
      end else begin x = $urandom_range(255); y = $urandom_range(255); end
      s_valid = ($urandom_range(4) != 0); s_x = coord_t'(x); s_y = coord_t'(y);
      if (s_valid) rq.push_back('{lookup(x, y), cyc});
      // sub-tree A keeps adding meanwhile
      add_valid = ($urandom_range(1) == 1);
      sa = 0;
      for (int l = 0; l < L; l++) begin
        add_in[l] = data_t'($urandom);
        if (l < L/2) sa += int'(add_in[l]);
      end
      if (add_valid) sq.push_back('{0, sa, cyc, 1'b1});
      @(posedge clk); #1;
    end
    s_valid = 0; add_valid = 0;
    repeat (6) @(posedge clk); #1;
    // back to adder mode
    mode = TREE_ADD; switches++;
    add_valid = 1;
    for (int l = 0; l < L; l++) add_in[l] = data_t'(l * 100 - 300);
    sq.push_back('{400, -600, cyc, 1'b0});
    @(posedge clk); #1; add_valid = 0;
    repeat (6) @(posedge clk);
    checks++;
    if (sq.size() != 0 || rq.size() != 0 || switches != 2) begin failures++; $display("outstanding results"); end
    $display("mode switches: %0d", switches);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
