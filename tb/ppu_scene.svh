// ppu_scene.svh: a small radiance-field scene and its reference model, shared by the PPU
// and top-level testbenches (included inside the testbench module).
//
// The including module defines SC_PPU, the hierarchical path of the PPU under test, and
// provides: clk, checks, failures, the PPU-side signals cmd_valid,
// cmd, cmd_ready, pt_valid, pt, pt_ready, px_valid, px_pix, px_rgb, px_t, idle, perf, the
// DRAM stall control dram_stall and a dram_model instance u_dram.
//
// Scene: NT = 24 terms (0..11 density, 12..23 appearance) over a 16^3 grid. Term j has
// axis j % 3, its vector in bitmap-store row j and its 16 x 16 matrix in rows
// 32 + 16 j .. 32 + 16 j + 15 (columns 0..15), both about half sparse with random Q7.8
// values. Term 5 (a density term on the Z axis, matrix over (x, y)) is instead COO encoded
// and lives in the search sub-tree: node 3 splits x at 8, nodes 6 and 7 split y at 8, and
// each of the four leaves holds 3 non-zeros of its quadrant. The MLP weights are random.
// Everything is placed in DRAM and loaded with OP_LOAD commands, the tree with
// OP_TREE_LOAD. Points go to pixels 0..7 with short segments, except that pixel 7 first
// receives a point that makes it opaque, so its later points must be skipped.
//
// Each point is checked as it reaches integration: its density and colour (read from the
// PPU) must equal the model's bit for bit. The reference computes every point bit-exactly up to the colour (products, density sum,
// MLP) and the optical depth sigma * delta in Q8.8, then integrates with real arithmetic; pixels are compared with a tolerance of
// 32/32768 on T and 8/256 on each colour channel.

localparam int SC_NT = 24, SC_NSIG = 12, SC_NIN = 15, SC_NH = 16, SC_WROWS = SC_NIN + SC_NH + 2;
localparam int SC_ROWS = 32 + 16 * SC_NT;
localparam int BM_BASE = 0, RP_BASE = 2048, NZ_BASE = 4096, TERM_BASE = 8192, W_BASE = 8448, SPM_BASE = 8704;
localparam int COO_J = 5;

int sc_vec [SC_NT][16];
int sc_mat [SC_NT][16][16];
int sc_w   [SC_WROWS][SC_NH];
int sc_nspm;
real sc_t [8];
real sc_c [8][3];
int  sc_exp_done = 0, sc_exp_skip = 0;
int  sc_px_rgb [8][3];
int  sc_px_t [8];

function automatic int sc_sat(longint v);
  if (v > 32767) return 32767;
  if (v < -32768) return -32768;
  return int'(v);
endfunction

function automatic int sc_rnd_val();
  int v;
  v = int'($urandom_range(0, 1024)) - 512;
  return (v == 0) ? 1 : v;
endfunction

// bit-exact features: density (Q7.8) and colour (Q7.8, 0..256)
function automatic void sc_model(input int x, y, z, dx, dy, dz, output int sigma, output int rgb [3]);
  int p [SC_NT]; int xin [SC_NIN]; int h [SC_NH]; longint acc, s;
  s = 0;
  for (int j = 0; j < SC_NT; j++) begin
    int tc, ta, tb;
    case (j % 3)
      0: begin tc = x; ta = y; tb = z; end
      1: begin tc = y; ta = x; tb = z; end
      default: begin tc = z; ta = x; tb = y; end
    endcase
    p[j] = sc_sat((longint'(sc_vec[j][tc]) * longint'(sc_mat[j][ta][tb])) >>> 8);
    if (j < SC_NSIG) s += p[j];
  end
  sigma = sc_sat(s);
  for (int i = 0; i < 12; i++) xin[i] = p[SC_NSIG + i];
  xin[12] = dx; xin[13] = dy; xin[14] = dz;
  for (int o = 0; o < SC_NH; o++) begin
    acc = longint'(sc_w[SC_NIN][o]) <<< 8;
    for (int i = 0; i < SC_NIN; i++) acc += longint'(sc_w[i][o]) * longint'(xin[i]);
    h[o] = sc_sat(acc >>> 8);
    if (h[o] < 0) h[o] = 0;
  end
  for (int o = 0; o < 3; o++) begin
    acc = longint'(sc_w[SC_NIN + SC_NH + 1][o]) <<< 8;
    for (int i = 0; i < SC_NH; i++) acc += longint'(sc_w[SC_NIN + 1 + i][o]) * longint'(h[i]);
    acc = acc >>> 8;
    rgb[o] = (acc < 0) ? 0 : (acc > 256) ? 256 : int'(acc);
  end
endfunction

// build the scene and write it into DRAM
task automatic sc_build();
  int nz [$]; int rowptr [SC_ROWS]; logic [15:0] bits [SC_ROWS];
  int lf_n [4];
  for (int j = 0; j < SC_NT; j++)
    for (int c = 0; c < 16; c++) sc_vec[j][c] = ($urandom_range(99) < 60) ? sc_rnd_val() : 0;
  for (int j = 0; j < SC_NT; j++)
    for (int a = 0; a < 16; a++)
      for (int b = 0; b < 16; b++) sc_mat[j][a][b] = (j != COO_J && $urandom_range(99) < 50) ? sc_rnd_val() : 0;
  for (int r = 0; r < SC_WROWS; r++)
    for (int o = 0; o < SC_NH; o++) sc_w[r][o] = int'($urandom_range(0, 200)) - 100;
  // bitmap rows
  for (int r = 0; r < SC_ROWS; r++) begin
    rowptr[r] = nz.size();
    bits[r] = '0;
    for (int c = 0; c < 16; c++) begin
      int v;
      v = 0;
      if (r < SC_NT) v = sc_vec[r][c];
      else if (r >= 32) v = sc_mat[(r - 32) / 16][(r - 32) % 16][c];
      if (v != 0) begin bits[r][c] = 1'b1; nz.push_back(v); end
    end
  end
  for (int r = 0; r < SC_ROWS; r++) begin
    u_dram.mem[BM_BASE + 4*r] = 64'(bits[r]);
    for (int w = 1; w < 4; w++) u_dram.mem[BM_BASE + 4*r + w] = '0;
    u_dram.mem[RP_BASE + r] = 64'(rowptr[r]);
  end
  while (nz.size() % 4 != 0) nz.push_back(0);
  for (int i = 0; i < nz.size(); i += 4)
    u_dram.mem[NZ_BASE + i/4] = {16'(nz[i+3]), 16'(nz[i+2]), 16'(nz[i+1]), 16'(nz[i])};
  // term table
  for (int j = 0; j < SC_NT; j++) begin
    term_t t;
    t.axis = axis_e'(j % 3);
    t.enc = (j == COO_J) ? ENC_COO : ENC_BITMAP;
    t.vec_row = 13'(j);
    t.mat_base = 13'(32 + 16 * j);
    u_dram.mem[TERM_BASE + j] = 64'(t);
  end
  // MLP weights, 4 per word
  for (int r = 0; r < SC_WROWS; r++)
    for (int q = 0; q < SC_NH / 4; q++)
      u_dram.mem[W_BASE + r * (SC_NH / 4) + q] =
        {16'(sc_w[r][4*q+3]), 16'(sc_w[r][4*q+2]), 16'(sc_w[r][4*q+1]), 16'(sc_w[r][4*q])};
  // COO term in the search sub-tree: thresholds, then 3 entries per quadrant leaf
  sc_nspm = 0;
  for (int k = 0; k < 3; k++) begin
    spm_entry_t e;
    e = '0;
    e.idx = 7'((k == 0) ? 3 : (k == 1) ? 6 : 7);
    e.dim = (k != 0);
    e.thr = 16'd8;
    u_dram.mem[SPM_BASE + sc_nspm++] = 64'(e);
  end
  lf_n = '{0, 0, 0, 0};
  while (lf_n[0] + lf_n[1] + lf_n[2] + lf_n[3] < 12) begin
    int x, y, lf;
    x = $urandom_range(15); y = $urandom_range(15);
    lf = 2 * (x >= 8) + (y >= 8);
    if (lf_n[lf] < 3 && sc_mat[COO_J][x][y] == 0) begin
      spm_entry_t e;
      sc_mat[COO_J][x][y] = sc_rnd_val();
      e = '0;
      e.is_leaf = 1'b1; e.idx = 7'(lf); e.slot = 4'(lf_n[lf]);
      e.cx = 8'(x); e.cy = 8'(y); e.value = data_t'(sc_mat[COO_J][x][y]);
      u_dram.mem[SPM_BASE + sc_nspm++] = 64'(e);
      lf_n[lf]++;
    end
  end
  for (int p = 0; p < 8; p++) begin sc_t[p] = 1.0; sc_c[p] = '{0.0, 0.0, 0.0}; end
endtask

task automatic sc_cmd(op_e op, tgt_e tgt, int laddr, int daddr, int count);
  cmd_valid = 1'b1;
  cmd.op = op; cmd.tgt = tgt; cmd.local_addr = 32'(laddr); cmd.dram_addr = 32'(daddr); cmd.count = 16'(count);
  while (!cmd_ready) begin @(posedge clk); #1; end
  @(posedge clk); #1;
  cmd_valid = 1'b0;
  while (!idle) begin @(posedge clk); #1; end
endtask

task automatic sc_load();
  sc_cmd(OP_LOAD, TGT_BITMAP, 0, BM_BASE, 4 * SC_ROWS);
  sc_cmd(OP_LOAD, TGT_ROWPTR, 0, RP_BASE, SC_ROWS);
  sc_cmd(OP_LOAD, TGT_NZ, 0, NZ_BASE, 1700);
  sc_cmd(OP_LOAD, TGT_TERM, 0, TERM_BASE, SC_NT);
  sc_cmd(OP_LOAD, TGT_WEIGHT, 0, W_BASE, SC_WROWS * SC_NH / 4);
  sc_cmd(OP_LOAD, TGT_SPM, 0, SPM_BASE, sc_nspm);
  sc_cmd(OP_TREE_LOAD, TGT_SPM, 0, 0, sc_nspm);
  sc_cmd(OP_FRAME, TGT_SPM, 0, 0, 0);
endtask

task automatic sc_point(int pix, int x, int y, int z, int delta, int dx, int dy, int dz);
  int sigma; int rgb [3]; real e, w, s;
  sc_model(x, y, z, dx, dy, dz, sigma, rgb);
  if (sc_t[pix] * 32768.0 < 3.0) sc_exp_skip++;
  else begin
    sc_exp_done++;
    // optical depth in the unit's Q8.8 format, rounded
    s = (sigma < 0) ? 0.0 : real'((longint'(sigma) * longint'(delta) + 128) / 256) / 256.0;
    if (s > 255.0) s = 255.0;
    e = $exp(-s);
    w = sc_t[pix] * (1.0 - e);
    for (int ch = 0; ch < 3; ch++) sc_c[pix][ch] += w * real'(rgb[ch]) / 256.0;
    sc_t[pix] *= e;
  end
  pt_valid = 1'b1;
  pt.pix = PIX_W'(pix); pt.x = 8'(x); pt.y = 8'(y); pt.z = 8'(z); pt.delta = 16'(delta);
  pt.dx = data_t'(dx); pt.dy = data_t'(dy); pt.dz = data_t'(dz);
  while (!pt_ready) begin @(posedge clk); #1; end
  @(posedge clk); #1;
  pt_valid = 1'b0;
endtask

// npts points; pixel 7 is made opaque by its first point
task automatic sc_points(int npts);
  int x, y, z, sigma; int rgb [3];
  // opaque point: search a grid position with density >= 1.0
  for (int k = 0; k < 4096; k++) begin
    x = k % 16; y = (k / 16) % 16; z = k / 256;
    sc_model(x, y, z, 0, 0, 0, sigma, rgb);
    if (sigma >= 256) break;
  end
  checks++;
  if (sigma < 256) begin failures++; $display("scene has no dense point"); end
  for (int n = 0; n < npts; n++) begin
    if (n == 2) sc_point(7, x, y, z, 16'hffff, 0, 0, 0);
    else
      sc_point((n % 5 == 4) ? 7 : $urandom_range(6), $urandom_range(15), $urandom_range(15), $urandom_range(15),
               $urandom_range(5, 25), int'($urandom_range(0, 512)) - 256, int'($urandom_range(0, 512)) - 256,
               int'($urandom_range(0, 512)) - 256);
  end
  repeat (4) @(posedge clk); #1;
  while (!idle) begin @(posedge clk); #1; end
  repeat (4) @(posedge clk); #1;
endtask

always @(posedge clk)
  if (px_valid && px_pix < 8) begin
    sc_px_rgb[px_pix][0] = int'(px_rgb[0]);
    sc_px_rgb[px_pix][1] = int'(px_rgb[1]);
    sc_px_rgb[px_pix][2] = int'(px_rgb[2]);
    sc_px_t[px_pix]      = int'(px_t);
  end

// every point reaching integration: density and colour must match the model bit for bit
int sc_pt_checked = 0;
always @(posedge clk) if (`SC_PPU.im_v) begin
  int sg; int rgb [3]; int hs; int hc [3];
  sc_model(int'(`SC_PPU.cur.x), int'(`SC_PPU.cur.y), int'(`SC_PPU.cur.z), int'(`SC_PPU.cur.dx),
           int'(`SC_PPU.cur.dy), int'(`SC_PPU.cur.dz), sg, rgb);
  hs = int'(`SC_PPU.sigma_q);
  hc[0] = int'(`SC_PPU.rgb_q[0]); hc[1] = int'(`SC_PPU.rgb_q[1]); hc[2] = int'(`SC_PPU.rgb_q[2]);
  checks++; sc_pt_checked++;
  if (sg != hs || rgb[0] != hc[0] || rgb[1] != hc[1] || rgb[2] != hc[2]) begin
    failures++;
    $display("point (%0d,%0d,%0d): sigma %0d rgb %0d %0d %0d, expected %0d, %0d %0d %0d", `SC_PPU.cur.x, `SC_PPU.cur.y,
             `SC_PPU.cur.z, hs, hc[0], hc[1], hc[2], sg, rgb[0], rgb[1], rgb[2]);
  end
end

function automatic real sc_abs(real v); return v < 0.0 ? -v : v; endfunction

// read the tile back and compare, then check the event counters
task automatic sc_check();
  for (int p = 0; p < 8; p++) begin sc_px_t[p] = -1; sc_px_rgb[p] = '{-1, -1, -1}; end
  sc_cmd(OP_READ, TGT_SPM, 0, 0, 8);
  repeat (2) @(posedge clk); #1;
  for (int p = 0; p < 8; p++) begin
    checks++;
    if (sc_abs(real'(sc_px_t[p]) - sc_t[p] * 32768.0) > 32.0) begin
      failures++; $display("pixel %0d: T %0d expected %f", p, sc_px_t[p], sc_t[p] * 32768.0);
    end
    for (int ch = 0; ch < 3; ch++) begin
      checks++;
      if (sc_abs(real'(sc_px_rgb[p][ch]) - sc_c[p][ch] * 256.0) > 8.0) begin
        failures++; $display("pixel %0d ch %0d: %0d expected %f", p, ch, sc_px_rgb[p][ch], sc_c[p][ch] * 256.0);
      end
    end
  end
  $display("points done %0d skipped %0d masked %0d | lookups bitmap %0d COO %0d | mode switches %0d | memory stall cycles %0d",
           perf.points_done, perf.points_skipped, perf.points_masked, perf.bitmap_lookups, perf.coo_lookups,
           perf.mode_switches, perf.mem_stalls);
  checks += 7;
  if (sc_pt_checked != sc_exp_done) begin failures++; $display("%0d points checked, %0d expected", sc_pt_checked, sc_exp_done); end
  if (perf.points_done != 32'(sc_exp_done)) begin failures++; $display("points done %0d expected %0d", perf.points_done, sc_exp_done); end
  if (perf.points_skipped != 32'(sc_exp_skip) || sc_exp_skip == 0) begin failures++; $display("skips %0d expected %0d (must be > 0)", perf.points_skipped, sc_exp_skip); end
  if (perf.bitmap_lookups != 32'((SC_NT - 1) * sc_exp_done) || sc_exp_done == 0) begin failures++; $display("bitmap lookups wrong or none"); end
  if (perf.coo_lookups != 32'(sc_exp_done) || sc_exp_done == 0) begin failures++; $display("COO lookups wrong or none"); end
  if (perf.mode_switches != 32'(2 * sc_exp_done) || sc_exp_done == 0) begin failures++; $display("mode switches wrong or none"); end
  if (perf.mem_stalls == 0) begin failures++; $display("no memory stall happened"); end
endtask
