// tb_ppu: end-to-end test of one parallel processing unit at its default sizes, with a
// behavioural DRAM attached directly to its memory port (random stalls, 8-cycle latency).
// Loads the scene of ppu_scene.svh (bitmap matrices, one COO matrix in the search
// sub-tree, term table, MLP weights), renders 60 points into 8 pixels and compares the
// pixels with the reference model. Counts and requires each mechanism: bitmap lookups,
// COO lookups through the tree, adder/mixed mode switches of the tree, points skipped by
// the early-termination mask, and memory stalls.
module tb_ppu;
  import rtnerf_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cmd_valid, cmd_ready, pt_valid, pt_ready, px_valid, idle;
  cmd_t cmd; point_t pt;
  logic [PIX_W-1:0] px_pix; data_t [2:0] px_rgb; trans_t px_t;
  ppu_perf_t perf;
  logic req_valid, req_ready, rsp_valid; logic [ADDR_W-1:0] req_addr; logic [DRAM_W-1:0] rsp_data;
  logic rsp_tag;

  ppu dut (.*);

  logic dram_stall;
  dram_model #(.TW(1), .LAT(8)) u_dram (
    .clk, .rst_n, .stall(dram_stall),
    .req_valid, .req_addr, .req_tag(1'b0), .req_ready,
    .rsp_valid, .rsp_tag, .rsp_data
  );
  always @(posedge clk) dram_stall <= ($urandom_range(3) == 0);

  `define SC_PPU dut
  `include "ppu_scene.svh"

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cmd_valid = 0; cmd = '0; pt_valid = 0; pt = '0;
    sc_build();
    repeat (3) @(posedge clk); rst_n = 1; #1;
    sc_load();
    sc_points(60);
    sc_check();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
