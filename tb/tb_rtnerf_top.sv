// tb_rtnerf_top: end-to-end test of the accelerator top at its default parameters (one
// PPU, the edge configuration). A behavioural DRAM with random stalls and 8-cycle latency
// sits on the top's memory port, behind the memory controller. The testbench plays the
// role of the serial processing units: it issues the PPU's commands on the control bus
// and hands it pre-existing points. Scene, reference model and checks come from
// ppu_scene.svh: 80 points into 8 pixels, pixels compared with the reference, and each
// mechanism counted and required (bitmap lookups, COO lookups through the search
// sub-tree, adder/mixed mode switches of the tree, early-termination skips, memory stalls).
module tb_rtnerf_top;
  import rtnerf_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cmd_valid, cmd_ready, pt_valid, pt_ready, px_valid, idle;
  cmd_t cmd; point_t pt;
  logic [PIX_W-1:0] px_pix; data_t [2:0] px_rgb; trans_t px_t;
  ppu_perf_t perf;
  logic dram_req_valid, dram_req_ready, dram_rsp_valid;
  logic [ADDR_W-1:0] dram_req_addr; logic [DRAM_W-1:0] dram_rsp_data;
  logic dram_req_tag, dram_rsp_tag;

  rtnerf_top dut (
    .clk, .rst_n,
    .cmd_valid, .cmd, .cmd_ready, .pt_valid, .pt, .pt_ready,
    .px_valid, .px_pix, .px_rgb, .px_t, .ppu_idle (idle), .perf,
    .dram_req_valid, .dram_req_addr, .dram_req_tag, .dram_req_ready,
    .dram_rsp_valid, .dram_rsp_tag, .dram_rsp_data
  );

  logic dram_stall;
  dram_model #(.TW(1), .LAT(8)) u_dram (
    .clk, .rst_n, .stall(dram_stall),
    .req_valid(dram_req_valid), .req_addr(dram_req_addr), .req_tag(dram_req_tag), .req_ready(dram_req_ready),
    .rsp_valid(dram_rsp_valid), .rsp_tag(dram_rsp_tag), .rsp_data(dram_rsp_data)
  );
  always @(posedge clk) dram_stall <= ($urandom_range(3) == 0);

  `define SC_PPU dut.g_ppu[0].u_ppu
  `include "ppu_scene.svh"

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cmd_valid = 0; cmd = '0; pt_valid = 0; pt = '0;
    sc_build();
    repeat (3) @(posedge clk); rst_n = 1; #1;
    sc_load();
    sc_points(80);
    sc_check();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
