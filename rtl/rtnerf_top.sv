// rtnerf_top: the RT-NeRF accelerator (paper Fig. 9(a)) without its serial processing units.
//
// N_PPU parallel processing units share one memory controller that connects them to the
// off-chip DRAM. The serial processing units (RISC-V cores with a shared floating-point
// unit, an instruction ROM and a local memory) that map pixels to rays and locate the
// pre-existing points are not part of this RTL: the signals with which they drive the
// control bus (commands, cmd_*) and the data bus (pre-existing points, pt_*) of each PPU
// are ports of this top, as is the DRAM memory port and each PPU's rendered-pixel stream.
// Data bus: DRAM words travel from the memory controller to all PPUs on one shared bus
// (rsp_data) with a per-PPU valid; each PPU's DMA requests go to the memory controller's
// round-robin arbiter. Control bus: one command channel (valid/ready) per PPU.
// Default N_PPU = 1 is the edge configuration (1 SPU + 1 PPU); the cloud configuration
// uses 30.
module rtnerf_top
  import rtnerf_pkg::*;
#(
  parameter int N_PPU = 1
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // control bus (from the serial processing units)
  input  logic      [N_PPU-1:0]             cmd_valid,
  input  cmd_t      [N_PPU-1:0]             cmd,
  output logic      [N_PPU-1:0]             cmd_ready,
  // pre-existing points (from the serial processing units)
  input  logic      [N_PPU-1:0]             pt_valid,
  input  point_t    [N_PPU-1:0]             pt,
  output logic      [N_PPU-1:0]             pt_ready,
  // rendered pixels
  output logic      [N_PPU-1:0]             px_valid,
  output logic      [N_PPU-1:0][PIX_W-1:0]  px_pix,
  output data_t     [N_PPU-1:0][2:0]        px_rgb,
  output trans_t    [N_PPU-1:0]             px_t,
  output logic      [N_PPU-1:0]             ppu_idle,
  output ppu_perf_t [N_PPU-1:0]             perf,
  // DRAM memory port
  output logic                              dram_req_valid,
  output logic      [ADDR_W-1:0]            dram_req_addr,
  output logic      [$clog2(N_PPU+1)-1:0]   dram_req_tag,
  input  logic                              dram_req_ready,
  input  logic                              dram_rsp_valid,
  input  logic      [$clog2(N_PPU+1)-1:0]   dram_rsp_tag,
  input  logic      [DRAM_W-1:0]            dram_rsp_data
);
  logic [N_PPU-1:0]             req_valid, req_ready, rsp_valid;
  logic [N_PPU-1:0][ADDR_W-1:0] req_addr;
  logic [DRAM_W-1:0]            rsp_data;      // shared data bus

  mem_ctrl #(.NCLI(N_PPU)) u_mc (
    .clk, .rst_n,
    .req_valid, .req_addr, .req_ready, .rsp_valid, .rsp_data,
    .dram_req_valid, .dram_req_addr, .dram_req_tag, .dram_req_ready,
    .dram_rsp_valid, .dram_rsp_tag, .dram_rsp_data
  );

  for (genvar i = 0; i < N_PPU; i++) begin : g_ppu
    ppu u_ppu (
      .clk, .rst_n,
      .cmd_valid (cmd_valid[i]), .cmd (cmd[i]), .cmd_ready (cmd_ready[i]),
      .pt_valid (pt_valid[i]), .pt (pt[i]), .pt_ready (pt_ready[i]),
      .req_valid (req_valid[i]), .req_addr (req_addr[i]), .req_ready (req_ready[i]),
      .rsp_valid (rsp_valid[i]), .rsp_data (rsp_data),
      .px_valid (px_valid[i]), .px_pix (px_pix[i]), .px_rgb (px_rgb[i]), .px_t (px_t[i]),
      .idle (ppu_idle[i]), .perf (perf[i])
    );
  end
endmodule
