// global_buffer: the PPU's global buffer, made of a data buffer and a sparse matrix buffer.
//
// Data buffer: a FIFO of pre-existing points (point_t) arriving from the serial
// processing units over the data bus; the PPU controller pops one point at a time.
// push is ignored while full, pop while empty; the head (pt_out) is visible whenever
// !pt_empty (first-word fall-through).
// Sparse matrix buffer: an SRAM of 64-bit words holding coordinate-encoded (COO) matrix
// data, namely the trunk-node thresholds and leaf entries (spm_entry_t) that configure
// the search sub-tree. One write port (from DMA), one read port with one cycle latency.
// The paper only names these buffers (Fig. 9(b)); their contents, depths and ports are
// this design's choices.
module global_buffer
  import rtnerf_pkg::*;
#(
  parameter int PT_DEPTH  = 16,
  parameter int SPM_DEPTH = 256
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // data buffer (point FIFO)
  input  logic                          pt_push,
  input  point_t                        pt_in,
  output logic                          pt_full,
  input  logic                          pt_pop,
  output point_t                        pt_out,
  output logic                          pt_empty,
  // sparse matrix buffer
  input  logic                          spm_we,
  input  logic [$clog2(SPM_DEPTH)-1:0]  spm_waddr,
  input  logic [63:0]                   spm_wdata,
  input  logic                          spm_re,
  input  logic [$clog2(SPM_DEPTH)-1:0]  spm_raddr,
  output logic [63:0]                   spm_rdata
);
  localparam int PA = $clog2(PT_DEPTH);

  point_t       fifo [PT_DEPTH];
  logic [PA:0]  wp, rp;

  assign pt_empty = (wp == rp);
  assign pt_full  = (wp[PA] != rp[PA]) && (wp[PA-1:0] == rp[PA-1:0]);
  assign pt_out   = fifo[rp[PA-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (pt_push && !pt_full)  wp <= wp + 1'b1;
      if (pt_pop  && !pt_empty) rp <= rp + 1'b1;
    end
  end
  always_ff @(posedge clk) begin
    if (pt_push && !pt_full) fifo[wp[PA-1:0]] <= pt_in;
  end

  logic [63:0] spm [SPM_DEPTH];
  always_ff @(posedge clk) begin
    if (spm_we) spm[spm_waddr] <= spm_wdata;
    if (spm_re) spm_rdata <= spm[spm_raddr];
  end
endmodule
