// mem_ctrl: memory controller between the PPUs and the off-chip DRAM.
//
// NCLI clients (the PPUs' DMA engines) issue word read requests (req_valid/req_ready,
// valid-ready handshake). A round-robin arbiter grants one request per cycle to the DRAM
// memory port, tagging it with the client number. DRAM responses come back tagged and are
// driven onto the data bus: rsp_data is shared by all clients, and rsp_valid[i] marks the
// client it belongs to. The DRAM may return responses of different clients in any order
// but must keep each client's responses in request order.
// The paper gives the controller's role and its memory port (Fig. 9(a)); the read-only
// port, the round-robin policy and the tagging are this design's choices.
module mem_ctrl
  import rtnerf_pkg::*;
#(
  parameter int NCLI = 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // clients
  input  logic [NCLI-1:0]               req_valid,
  input  logic [NCLI-1:0][ADDR_W-1:0]   req_addr,
  output logic [NCLI-1:0]               req_ready,
  output logic [NCLI-1:0]               rsp_valid,
  output logic [DRAM_W-1:0]             rsp_data,
  // DRAM memory port
  output logic                          dram_req_valid,
  output logic [ADDR_W-1:0]             dram_req_addr,
  output logic [$clog2(NCLI+1)-1:0]     dram_req_tag,
  input  logic                          dram_req_ready,
  input  logic                          dram_rsp_valid,
  input  logic [$clog2(NCLI+1)-1:0]     dram_rsp_tag,
  input  logic [DRAM_W-1:0]             dram_rsp_data
);
  localparam int TW = $clog2(NCLI+1);

  logic [TW-1:0] last;      // client granted most recently
  logic [TW-1:0] grant;
  logic          any;

  always_comb begin
    any   = 1'b0;
    grant = '0;
    for (int k = 1; k <= NCLI; k++) begin
      int c;
      c = (int'(last) + k) % NCLI;
      if (!any && req_valid[c]) begin
        any   = 1'b1;
        grant = TW'(c);
      end
    end
  end

  assign dram_req_valid = any;
  assign dram_req_addr  = req_addr[grant];
  assign dram_req_tag   = grant;

  always_comb begin
    req_ready = '0;
    if (any && dram_req_ready) req_ready[grant] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                     last <= TW'(NCLI - 1);
    else if (any && dram_req_ready) last <= grant;
  end

  always_comb begin
    rsp_valid = '0;
    if (dram_rsp_valid && int'(dram_rsp_tag) < NCLI) rsp_valid[dram_rsp_tag] = 1'b1;
  end
  assign rsp_data = dram_rsp_data;
endmodule
