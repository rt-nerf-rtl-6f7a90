// dram_model: behavioural off-chip DRAM for the testbenches (not synthesisable).
// Accepts one read request per cycle when not stalled (req_ready = !stall) and returns
// the 64-bit word mem[addr % DEPTH] with the request's tag exactly LAT cycles later, in
// request order. The testbench fills mem hierarchically before the run.
module dram_model #(
  parameter int TW    = 1,
  parameter int LAT   = 8,
  parameter int DEPTH = 65536
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          stall,
  input  logic          req_valid,
  input  logic [31:0]   req_addr,
  input  logic [TW-1:0] req_tag,
  output logic          req_ready,
  output logic          rsp_valid,
  output logic [TW-1:0] rsp_tag,
  output logic [63:0]   rsp_data
);
  logic [63:0] mem [DEPTH];
  logic          pv [LAT];
  logic [TW-1:0] pt [LAT];
  logic [63:0]   pd [LAT];

  assign req_ready = !stall;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) begin pv[i] <= 1'b0; pt[i] <= '0; pd[i] <= '0; end
    end else begin
      pv[0] <= req_valid && !stall;
      pt[0] <= req_tag;
      pd[0] <= mem[req_addr % DEPTH];
      for (int i = 1; i < LAT; i++) begin pv[i] <= pv[i-1]; pt[i] <= pt[i-1]; pd[i] <= pd[i-1]; end
    end
  end
  assign rsp_valid = pv[LAT-1];
  assign rsp_tag   = pt[LAT-1];
  assign rsp_data  = pd[LAT-1];
endmodule
