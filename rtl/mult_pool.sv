// mult_pool: the PPU's multiplier pool.
//
// LANES independent fixed-point multipliers. Each lane multiplies a vector element by a
// matrix element of the decomposed embedding grid (one term v * M of the density or
// appearance sum). Operands and results are Q7.8 data_t; the 32-bit product is shifted
// right by FRAC (truncation toward minus infinity) and saturated to 16 bits. One set of
// LANES products is accepted per cycle and returned one cycle later (in_valid ->
// out_valid), each with its lane-enable bit so that partially filled batches are marked.
// The paper gives the pool's purpose only; the lane count (equal to the adder tree's
// leaf count), the number format and the one-cycle latency are this design's choices.
module mult_pool
  import rtnerf_pkg::*;
#(
  parameter int LANES = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [LANES-1:0]     in_en,
  input  data_t [LANES-1:0]    a,
  input  data_t [LANES-1:0]    b,
  output logic                 out_valid,
  output logic [LANES-1:0]     out_en,
  output data_t [LANES-1:0]    p
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_en    <= '0;
    end else begin
      out_valid <= in_valid;
      out_en    <= in_valid ? in_en : '0;
    end
  end

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic signed [31:0] prod;
    assign prod = 32'(a[l]) * 32'(b[l]);
    always_ff @(posedge clk) begin
      if (in_valid) p[l] <= (in_en[l]) ? sat16(40'(prod >>> FRAC)) : data_t'(0);
    end
  end
endmodule
