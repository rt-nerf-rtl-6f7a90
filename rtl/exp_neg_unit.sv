// exp_neg_unit: e = exp(-s) for the volume-rendering integration.
//
// s is unsigned Q8.8 (s >= 0), e is unsigned Q1.15 (1.0 = 0x8000). The unit rewrites
// exp(-s) = 2^(-u) with u = s * log2(e): the integer part of u becomes a right shift and
// the fractional part indexes a 17-point table of 2^(-i/16), i = 0..16, that is linearly
// interpolated. Table entries are round(32768 * 2^(-i/16)); log2(e) is 23637 / 2^14.
// Maximum error is about 2e-4 (a few Q1.15 LSB). Combinational.
// This unit is this design's way of evaluating the paper's exp(); the paper gives only Eq. 1.
module exp_neg_unit (
  input  logic [15:0] s,
  output logic [15:0] e
);
  localparam logic [15:0] LUT [17] = '{
    16'd32768, 16'd31379, 16'd30048, 16'd28774, 16'd27554, 16'd26386, 16'd25268,
    16'd24196, 16'd23170, 16'd22188, 16'd21247, 16'd20347, 16'd19484, 16'd18658,
    16'd17867, 16'd17109, 16'd16384
  };

  logic [31:0] u_full;     // Q8.22
  logic [7:0]  k;          // integer part of u
  logic [3:0]  idx;        // first 4 fraction bits
  logic [17:0] fr;         // remaining 18 fraction bits
  logic [15:0] lo, hi;
  logic [33:0] interp;
  logic [15:0] m;

  always_comb begin
    u_full = 32'(s) * 32'd23637;          // Q8.8 * Q2.14 = Q10.22
    k      = u_full[29:22];
    idx    = u_full[21:18];
    fr     = u_full[17:0];
    lo     = LUT[idx];
    hi     = LUT[5'(idx) + 5'd1];
    interp = 34'(lo) * 34'd262144 - 34'(lo - hi) * 34'(fr);
    m      = interp[33:18];
    e      = (u_full[31:30] != 2'b00 || k >= 8'd16) ? 16'd0 : (m >> k);
  end
endmodule
