// integration_mask_unit: volume-rendering integration with early-ray-termination mask.
//
// For every pixel of the tile it keeps, in the selected point buffer, the partial result
// of the rendering sum of Eq. 1: the accumulated colour C (three Q7.8 channels) and the
// transmittance T (Q1.15) left so far. Because points reach the unit roughly front to back
// (the view-dependent order of sub-spaces), each point updates its pixel in place:
//     e = exp(-relu(sigma) * delta),  alpha = 1 - e
//     C <- C + T * alpha * c,         T <- T * e
// The point selection unit is the mask: a pixel whose T has fallen below T_TH is treated
// as terminated, its later points are dropped without update (upd_masked), and mq_visible
// lets the PPU controller skip such points before it spends lookups on them.
//
// Timing: one point per cycle. Cycle 1 registers relu(sigma) * delta (rounded to Q8.8,
// saturated at 255.996); cycle 2 evaluates
// exp, reads the pixel, and writes it back (read and write in the same cycle, so points of
// the same pixel may follow each other back to back). upd_valid pulses one cycle later.
// frame_clr resets every pixel to T = 1, C = 0 in one cycle (per-pixel "touched" flags).
// mq_* and rd_* are combinational reads of the buffer.
// From the paper: the integration of Eq. 1, the mask with a preset threshold, storing only
// partial sums. This design's choices: formats, the threshold, the relu on sigma, the
// exponential evaluation (exp_neg_unit) and the tile size.
module integration_mask_unit
  import rtnerf_pkg::*;
#(
  parameter int     PIX_DEPTH = 1 << PIX_W,
  parameter trans_t T_TH      = 16'd3          // about 1e-4 in Q1.15
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          frame_clr,
  // mask query (point selection)
  input  logic [$clog2(PIX_DEPTH)-1:0]  mq_pix,
  output logic                          mq_visible,
  // points
  input  logic                          in_valid,
  input  logic [$clog2(PIX_DEPTH)-1:0]  in_pix,
  input  data_t                         in_sigma,
  input  logic [15:0]                   in_delta,
  input  data_t [2:0]                   in_rgb,
  output logic                          upd_valid,
  output logic                          upd_masked,
  // pixel readout
  input  logic [$clog2(PIX_DEPTH)-1:0]  rd_pix,
  output data_t [2:0]                   rd_rgb,
  output trans_t                        rd_t
);
  localparam int PW = $clog2(PIX_DEPTH);

  // selected point buffer
  logic [PIX_DEPTH-1:0] touched;
  trans_t               t_mem [PIX_DEPTH];
  data_t [2:0]          c_mem [PIX_DEPTH];

  function automatic trans_t t_of(input logic [PW-1:0] px);
    return touched[px] ? t_mem[px] : T_ONE;
  endfunction

  assign mq_visible = (t_of(mq_pix) >= T_TH);
  assign rd_t       = t_of(rd_pix);
  assign rd_rgb     = touched[rd_pix] ? c_mem[rd_pix] : '0;

  // ---------------- stage 1: optical depth ----------------
  logic          v1;
  logic [PW-1:0] pix1;
  logic [15:0]   s1;
  data_t [2:0]   rgb1;
  logic [31:0]   sd;
  // Q16.16 product, plus half an LSB of the Q8.8 result so that the cut below rounds
  assign sd = (in_sigma[DATA_W-1] ? 32'd0 : 32'(in_sigma)) * 32'(in_delta) + 32'd128;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v1 <= 1'b0;
    else        v1 <= in_valid;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pix1 <= '0;
      rgb1 <= '0;
      s1   <= '0;
    end else begin
      pix1 <= in_pix;
      rgb1 <= in_rgb;
      s1   <= (sd[31:24] != 8'd0) ? 16'hffff : sd[23:8];
    end
  end

  // ---------------- stage 2: integrate ----------------
  logic [15:0] e2;
  exp_neg_unit u_exp (.s(s1), .e(e2));

  trans_t       t_old, t_new;
  data_t [2:0]  c_old, c_new;
  logic         live;
  logic [31:0]  w;        // T * alpha, Q1.15 after shift
  always_comb begin
    t_old = t_of(pix1);
    c_old = touched[pix1] ? c_mem[pix1] : '0;
    live  = (t_old >= T_TH);
    // products are rounded to nearest so that the error does not build up along a ray
    w     = (32'(t_old) * 32'(T_ONE - e2) + 32'd16384) >> 15;
    t_new = trans_t'((32'(t_old) * 32'(e2) + 32'd16384) >> 15);
    for (int ch = 0; ch < 3; ch++)
      c_new[ch] = sat16(40'(c_old[ch]) + (($signed({8'd0, w}) * 40'(rgb1[ch]) + 40'sd16384) >>> 15));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      touched    <= '0;
      upd_valid  <= 1'b0;
      upd_masked <= 1'b0;
    end else begin
      upd_valid  <= v1;
      upd_masked <= v1 && !live;
      if (frame_clr)         touched <= '0;
      else if (v1 && live)   touched[pix1] <= 1'b1;
    end
  end
  always_ff @(posedge clk) begin
    if (v1 && live && !frame_clr) begin
      t_mem[pix1] <= t_new;
      c_mem[pix1] <= c_new;
    end
  end
endmodule
