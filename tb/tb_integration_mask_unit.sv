// tb_integration_mask_unit: drives points into a few pixels and compares the pixel
// buffer with a floating-point model of the rendering sum (real exp, no fixed point),
// allowing a small tolerance for the fixed-point formats. It checks one point per cycle
// back to back on the same pixel, the early-ray-termination mask (a pixel driven opaque
// stops updating, mq_visible drops, upd_masked pulses), and that frame_clr restores
// T = 1, C = 0.
module tb_integration_mask_unit;
  import rtnerf_pkg::*;
  localparam int PD = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic frame_clr, in_valid, upd_valid, upd_masked, mq_visible;
  logic [3:0] mq_pix, in_pix, rd_pix;
  data_t in_sigma; logic [15:0] in_delta; data_t [2:0] in_rgb, rd_rgb; trans_t rd_t;
  integration_mask_unit #(.PIX_DEPTH(PD)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real tr [PD];
  real cr [PD][3];
  int  masked_seen = 0, masked_exp = 0;
  always @(posedge clk) if (rst_n && upd_valid && upd_masked) masked_seen++;

  function automatic real absr(real v); return v < 0.0 ? -v : v; endfunction

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic point(int px, real sigma, real delta, real r, real g, real b);
    real e, w;
    in_valid = 1; in_pix = 4'(px);
    in_sigma = data_t'($rtoi(sigma * 256.0));
    in_delta = 16'($rtoi(delta * 256.0));
    in_rgb[0] = data_t'($rtoi(r * 256.0)); in_rgb[1] = data_t'($rtoi(g * 256.0)); in_rgb[2] = data_t'($rtoi(b * 256.0));
    // reference uses the quantised inputs
    sigma = real'(in_sigma) / 256.0; delta = real'(in_delta) / 256.0;
    if (tr[px] * 32768.0 < 3.0) masked_exp++;
    else begin
      if (sigma < 0) sigma = 0;
      // optical depth in the unit's Q8.8 format, rounded
      e = $exp(-real'($rtoi(sigma * delta * 256.0 + 0.5)) / 256.0);
      w = tr[px] * (1.0 - e);
      cr[px][0] += w * real'(in_rgb[0]) / 256.0;
      cr[px][1] += w * real'(in_rgb[1]) / 256.0;
      cr[px][2] += w * real'(in_rgb[2]) / 256.0;
      tr[px] *= e;
    end
    @(posedge clk); #1;
    in_valid = 0;
  endtask

  task automatic compare_all();
    repeat (3) @(posedge clk); #1;
    for (int p = 0; p < PD; p++) begin
      rd_pix = 4'(p); #1;
      chk(absr(real'(rd_t) - tr[p] * 32768.0) <= 24.0, $sformatf("T of pixel %0d: %0d vs %f", p, rd_t, tr[p] * 32768.0));
      for (int ch = 0; ch < 3; ch++) begin
        data_t c;
        c = rd_rgb[ch];
        chk(absr(real'(c) - cr[p][ch] * 256.0) <= 6.0,
            $sformatf("C[%0d] of pixel %0d: %0d vs %f", ch, p, c, cr[p][ch] * 256.0));
      end
    end
  endtask

  initial begin
    frame_clr = 0; in_valid = 0; in_pix = 0; mq_pix = 0; rd_pix = 0; in_sigma = 0; in_delta = 0; in_rgb = '0;
    for (int p = 0; p < PD; p++) begin tr[p] = 1.0; cr[p] = '{0.0, 0.0, 0.0}; end
    repeat (2) @(posedge clk); rst_n = 1; #1;
    compare_all();
    // back-to-back random points, several per pixel, pixels 0..7
    for (int n = 0; n < 200; n++)
      point($urandom_range(7), real'($urandom_range(0, 1200)) / 100.0 - 1.0,
            real'($urandom_range(1, 40)) / 100.0,
            real'($urandom_range(0, 256)) / 256.0, real'($urandom_range(0, 256)) / 256.0,
            real'($urandom_range(0, 256)) / 256.0);
    compare_all();
    // pixel 12 made opaque; later points must be masked
    point(12, 40.0, 1.0, 0.5, 0.25, 1.0);
    point(12, 40.0, 1.0, 0.5, 0.25, 1.0);
    repeat (3) @(posedge clk); #1;
    mq_pix = 12; #1;
    chk(!mq_visible, "opaque pixel reported invisible");
    mq_pix = 13; #1;
    chk(mq_visible, "untouched pixel visible");
    point(12, 2.0, 0.5, 1.0, 1.0, 1.0);
    point(12, 2.0, 0.5, 1.0, 1.0, 1.0);
    compare_all();
    chk(masked_seen == masked_exp && masked_exp >= 2, $sformatf("masked points %0d vs %0d", masked_seen, masked_exp));
    // frame reset
    frame_clr = 1; @(posedge clk); #1; frame_clr = 0;
    for (int p = 0; p < PD; p++) begin tr[p] = 1.0; cr[p] = '{0.0, 0.0, 0.0}; end
    compare_all();
    $display("masked points: %0d", masked_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
