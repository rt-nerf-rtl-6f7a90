// tb_global_buffer: fills the point FIFO (data buffer) to full, checks that a push while
// full is dropped and that points leave in order, interleaves pushes and pops, and
// writes then reads back the sparse matrix buffer (one-cycle read latency).
module tb_global_buffer;
  import rtnerf_pkg::*;
  localparam int PD = 8, SD = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic pt_push, pt_full, pt_pop, pt_empty; point_t pt_in, pt_out;
  logic spm_we, spm_re; logic [4:0] spm_waddr, spm_raddr; logic [63:0] spm_wdata, spm_rdata;
  global_buffer #(.PT_DEPTH(PD), .SPM_DEPTH(SD)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  point_t model [$];
  logic [63:0] smem [SD];

  initial begin
    pt_push = 0; pt_pop = 0; pt_in = '0; spm_we = 0; spm_re = 0; spm_waddr = 0; spm_raddr = 0; spm_wdata = 0;
    repeat (2) @(posedge clk); rst_n = 1; #1;
    chk(pt_empty && !pt_full, "empty after reset");
    for (int i = 0; i < PD + 1; i++) begin
      pt_in = point_t'({$urandom, $urandom, $urandom, $urandom});
      pt_push = 1;
      if (i < PD) model.push_back(pt_in);
      @(posedge clk); #1;
    end
    pt_push = 0;
    chk(pt_full, "full after PD pushes");
    for (int i = 0; i < PD; i++) begin
      chk(!pt_empty && pt_out == model.pop_front(), "fifo order");
      pt_pop = 1; @(posedge clk); #1; pt_pop = 0;
    end
    chk(pt_empty, "empty after draining");
    for (int n = 0; n < 400; n++) begin
      pt_push = $urandom_range(1); pt_pop = $urandom_range(1);
      pt_in = point_t'({$urandom, $urandom, $urandom, $urandom});
      if (pt_pop && !pt_empty) chk(pt_out == model.pop_front(), "fifo order, random traffic");
      if (pt_push && !pt_full) model.push_back(pt_in);
      @(posedge clk); #1;
      chk(pt_empty == (model.size() == 0) && pt_full == (model.size() == PD), "flags follow occupancy");
    end
    pt_push = 0; pt_pop = 0;
    for (int i = 0; i < SD; i++) begin
      spm_we = 1; spm_waddr = 5'(i); spm_wdata = {$urandom, $urandom}; smem[i] = spm_wdata;
      @(posedge clk); #1;
    end
    spm_we = 0;
    for (int i = SD - 1; i >= 0; i--) begin
      spm_re = 1; spm_raddr = 5'(i);
      @(posedge clk); #1;
      chk(spm_rdata == smem[i], "sparse matrix buffer read");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
