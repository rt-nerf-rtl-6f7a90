// tb_mult_pool: random operand batches, including extreme values that saturate, on all
// lanes with random lane enables; every product is compared one cycle later with a
// product computed in the testbench (Q7.8 multiply, arithmetic shift, saturation).
module tb_mult_pool;
  import rtnerf_pkg::*;
  localparam int L = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid, out_valid; logic [L-1:0] in_en, out_en;
  data_t [L-1:0] a, b, p;
  mult_pool #(.LANES(L)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic data_t ref_mul(data_t x, data_t y);
    longint pr;
    pr = longint'(x) * longint'(y);
    pr = pr >>> 8;
    if (pr > 32767) return 16'sh7fff;
    if (pr < -32768) return 16'sh8000;
    return data_t'(pr);
  endfunction

  initial begin
    data_t ea [L]; data_t eb [L]; logic [L-1:0] een;
    in_valid = 0; in_en = 0; a = '0; b = '0;
    repeat (2) @(posedge clk); rst_n = 1; #1;
    for (int n = 0; n < 300; n++) begin
      for (int l = 0; l < L; l++) begin
        a[l] = (n < 10) ? data_t'(16'sh7fff - 16'(n)) : data_t'($urandom);
        b[l] = (n < 10) ? ((l % 2 == 1) ? data_t'(16'sh8000) : data_t'(16'sh7fff)) : data_t'($urandom_range(0, 2047)) - 16'sd1024;
        ea[l] = a[l]; eb[l] = b[l];
      end
      in_en = L'($urandom); een = in_en;
      in_valid = 1;
      @(posedge clk); #1;
      in_valid = 0;
      checks++;
      if (!out_valid || out_en !== een) begin failures++; $display("valid/enable wrong"); end
      for (int l = 0; l < L; l++) begin
        data_t e;
        e = een[l] ? ref_mul(ea[l], eb[l]) : data_t'(0);
        checks++;
        if (p[l] !== e) begin failures++; $display("lane %0d: %0d * %0d got %0d exp %0d", l, ea[l], eb[l], p[l], e); end
      end
      @(posedge clk); #1;
      checks++;
      if (out_valid) begin failures++; $display("out_valid stuck"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
