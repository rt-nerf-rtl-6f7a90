// tb_sparse_mlp_unit: loads random weights into the MLP's weight SRAM, runs it on random
// sparse feature vectors (some all-zero, some dense) and compares the outputs bit for bit
// with an integer model of the same fixed-point network. It also measures the cycles from
// the accepted start to done, which must be nnz(x) + nnz(hidden) + 3 (one cycle per
// non-zero input of each layer plus fixed overhead), confirming that zeros are skipped.
module tb_sparse_mlp_unit;
  import rtnerf_pkg::*;
  localparam int NI = 15, NH = 16, NO = 3;
  localparam int ROWS = NI + NH + 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic w_we, start, busy, done; logic [15:0] w_addr; logic [63:0] w_data;
  data_t [NI-1:0] x_in; data_t [NO-1:0] y;
  sparse_mlp_unit #(.N_IN(NI), .N_HID(NH), .N_OUT(NO)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int W [ROWS][NH];

  function automatic int sat(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  // reference model; returns the number of non-zero hidden activations
  function automatic int model(input int x [NI], output int yo [NO]);
    longint acc; int h [NH]; int nnz;
    nnz = 0;
    for (int o = 0; o < NH; o++) begin
      acc = longint'(W[NI][o]) <<< FRAC;
      for (int i = 0; i < NI; i++) acc += longint'(W[i][o]) * longint'(x[i]);
      h[o] = sat(acc >>> FRAC);
      if (h[o] < 0) h[o] = 0;
      if (h[o] != 0) nnz++;
    end
    for (int o = 0; o < NO; o++) begin
      acc = longint'(W[NI+NH+1][o]) <<< FRAC;
      for (int i = 0; i < NH; i++) acc += longint'(W[NI+1+i][o]) * longint'(h[i]);
      acc = acc >>> FRAC;
      yo[o] = (acc < 0) ? 0 : (acc > 256) ? 256 : int'(acc);
    end
    return nnz;
  endfunction

  initial begin
    int x [NI]; int yo [NO]; int nnz0, nnz1, cyc;
    w_we = 0; w_addr = 0; w_data = 0; start = 0; x_in = '0;
    repeat (2) @(posedge clk); rst_n = 1; #1;
    for (int r = 0; r < ROWS; r++)
      for (int o = 0; o < NH; o++) W[r][o] = int'($urandom_range(0, 200)) - 100;
    for (int r = 0; r < ROWS; r++)
      for (int q = 0; q < NH/4; q++) begin
        w_we = 1; w_addr = 16'(r * (NH/4) + q);
        for (int k = 0; k < 4; k++) w_data[16*k +: 16] = 16'(W[r][4*q+k]);
        @(posedge clk); #1;
      end
    w_we = 0;
    for (int n = 0; n < 300; n++) begin
      int dens;
      dens = (n < 5) ? 0 : (n < 10) ? 100 : $urandom_range(10, 90);
      nnz0 = 0;
      for (int i = 0; i < NI; i++) begin
        x[i] = ($urandom_range(99) < dens) ? int'($urandom_range(0, 1024)) - 512 : 0;
        if (x[i] != 0) nnz0++;
        x_in[i] = data_t'(x[i]);
      end
      nnz1 = model(x, yo);
      checks++;
      if (busy) begin failures++; $display("busy before start"); end
      start = 1; @(posedge clk); #1; start = 0;
      x_in = '0;   // inputs are captured at start
      cyc = 0;
      while (!done) begin @(posedge clk); #1; cyc++; end
      checks++;
      if (cyc != nnz0 + nnz1 + 3) begin
        failures++; $display("latency %0d expected %0d (nnz %0d + %0d)", cyc, nnz0 + nnz1 + 3, nnz0, nnz1);
      end
      for (int o = 0; o < NO; o++) begin
        checks++;
        if (int'(y[o]) != yo[o]) begin failures++; $display("test %0d out %0d: %0d vs %0d", n, o, y[o], yo[o]); end
      end
      if ($urandom_range(1)) @(posedge clk);
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
