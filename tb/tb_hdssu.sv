// tb_hdssu: self-checking test of the high-density sparse search unit.
// Fills a small bitmap store (16 rows x 256 columns, about 40 % non-zero) with its row
// pointers and non-zero elements, then issues random lookups on both ports nearly every
// cycle and compares each answer, which must arrive exactly 3 cycles after its query,
// with the dense matrix kept by the testbench.
module tb_hdssu;
  import rtnerf_pkg::*;
  localparam int ROWS = 16, COLS = 256, NZ = 4096;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_en; tgt_e wr_tgt; logic [31:0] wr_addr; logic [63:0] wr_data;
  logic [1:0] q_valid; logic [1:0][3:0] q_row; logic [1:0][7:0] q_col;
  logic [1:0] r_valid, r_nonzero; data_t [1:0] r_data;

  hdssu #(.ROWS(ROWS), .COLS(COLS), .NZ_DEPTH(NZ), .PORTS(2)) dut (.*);

  data_t dense [ROWS][COLS];
  data_t nzlist [$];
  int    rowptr [ROWS];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(tgt_e t, int a, logic [63:0] d);
    wr_en = 1; wr_tgt = t; wr_addr = a; wr_data = d;
    @(posedge clk); #1;
    wr_en = 0;
  endtask

  typedef struct { data_t v; int cyc; } exp_t;
  exp_t expq0 [$];
  exp_t expq1 [$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check_port(int p, data_t d, logic nz);
    exp_t e;
    checks++;
    if ((p == 0 ? expq0.size() : expq1.size()) == 0) begin
      failures++; $display("unexpected result on port %0d", p);
      return;
    end
    e = (p == 0) ? expq0.pop_front() : expq1.pop_front();
    if (d !== e.v || (cyc - e.cyc) != 3 || nz !== (e.v != 0)) begin
      failures++;
      $display("port %0d: got %0d expected %0d, latency %0d", p, d, e.v, cyc - e.cyc);
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (r_valid[0]) check_port(0, r_data[0], r_nonzero[0]);
    if (r_valid[1]) check_port(1, r_data[1], r_nonzero[1]);
  end

  initial begin
    wr_en = 0; q_valid = 0; q_row = '0; q_col = '0; wr_tgt = TGT_BITMAP; wr_addr = 0; wr_data = 0;
    for (int r = 0; r < ROWS; r++) begin
      rowptr[r] = nzlist.size();
      for (int c = 0; c < COLS; c++) begin
        if ($urandom_range(99) < 40) begin
          data_t v;
          v = data_t'($urandom_range(1, 2000)) - 16'sd1000;
          if (v == 0) v = 1;
          dense[r][c] = v;
          nzlist.push_back(v);
        end else dense[r][c] = 0;
      end
    end
    repeat (3) @(posedge clk); rst_n = 1; #1;
    for (int r = 0; r < ROWS; r++) begin
      for (int w = 0; w < COLS/64; w++) begin
        logic [63:0] bits;
        for (int b = 0; b < 64; b++) bits[b] = (dense[r][64*w+b] != 0);
        wr(TGT_BITMAP, r*(COLS/64) + w, bits);
      end
      wr(TGT_ROWPTR, r, 64'(rowptr[r]));
    end
    while (nzlist.size() % 4 != 0) nzlist.push_back(0);
    for (int i = 0; i < nzlist.size(); i += 4)
      wr(TGT_NZ, i/4, {nzlist[i+3], nzlist[i+2], nzlist[i+1], nzlist[i]});
    // random pipelined lookups; the first ones hit columns 0 and 255
    for (int n = 0; n < 600; n++) begin
      for (int p = 0; p < 2; p++) begin
        int r, c;
        r = $urandom_range(ROWS-1);
        c = (n < 4) ? ((n % 2 == 1) ? 255 : 0) : $urandom_range(COLS-1);
        q_valid[p] = ($urandom_range(9) != 0);
        q_row[p] = 4'(r); q_col[p] = 8'(c);
        if (q_valid[p]) begin
          if (p == 0) expq0.push_back('{dense[r][c], cyc});
          else        expq1.push_back('{dense[r][c], cyc});
        end
      end
      @(posedge clk); #1;
    end
    q_valid = 0;
    repeat (8) @(posedge clk);
    checks++;
    if (expq0.size() != 0 || expq1.size() != 0) begin failures++; $display("missing results"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
