// tb_mem_ctrl: three clients issue random-address read requests against a DRAM model
// with a random ready signal and a fixed response latency. Checks that every client gets
// exactly the words it asked for, in order, that rsp_valid marks only the owner, that no
// more than one client is granted per cycle, and that under full load the round-robin
// arbiter serves the clients equally (grant counts differ by at most one). Memory stalls
// (a client waiting while its request is not granted) are counted and must occur.
module tb_mem_ctrl;
  import rtnerf_pkg::*;
  localparam int NC = 3, TW = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [NC-1:0] req_valid, req_ready, rsp_valid;
  logic [NC-1:0][ADDR_W-1:0] req_addr;
  logic [DRAM_W-1:0] rsp_data;
  logic dram_req_valid, dram_req_ready, dram_rsp_valid;
  logic [ADDR_W-1:0] dram_req_addr;
  logic [TW-1:0] dram_req_tag, dram_rsp_tag;
  logic [DRAM_W-1:0] dram_rsp_data;
  mem_ctrl #(.NCLI(NC)) dut (.*);

  logic dram_stall;
  dram_model #(.TW(TW), .LAT(5)) u_dram (
    .clk, .rst_n, .stall(dram_stall),
    .req_valid(dram_req_valid), .req_addr(dram_req_addr), .req_tag(dram_req_tag), .req_ready(dram_req_ready),
    .rsp_valid(dram_rsp_valid), .rsp_tag(dram_rsp_tag), .rsp_data(dram_rsp_data)
  );

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] word_of(logic [31:0] a);
    return {a ^ 32'h5a5a_1234, ~a};
  endfunction

  logic [31:0] expq [NC][$];
  int grants [NC];
  int stalls = 0, received = 0;
  bit full_load = 0;

  always @(posedge clk) if (rst_n) begin
    checks++;
    if ($countones(req_ready) > 1) begin failures++; $display("two grants in one cycle"); end
    for (int c = 0; c < NC; c++) begin
      if (req_valid[c] && req_ready[c]) begin
        expq[c].push_back(req_addr[c]);
        if (full_load) grants[c]++;
      end
      if (req_valid[c] && !req_ready[c]) stalls++;
      if (rsp_valid[c]) begin
        logic [31:0] a;
        checks++; received++;
        if (expq[c].size() == 0) begin failures++; $display("client %0d: unexpected response", c); end
        else begin
          a = expq[c].pop_front();
          if (rsp_data !== word_of(a)) begin failures++; $display("client %0d: wrong data for %h", c, a); end
        end
      end
    end
  end

  initial begin
    int sent;
    req_valid = '0; req_addr = '0; dram_stall = 0;
    for (int i = 0; i < 4096; i++) u_dram.mem[i] = word_of(32'(i));
    repeat (2) @(posedge clk); rst_n = 1; #1;
    // phase 1: full load, DRAM always ready: fairness
    full_load = 1;
    req_valid = '1;
    for (int c = 0; c < NC; c++) req_addr[c] = 32'($urandom_range(4095));
    for (int n = 0; n < 300; n++) begin
      @(posedge clk); #1;
      for (int c = 0; c < NC; c++) req_addr[c] = 32'($urandom_range(4095));
    end
    req_valid = '0; full_load = 0;
    for (int c = 0; c < NC; c++) begin
      checks++;
      if (grants[c] < 99 || grants[c] > 101) begin failures++; $display("unfair: client %0d got %0d", c, grants[c]); end
    end
    // phase 2: random requests, random DRAM stalls
    for (int n = 0; n < 1500; n++) begin
      dram_stall = ($urandom_range(3) == 0);
      for (int c = 0; c < NC; c++)
        if (!req_valid[c] || req_ready[c]) begin
          req_valid[c] = ($urandom_range(1) == 0);
          req_addr[c] = 32'($urandom_range(4095));
        end
      @(posedge clk); #1;
    end
    // drain: keep pending requests until granted
    dram_stall = 0;
    while (req_valid != 0) begin
      for (int c = 0; c < NC; c++) if (req_ready[c]) req_valid[c] = 0;
      @(posedge clk); #1;
    end
    repeat (20) @(posedge clk);
    for (int c = 0; c < NC; c++) begin
      checks++;
      if (expq[c].size() != 0) begin failures++; $display("client %0d: %0d responses missing", c, expq[c].size()); end
    end
    checks++;
    if (stalls == 0) begin failures++; $display("no stall seen"); end
    $display("responses %0d, stall cycles %0d", received, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
