// hdssu: high-density sparse search unit.
//
// Decodes elements of matrices and vectors stored in the bitmap-based sparse format
// used for low-sparsity (< 80 % zeros) data. The format has three memories:
//   * sparse bitmap SRAM   one bit per element, 1 = non-zero, one COLS-bit row per matrix row;
//   * row pointer SRAM     for every row, the index of its first non-zero element;
//   * non-zero element SRAM every non-zero element, rows concatenated in order.
// A lookup of element (row, col) takes a fixed three cycles, as the paper specifies:
//   cycle 1  the bitmap row and the row pointer are read; bit [col] says whether the element
//            is non-zero (if not, the answer is zero);
//   cycle 2  the bits [0 .. col-1] of the row are counted by a binary adder tree of 1-bit
//            values and added to the row pointer, giving the element's address;
//   cycle 3  the non-zero element SRAM is read at that address.
// Lookups are fully pipelined: every one of the PORTS query ports accepts one lookup per
// cycle and answers exactly 3 cycles later (q_valid -> r_valid). The ports share the
// memories (each port is one of the paper's "index units"). The memories are written
// through one 64-bit write port: a bitmap word (64 bits of a row), a row pointer, or four
// non-zero elements. Several matrices and vectors share the memories by using different rows.
// The number of ports, the memory sizes and the write port are this design's choices.
module hdssu
  import rtnerf_pkg::*;
#(
  parameter int ROWS     = 8192,     // rows in the bitmap store (all matrices and vectors)
  parameter int COLS     = 256,      // columns per row = largest grid dimension
  parameter int NZ_DEPTH = 262144,   // non-zero elements
  parameter int PORTS    = 2
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // write port
  input  logic                          wr_en,
  input  tgt_e                          wr_tgt,     // TGT_BITMAP, TGT_ROWPTR or TGT_NZ
  input  logic [31:0]                   wr_addr,
  input  logic [63:0]                   wr_data,
  // query ports
  input  logic [PORTS-1:0]              q_valid,
  input  logic [PORTS-1:0][$clog2(ROWS)-1:0] q_row,
  input  logic [PORTS-1:0][$clog2(COLS)-1:0] q_col,
  output logic [PORTS-1:0]              r_valid,
  output logic [PORTS-1:0]              r_nonzero,
  output data_t [PORTS-1:0]             r_data
);
  localparam int RW  = $clog2(ROWS);
  localparam int CW  = $clog2(COLS);
  localparam int NW  = $clog2(NZ_DEPTH);
  localparam int WPR = COLS / 64;          // 64-bit words per bitmap row

  logic [COLS-1:0] bitmap  [ROWS];
  logic [NW-1:0]   row_ptr [ROWS];
  data_t           nz_mem  [NZ_DEPTH];

  // ---------------- write port ----------------
  always_ff @(posedge clk) begin
    if (wr_en) begin
      unique case (wr_tgt)
        TGT_BITMAP: bitmap[wr_addr[RW+$clog2(WPR)-1 -: RW]]
                          [64*int'(wr_addr[$clog2(WPR)-1:0]) +: 64] <= wr_data;
        TGT_ROWPTR: row_ptr[wr_addr[RW-1:0]] <= wr_data[NW-1:0];
        TGT_NZ: for (int k = 0; k < 4; k++)
                  nz_mem[{wr_addr[NW-3:0], 2'(k)}] <= data_t'(wr_data[16*k +: 16]);
        default: ;
      endcase
    end
  end

  // ---------------- lookup pipelines ----------------
  for (genvar p = 0; p < PORTS; p++) begin : g_port
    // stage 1
    logic            v1;
    logic [COLS-1:0] row1;
    logic [NW-1:0]   ptr1;
    logic [CW-1:0]   col1;
    // stage 2
    logic            v2, hit2;
    logic [NW-1:0]   addr2;
    // stage 3
    logic            v3, hit3;
    data_t           data3;

    logic            hit1;
    logic [CW:0]     ones_before;

    // Cycle 2 adder tree: number of ones in row1[0 .. col1-1].
    always_comb begin
      logic [COLS-1:0] masked;
      masked = row1 & ((COLS'(1) << col1) - COLS'(1));
      ones_before = '0;
      for (int i = 0; i < COLS; i++) ones_before = ones_before + (CW+1)'(masked[i]);
    end
    assign hit1 = row1[col1];

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        v1 <= 1'b0; v2 <= 1'b0; v3 <= 1'b0;
        hit2 <= 1'b0; hit3 <= 1'b0;
      end else begin
        v1 <= q_valid[p];
        v2 <= v1;
        hit2 <= v1 & hit1;
        v3 <= v2;
        hit3 <= hit2;
      end
    end

    always_ff @(posedge clk) begin
      // cycle 1: fetch the bitmap row and its start address
      row1  <= bitmap[q_row[p]];
      ptr1  <= row_ptr[q_row[p]];
      col1  <= q_col[p];
      // cycle 2: count preceding ones and form the element address
      addr2 <= ptr1 + NW'(ones_before);
      // cycle 3: fetch the element (zero when the bitmap bit was 0)
      data3 <= hit2 ? nz_mem[addr2] : data_t'(0);
    end

    assign r_valid[p]   = v3;
    assign r_nonzero[p] = hit3;
    assign r_data[p]    = data3;
  end

endmodule
