// sparse_mlp_unit: the PPU's small MLP that turns appearance features and the viewing
// direction into a view-dependent RGB colour.
//
// Network (this design's choice, shaped after TensoRF's colour head): N_IN inputs (the
// appearance products of the decomposed grid followed by the direction dx, dy, dz),
// one hidden layer of N_HID ReLU units, N_OUT = 3 outputs clamped to [0, 1].
// Arithmetic is Q7.8 with 32-bit accumulators; each layer's result is saturated to 16 bits.
//
// Sparse matrix-vector product: the weight SRAM holds one row of N_HID weights per input
// (row-major by input, plus a bias row per layer), so one cycle applies one input value to
// all outputs with N_HID parallel multiply-accumulates. Inputs that are zero are skipped:
// a find-first-set over the non-zero mask of the feature vector picks the next non-zero
// input each cycle, so a layer costs one cycle per non-zero input. The two feature
// registers (feature SRAM) hold the input vector and the hidden activations.
//
// Weight SRAM layout (rows of N_HID values; written 4 values per 64-bit word at address
// row * (N_HID/4) + quarter):
//   rows 0 .. N_IN-1           layer-1 weights of input i
//   row  N_IN                  layer-1 bias
//   rows N_IN+1 .. N_IN+N_HID  layer-2 weights of hidden unit h (first N_OUT lanes used)
//   row  N_IN+N_HID+1          layer-2 bias
// Timing: start (with x_in) is taken while !busy; done is high for one cycle,
// nnz(x) + nnz(hidden) + 3 clock edges after the edge that took start; y then holds
// until the next result.
// The paper names the unit ("SpMM & SpMV", weight SRAM, feature SRAM) and its purpose;
// the network shape, the zero-skipping scheme and the formats are this design's.
module sparse_mlp_unit
  import rtnerf_pkg::*;
#(
  parameter int N_IN  = 15,
  parameter int N_HID = 16,
  parameter int N_OUT = 3
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // weight SRAM write port
  input  logic                 w_we,
  input  logic [15:0]          w_addr,
  input  logic [63:0]          w_data,
  // inference
  input  logic                 start,
  input  data_t [N_IN-1:0]     x_in,
  output logic                 busy,
  output logic                 done,
  output data_t [N_OUT-1:0]    y
);
  localparam int ROWS = N_IN + N_HID + 2;
  localparam int QW   = N_HID / 4;
  localparam int B0   = N_IN;
  localparam int L1   = N_IN + 1;
  localparam int B1   = N_IN + N_HID + 1;

  data_t [N_HID-1:0] wmem [ROWS];

  always_ff @(posedge clk) begin
    if (w_we)
      for (int k = 0; k < 4; k++)
        wmem[w_addr / 16'(QW)][4*(w_addr % 16'(QW)) + k] <= data_t'(w_data[16*k +: 16]);
  end

  typedef enum logic [1:0] {S_IDLE, S_L0, S_L1, S_OUT} state_e;
  state_e state;

  data_t [N_IN-1:0]        feat0;
  data_t [N_HID-1:0]       feat1;
  logic  [N_IN-1:0]        nz0;
  logic  [N_HID-1:0]       nz1;
  logic signed [31:0]      acc [N_HID];

  // next non-zero input of the current layer
  int unsigned i0, i1;
  always_comb begin
    i0 = 0;
    for (int i = N_IN-1; i >= 0; i--) if (nz0[i]) i0 = i;
    i1 = 0;
    for (int i = N_HID-1; i >= 0; i--) if (nz1[i]) i1 = i;
  end

  function automatic data_t relu_sat(input logic signed [31:0] v);
    data_t s;
    s = sat16(40'(v));
    return s[DATA_W-1] ? data_t'(0) : s;
  endfunction

  function automatic data_t clamp01(input logic signed [31:0] v);
    if (v < 0)                 return data_t'(0);
    else if (v > 32'(DATA_ONE)) return DATA_ONE;
    else                       return data_t'(v[15:0]);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      nz0   <= '0;
      nz1   <= '0;
      y     <= '0;
      feat0 <= '0;
      feat1 <= '0;
      for (int o = 0; o < N_HID; o++) acc[o] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          feat0 <= x_in;
          for (int i = 0; i < N_IN; i++) nz0[i] <= (x_in[i] != 0);
          for (int o = 0; o < N_HID; o++) acc[o] <= 32'(wmem[B0][o]) <<< FRAC;
          state <= S_L0;
        end
        S_L0: begin
          if (nz0 == '0) begin
            for (int o = 0; o < N_HID; o++) begin
              feat1[o] <= relu_sat(acc[o] >>> FRAC);
              nz1[o]   <= (relu_sat(acc[o] >>> FRAC) != 0);
              acc[o]   <= 32'(wmem[B1][o]) <<< FRAC;
            end
            state <= S_L1;
          end else begin
            for (int o = 0; o < N_HID; o++)
              acc[o] <= acc[o] + 32'(wmem[i0][o]) * 32'(feat0[i0]);
            nz0[i0] <= 1'b0;
          end
        end
        S_L1: begin
          if (nz1 == '0) begin
            for (int o = 0; o < N_OUT; o++) y[o] <= clamp01(acc[o] >>> FRAC);
            state <= S_OUT;
          end else begin
            for (int o = 0; o < N_HID; o++)
              acc[o] <= acc[o] + 32'(wmem[L1 + int'(i1)][o]) * 32'(feat1[i1]);
            nz1[i1] <= 1'b0;
          end
        end
        S_OUT: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
  assign busy = (state != S_IDLE);
endmodule
