// rtnerf_pkg: types and constants shared by the RT-NeRF parallel processing unit (PPU)
// and the accelerator top.
//
// Number formats (this design's choice; the accelerator description gives none):
//   data_t   signed 16-bit fixed point, FRAC = 8 fractional bits (Q7.8). Embedding
//            elements, products, densities, MLP activations and colours use it.
//   trans_t  unsigned 16-bit transmittance T in Q1.15 (T_ONE = 1.0).
//   delta    unsigned Q8.8 ray-segment length t(k+1) - t(k).
//   coord_t  8-bit grid index; the decomposed matrices are at most 256 x 256.
//
// A point's density is the sum over "terms" j of v_j[c] * M_j[a, b] (TensoRF's
// vector-matrix decomposition). A term names the axis of its vector (X, Y or Z,
// which fixes which two point indices address the matrix), how its matrix is
// encoded (bitmap for sparsity < 80 %, coordinate list for >= 80 %), the row
// of its vector and the first row of its matrix in the bitmap store.
package rtnerf_pkg;

  localparam int DATA_W  = 16;
  localparam int FRAC    = 8;
  localparam int COORD_W = 8;
  localparam int PIX_W   = 10;   // pixel index inside the tile a PPU owns
  localparam int DRAM_W  = 64;   // DRAM / data-bus word
  localparam int ADDR_W  = 32;

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic        [15:0]       trans_t;
  typedef logic        [COORD_W-1:0] coord_t;

  localparam data_t  DATA_ONE = data_t'(1 << FRAC);
  localparam trans_t T_ONE    = 16'h8000;

  // Reconfiguration of the dual-purpose adder & search tree (paper Fig. 12).
  typedef enum logic {
    TREE_ADD   = 1'b0,   // (a) every sub-tree adds
    TREE_MIXED = 1'b1    // (b) sub-tree A adds, sub-tree B searches a COO matrix
  } tree_mode_e;

  typedef enum logic {
    ENC_BITMAP = 1'b0,
    ENC_COO    = 1'b1
  } enc_e;

  typedef enum logic [1:0] {
    AX_X = 2'd0,   // v^X[x] * M^{Y,Z}[y, z]
    AX_Y = 2'd1,   // v^Y[y] * M^{X,Z}[x, z]
    AX_Z = 2'd2    // v^Z[z] * M^{X,Y}[x, y]
  } axis_e;

  // One entry of the PPU's term table (packed into the low bits of a DRAM word).
  typedef struct packed {
    axis_e       axis;
    enc_e        enc;
    logic [12:0] vec_row;    // bitmap-store row holding the vector
    logic [12:0] mat_base;   // bitmap-store row of matrix row 0 (unused for COO)
  } term_t;

  // A pre-existing point handed from a serial processing unit to a PPU.
  typedef struct packed {
    logic [PIX_W-1:0] pix;
    coord_t           x;
    coord_t           y;
    coord_t           z;
    logic [15:0]      delta;
    data_t            dx;
    data_t            dy;
    data_t            dz;
  } point_t;

  // Control-bus commands to a PPU.
  typedef enum logic [2:0] {
    OP_LOAD      = 3'd0,   // copy count DRAM words into a local memory
    OP_TREE_LOAD = 3'd1,   // configure the search sub-tree from the sparse matrix buffer
    OP_FRAME     = 3'd2,   // reset every pixel of the tile to T = 1, C = 0
    OP_READ      = 3'd3    // stream count pixels out on the pixel port
  } op_e;

  typedef enum logic [2:0] {
    TGT_BITMAP = 3'd0,   // local_addr = row * (COLS/64) + word
    TGT_ROWPTR = 3'd1,   // local_addr = row
    TGT_NZ     = 3'd2,   // local_addr = non-zero element index, 4 elements per word
    TGT_TERM   = 3'd3,   // local_addr = term index
    TGT_WEIGHT = 3'd4,   // local_addr = weight row * (N_HID/4) + quarter
    TGT_SPM    = 3'd5    // local_addr = sparse matrix buffer entry
  } tgt_e;

  typedef struct packed {
    op_e               op;
    tgt_e              tgt;
    logic [ADDR_W-1:0] local_addr;
    logic [ADDR_W-1:0] dram_addr;
    logic [15:0]       count;
  } cmd_t;

  // Sparse matrix buffer entry: a threshold of a search-tree trunk node, or one
  // coordinate/value pair of a leaf crossbar register.
  typedef struct packed {
    logic        is_leaf;
    logic [6:0]  idx;      // trunk node (heap index) or leaf number
    logic [3:0]  slot;     // entry inside the leaf crossbar register
    logic        dim;      // trunk node compares 0: x, 1: y
    logic [2:0]  rsvd;
    coord_t      cx;
    coord_t      cy;
    logic [15:0] thr;
    data_t       value;
  } spm_entry_t;

  // Event counters of one PPU (wrap around at 2^32).
  typedef struct packed {
    logic [31:0] points_done;     // points integrated into their pixel
    logic [31:0] points_skipped;  // points dropped before lookup: pixel already opaque
    logic [31:0] points_masked;   // points dropped at integration: pixel became opaque
    logic [31:0] bitmap_lookups;  // matrix elements decoded by the bitmap search unit
    logic [31:0] coo_lookups;     // matrix elements decoded by the search sub-tree
    logic [31:0] mode_switches;   // adder <-> mixed reconfigurations of the tree
    logic [31:0] mem_stalls;      // cycles a DMA request waited for the memory port
  } ppu_perf_t;

  // Saturate a wide signed value to data_t.
  function automatic data_t sat16(input logic signed [39:0] v);
    if (v > 40'sd32767)       return data_t'(16'sh7fff);
    else if (v < -40'sd32768) return data_t'(16'sh8000);
    else                      return data_t'(v[15:0]);
  endfunction

endpackage
