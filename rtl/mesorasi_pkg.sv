// mesorasi_pkg: sizes and configuration types shared by the NPU and its
// aggregation unit.
//
// The numbers that come from the design point of the accelerator are: a 16x16
// systolic array, a 1.5 MB global buffer in 128 KB banks, a 64 KB point
// feature table (PFT) buffer in 32 banks of 2 KB, 4-byte words, a
// double-buffered neighbour index table (NIT) buffer of 128 entries per half
// with up to 64 neighbour indices of 12 bits, and two 256-word shift
// registers. The global-buffer line width (16 words, one per array row) and
// the layout of matrices in the global buffer are this design's own choices.
package mesorasi_pkg;

  localparam int WORD_W      = 32;   // 4-byte word
  localparam int ACC_W       = 64;   // PE accumulator
  localparam int SA_DIM      = 16;   // systolic array is SA_DIM x SA_DIM
  localparam int LINE_WORDS  = SA_DIM;
  localparam int GB_BANKS    = 12;   // 1.5 MB / 128 KB
  localparam int GB_BANK_LINES = (128 * 1024) / (LINE_WORDS * WORD_W / 8);  // 2048
  localparam int GB_ADDR_W   = $clog2(GB_BANKS * GB_BANK_LINES);            // 15

  localparam int PFT_BANKS      = 32;
  localparam int PFT_BANK_WORDS = (64 * 1024) / PFT_BANKS / (WORD_W / 8);   // 512
  localparam int PFT_AW         = $clog2(PFT_BANK_WORDS);                   // 9
  localparam int IDX_W          = 12;
  localparam int MAX_K          = 64;
  localparam int NIT_ENTRIES    = 128;
  localparam int SR_LEN         = 256;
  localparam int COL_W          = $clog2(SR_LEN + 1);                       // 9

  typedef logic signed [WORD_W-1:0] word_t;

  // One shared-MLP layer: Y[n x m] = act(X[n x k] * W[k x m]).
  // Matrices live in the global buffer as lines of 16 rows of one column:
  //   X line (x_base + rb*k + c) = X[16rb .. 16rb+15][c]
  //   W line (w_base + c*(m/16) + cb) = W[c][16cb .. 16cb+15]
  //   Y line (y_base + rb*m + c) = Y[16rb .. 16rb+15][c]
  //   BN lines (bn_base + 2cb) = scale[16cb..], (bn_base + 2cb + 1) = bias[16cb..]
  // With pool_rb != 0 the layer is max pooled: every group of pool_rb row
  // blocks (16*pool_rb points) gives one output row g holding the per-channel
  // maximum, written in the same Y layout (line y_base + (g/16)*m + c, word g%16).
  typedef struct packed {
    logic [GB_ADDR_W-1:0] x_base;
    logic [GB_ADDR_W-1:0] w_base;
    logic [GB_ADDR_W-1:0] y_base;
    logic [GB_ADDR_W-1:0] bn_base;
    logic [11:0]          n_rb;     // row blocks of 16 points
    logic [11:0]          k_in;     // input feature dimension
    logic [7:0]           n_cb;     // output column blocks of 16 channels
    logic [5:0]           shift;    // accumulator right shift
    logic                 relu_en;
    logic [11:0]          pool_rb;  // 0: no pooling, else row blocks per pooling group
  } mlp_cfg_t;

  // One aggregation pass over a whole PFT.
  typedef struct packed {
    logic [IDX_W:0]       n_in;     // PFT rows (input points)
    logic [IDX_W:0]       n_out;    // NIT entries (centroids)
    logic [6:0]           k;        // neighbours per entry, 1..MAX_K
    logic [COL_W-1:0]     m_out;    // PFT columns
    logic [COL_W-1:0]     cols;     // columns per partition, divides m_out
    logic [GB_ADDR_W-1:0] pft_base; // PFT in Y layout above
    logic [GB_ADDR_W-1:0] out_base; // result in Y layout, n_out rows x m_out
  } au_cfg_t;

endpackage
