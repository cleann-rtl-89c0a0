// cleann_pkg: number format, default sizes and the configuration-bus types
// shared by every block of the Trojan shield.
//
// All vectors (pixels, DCT coefficients, dictionary atoms, features) are
// signed fixed point, DW bits wide with FW fraction bits (Q4.11: range
// [-16, 16), step 1/2048).  Products and sums are kept in AW-bit
// accumulators with 2*FW fraction bits until they are rounded back.  The
// word widths are this design's choice; the accelerator they describe was
// built with high-level synthesis and its number format is not published.
//
// The default sizes are those of the GTSRB benchmark, the one the hardware
// evaluation is carried out on: 3x32x32 images, 4x4 DCT windows (l = 48),
// a 1000-atom input dictionary with sparsity 5, and a latent analyzer with
// l = 85, m = 420 atoms and sparsity 80.
package cleann_pkg;

  // ---------------- number format ----------------
  localparam int DW = 16;           // data word
  localparam int FW = 11;           // fraction bits of a data word
  localparam int AW = 48;           // accumulator

  typedef logic signed [DW-1:0] data_t;
  typedef logic signed [AW-1:0] acc_t;

  localparam data_t DATA_MAX = data_t'({1'b0, {(DW-1){1'b1}}});
  localparam data_t DATA_MIN = data_t'({1'b1, {(DW-1){1'b0}}});

  // Saturate an accumulator value to a data word (no shift).
  function automatic data_t sat(input acc_t a);
    if (a > acc_t'(DATA_MAX)) return DATA_MAX;
    if (a < acc_t'(DATA_MIN)) return DATA_MIN;
    return data_t'(a);
  endfunction

  // Round a Q(2*FW) accumulator to a Q(FW) data word, with saturation.
  function automatic data_t rnd(input acc_t a);
    acc_t r;
    r = (a + (acc_t'(1) <<< (FW - 1))) >>> FW;
    return sat(r);
  endfunction

  // Fixed-point product a*b, rounded back to Q(FW).
  function automatic data_t qmul(input data_t a, input data_t b);
    return rnd(acc_t'(a) * acc_t'(b));
  endfunction

  // ---------------- default sizes (GTSRB, Table 2) ----------------
  localparam int D_CH     = 3;      // image channels
  localparam int D_IMG    = 32;     // image height = width
  localparam int D_PATCH  = 4;      // DCT window P
  localparam int D_ATOMS  = 1000;   // input dictionary columns m
  localparam int D_LAMBDA = 5;      // input sparsity
  localparam int F_FEAT   = 256;    // penultimate-layer width (assumed)
  localparam int F_RANK   = 85;     // SVD rank = latent l
  localparam int F_ATOMS  = 420;    // latent dictionary columns m
  localparam int F_LAMBDA = 80;     // latent sparsity
  localparam int MVM_P    = 8;      // PEs per MVM core
  localparam int MVM_SIMD = 8;      // lanes per PE

  // ---------------- configuration bus ----------------
  // One write port loads every learned table: dictionaries, inverse
  // covariances, means and the SVD projection matrices.
  typedef enum logic [2:0] {
    CFG_D_DICT   = 3'd0,  // input dictionary,   row = atom, col = element
    CFG_D_SIGINV = 3'd1,  // input Sigma^-1,     row, col
    CFG_D_MU     = 3'd2,  // input mean,         col
    CFG_F_DICT   = 3'd3,  // latent dictionary,  row = atom, col = element
    CFG_F_SIGINV = 3'd4,  // latent Sigma^-1
    CFG_F_MU     = 3'd5,  // latent mean
    CFG_F_WRED   = 3'd6,  // SVD reduction  W (rank x features)
    CFG_F_WRES   = 3'd7   // SVD restoring W (features x rank)
  } cfg_tgt_e;

  typedef struct packed {
    logic        we;
    cfg_tgt_e    tgt;
    logic [15:0] row;
    logic [15:0] col;
    data_t       data;
  } cfg_wr_t;

endpackage
