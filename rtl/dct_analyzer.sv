// dct_analyzer: frequency-domain Trojan detector at the network input.
//
// An image (C channels of IMG x IMG pixels) is split into K x K
// non-overlapping P x P patches, K = IMG/P.  For every patch:
//   DCT extraction  -> L = C*P*P zigzag-ordered coefficients,
//   sparse recovery -> OMP with the input dictionary (M atoms, LAMBDA),
//   outlier detection on the reconstruction error -> one mask bit.
// The K x K mask is then eroded and dilated (3 x 3) to drop isolated false
// alarms, the image is replayed through the nearest-neighbour upsampler
// that zeroes the flagged patches, and the detector's decision d_da is
// set if any bit of the final mask is set.  The masked image is what the
// protected network should classify.
//
// Interface: pulse `start`, then stream the C*IMG*IMG pixels in raster
// order, channel-major, one per cycle with in_valid (they are accepted
// while in_ready is high).  The masked image leaves on out_valid/out_pix
// (out_last on the final pixel), after which `done` pulses with d_da,
// mask_raw (outlier bits before morphology) and mask valid.
// Timing: C*IMG*IMG load cycles, then per patch about C*P*P (DCT) + the
// OMP latency + ceil(L/P)*ceil(L/SIMD) (distance), then C*IMG*IMG replay.
// The chain of stages follows the paper's DCT analyzer; patches are
// processed one at a time, which is this design's choice.
module dct_analyzer
  import cleann_pkg::*;
#(
  parameter int C      = D_CH,
  parameter int IMG    = D_IMG,
  parameter int P      = D_PATCH,
  parameter int M      = D_ATOMS,
  parameter int LAMBDA = D_LAMBDA,
  parameter int PE     = MVM_P,
  parameter int SIMD   = MVM_SIMD
) (
  input  logic  clk,
  input  logic  rst_n,
  // learned tables
  input  logic  dict_we,
  input  logic [15:0] dict_atom,
  input  logic [15:0] dict_elem,
  input  data_t dict_data,
  input  logic  mu_we,
  input  logic [15:0] mu_idx,
  input  data_t mu_data,
  input  logic  sig_we,
  input  logic [15:0] sig_row,
  input  logic [15:0] sig_col,
  input  data_t sig_data,
  input  acc_t  eps2,
  // image in
  input  logic  start,
  input  logic  in_valid,
  output logic  in_ready,
  input  data_t in_pix,
  // masked image out
  output logic  out_valid,
  output logic  out_last,
  output data_t out_pix,
  // decision
  output logic  busy,
  output logic  done,
  output logic  d_da,
  output logic [(IMG/P)*(IMG/P)-1:0] mask_raw,
  output logic [(IMG/P)*(IMG/P)-1:0] mask
);
  localparam int K  = IMG / P;
  localparam int KK = K * K;
  localparam int L  = C * P * P;

  typedef enum logic [3:0] {
    S_IDLE, S_LOAD, S_DCT, S_DCT_W, S_OMP_W, S_OLD_W, S_ERODE, S_DILATE,
    S_REPLAY, S_FINISH
  } state_e;
  state_e st;

  data_t img [C][IMG][IMG];
  int    lc, ly, lx;        // load / replay position
  int    pidx;              // patch index
  logic  morph_start_e, morph_start_d, ero_done, dil_done;
  logic [KK-1:0] eroded, dilated;

  // ---------------- per-patch pipeline ----------------
  data_t patch [C][P][P];
  always_comb begin
    automatic int py = pidx / K;
    automatic int px = pidx % K;
    for (int c = 0; c < C; c++)
      for (int i = 0; i < P; i++)
        for (int j = 0; j < P; j++)
          patch[c][i][j] = img[c][(py % K) * P + i][px * P + j];
  end

  logic  dct_start, dct_done, omp_start, omp_done, old_start, old_done, outl;
  data_t coef  [L];
  data_t recon [L];
  data_t resid [L];

  assign dct_start = (st == S_DCT);

  dct_extract #(.C(C), .P(P)) u_dct (
    .clk, .rst_n, .start(dct_start), .patch, .busy(), .done(dct_done), .coef
  );

  omp_core #(.L(L), .M(M), .LAMBDA(LAMBDA), .P(PE), .SIMD(SIMD)) u_sr (
    .clk, .rst_n,
    .dict_we, .dict_atom, .dict_elem, .dict_data,
    .start(omp_start), .x(coef), .busy(), .done(omp_done), .recon, .resid
  );

  outlier_detector #(.D(L), .P(PE), .SIMD(SIMD)) u_old (
    .clk, .rst_n,
    .mu_we, .mu_idx, .mu_data, .sig_we, .sig_row, .sig_col, .sig_data, .eps2,
    .start(old_start), .e(resid), .busy(), .done(old_done), .mdist(), .outlier(outl)
  );

  assign omp_start = (st == S_DCT_W) && dct_done;
  assign old_start = (st == S_OMP_W) && omp_done;

  // ---------------- morphology ----------------
  assign morph_start_e = (st == S_ERODE);
  assign morph_start_d = (st == S_DILATE) && ero_done;

  morph_filter #(.K(K), .DILATE(1'b0)) u_erode (
    .clk, .rst_n, .start(morph_start_e), .mask_in(mask_raw),
    .done(ero_done), .mask_out(eroded)
  );
  morph_filter #(.K(K), .DILATE(1'b1)) u_dilate (
    .clk, .rst_n, .start(morph_start_d), .mask_in(eroded),
    .done(dil_done), .mask_out(dilated)
  );

  // ---------------- upsampling and suppression ----------------
  logic rp_valid;
  assign rp_valid = (st == S_REPLAY);

  upsample_mask #(.C(C), .IMG(IMG), .P(P)) u_up (
    .clk, .rst_n, .clear(st == S_IDLE), .mask,
    .in_valid(rp_valid), .in_pix(img[lc][ly][lx]),
    .out_valid, .out_last, .out_pix
  );

  assign in_ready = (st == S_LOAD);
  assign busy     = (st != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= S_IDLE;
      lc       <= 0;
      ly       <= 0;
      lx       <= 0;
      pidx     <= 0;
      mask_raw <= '0;
      mask     <= '0;
      d_da     <= 1'b0;
      done     <= 1'b0;
      for (int c = 0; c < C; c++)
        for (int y = 0; y < IMG; y++)
          for (int x = 0; x < IMG; x++) img[c][y][x] <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          lc <= 0; ly <= 0; lx <= 0;
          st <= S_LOAD;
        end
        S_LOAD: if (in_valid) begin
          img[lc][ly][lx] <= in_pix;
          if (lx == IMG - 1) begin
            lx <= 0;
            if (ly == IMG - 1) begin
              ly <= 0;
              if (lc == C - 1) begin
                lc       <= 0;
                pidx     <= 0;
                mask_raw <= '0;
                st       <= S_DCT;
              end else lc <= lc + 1;
            end else ly <= ly + 1;
          end else lx <= lx + 1;
        end
        S_DCT:   st <= S_DCT_W;
        S_DCT_W: if (dct_done) st <= S_OMP_W;
        S_OMP_W: if (omp_done) st <= S_OLD_W;
        S_OLD_W: if (old_done) begin
          mask_raw[pidx] <= outl;
          if (pidx == KK - 1) st <= S_ERODE;
          else begin
            pidx <= pidx + 1;
            st   <= S_DCT;
          end
        end
        S_ERODE: st <= S_DILATE;
        S_DILATE: if (dil_done) begin
          mask <= dilated;
          d_da <= |dilated;
          st   <= S_REPLAY;
        end
        S_REPLAY: begin
          if (lx == IMG - 1) begin
            lx <= 0;
            if (ly == IMG - 1) begin
              ly <= 0;
              if (lc == C - 1) begin
                lc <= 0;
                st <= S_FINISH;
              end else lc <= lc + 1;
            end else ly <= ly + 1;
          end else lx <= lx + 1;
        end
        S_FINISH: if (out_last || !out_valid) begin
          done <= 1'b1;
          st   <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  initial assert (IMG % P == 0) else $error("IMG must be a multiple of P");
endmodule
