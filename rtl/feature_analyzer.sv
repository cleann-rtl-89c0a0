// feature_analyzer: Trojan detector and denoiser on the network's
// penultimate-layer features.
//
// A feature vector f of FEAT elements passes through
//   dimension reduction  z = W_red f          (R x FEAT, SVD basis),
//   sparse recovery      OMP of z with the latent dictionary (M atoms,
//                        LAMBDA iterations) -> reconstruction z~, error z - z~,
//   dimension restoring  f~ = W_res z~         (FEAT x R),
//   outlier detection    on the error z - z~ -> decision d_fa.
// f~ is the denoised feature vector that continues through the remaining
// layers of the network; removing the trigger's contribution this way is
// what lets the protected network recover the true class of a Trojan
// input.  Both projections run on their own MVM cores; restoring and
// outlier detection run at the same time.
//
// Interface: load the tables through the write ports, pulse `start` with
// feat valid; `done` pulses with d_fa, feat_out and mdist valid, held until
// the next start.  Timing: ceil(R/PE)*ceil(FEAT/SIMD) (reduction) + the
// OMP latency + max(ceil(FEAT/PE)*ceil(R/SIMD), ceil(R/PE)*ceil(R/SIMD))
// + a few cycles.
// The four stages and their roles follow the paper.  Where its drawing
// places outlier detection after dimension restoring, this design measures
// the error in the reduced space, where the sparse recovery produces it,
// so the inverse covariance is R x R (R is the feature size l of the
// paper's parameter table).
module feature_analyzer
  import cleann_pkg::*;
#(
  parameter int FEAT   = F_FEAT,
  parameter int R      = F_RANK,
  parameter int M      = F_ATOMS,
  parameter int LAMBDA = F_LAMBDA,
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
  input  logic  wred_we,
  input  logic  wres_we,
  input  logic [15:0] w_row,
  input  logic [15:0] w_col,
  input  data_t w_data,
  input  acc_t  eps2,
  // operation
  input  logic  start,
  input  data_t feat [FEAT],
  output logic  busy,
  output logic  done,
  output logic  d_fa,
  output acc_t  mdist,
  output data_t feat_out [FEAT]
);
  localparam int NPT_F = (FEAT + SIMD - 1) / SIMD;
  localparam int NPT_R = (R + SIMD - 1) / SIMD;

  typedef enum logic [2:0] {S_IDLE, S_RED, S_ZRDY, S_OMP, S_POST, S_FINISH} state_e;
  state_e st;

  data_t fin  [NPT_F*SIMD];
  data_t z    [R];
  data_t zrec [R];
  data_t zerr [R];
  data_t zr_p [NPT_R*SIMD];
  logic  res_done_q, old_done_q;

  // ---------------- dimension reduction ----------------
  logic  red_start, red_done, red_yv;
  logic  rs_valid, rs_ready, rs_last;
  data_t rs_data [PE][SIMD];
  data_t rx [SIMD];
  acc_t  ry [PE];
  logic [$clog2(NPT_F+1)-1:0] rx_part;
  logic [$clog2((R+PE-1)/PE+1)-1:0] ry_chunk;

  matrix_mem #(.P(PE), .SIMD(SIMD), .ROWS(R), .COLS(FEAT)) u_wred (
    .clk, .rst_n, .we(wred_we), .wrow(w_row), .wcol(w_col), .wdata(w_data),
    .start(red_start), .s_valid(rs_valid), .s_ready(rs_ready), .s_last(rs_last),
    .s_data(rs_data), .vrow(16'd0), .vpart(16'd0), .vdata()
  );
  always_comb for (int s = 0; s < SIMD; s++) rx[s] = fin[int'(rx_part) * SIMD + s];
  mvm_core #(.P(PE), .SIMD(SIMD), .ROWS(R), .COLS(FEAT)) u_red (
    .clk, .rst_n, .start(red_start), .busy(), .done(red_done),
    .w_valid(rs_valid), .w_ready(rs_ready), .w_last(rs_last), .w_data(rs_data),
    .x_part(rx_part), .x_data(rx), .y_valid(red_yv), .y_chunk(ry_chunk), .y_data(ry)
  );

  // ---------------- sparse recovery ----------------
  logic omp_start, omp_done;
  omp_core #(.L(R), .M(M), .LAMBDA(LAMBDA), .P(PE), .SIMD(SIMD)) u_sr (
    .clk, .rst_n, .dict_we, .dict_atom, .dict_elem, .dict_data,
    .start(omp_start), .x(z), .busy(), .done(omp_done), .recon(zrec), .resid(zerr)
  );

  // ---------------- dimension restoring ----------------
  logic  res_start, res_done, res_yv;
  logic  ts_valid, ts_ready, ts_last;
  data_t ts_data [PE][SIMD];
  data_t tx [SIMD];
  acc_t  ty [PE];
  logic [$clog2(NPT_R+1)-1:0] tx_part;
  logic [$clog2((FEAT+PE-1)/PE+1)-1:0] ty_chunk;

  matrix_mem #(.P(PE), .SIMD(SIMD), .ROWS(FEAT), .COLS(R)) u_wres (
    .clk, .rst_n, .we(wres_we), .wrow(w_row), .wcol(w_col), .wdata(w_data),
    .start(res_start), .s_valid(ts_valid), .s_ready(ts_ready), .s_last(ts_last),
    .s_data(ts_data), .vrow(16'd0), .vpart(16'd0), .vdata()
  );
  always_comb for (int s = 0; s < SIMD; s++) tx[s] = zr_p[int'(tx_part) * SIMD + s];
  mvm_core #(.P(PE), .SIMD(SIMD), .ROWS(FEAT), .COLS(R)) u_res (
    .clk, .rst_n, .start(res_start), .busy(), .done(res_done),
    .w_valid(ts_valid), .w_ready(ts_ready), .w_last(ts_last), .w_data(ts_data),
    .x_part(tx_part), .x_data(tx), .y_valid(res_yv), .y_chunk(ty_chunk), .y_data(ty)
  );

  // ---------------- outlier detection ----------------
  logic old_done, outl;
  outlier_detector #(.D(R), .P(PE), .SIMD(SIMD)) u_old (
    .clk, .rst_n, .mu_we, .mu_idx, .mu_data, .sig_we, .sig_row, .sig_col, .sig_data,
    .eps2, .start(res_start), .e(zerr), .busy(), .done(old_done), .mdist, .outlier(outl)
  );

  assign red_start = (st == S_IDLE) && start;
  assign omp_start = (st == S_ZRDY);
  assign res_start = (st == S_OMP) && omp_done;
  assign busy      = (st != S_IDLE);

  always_comb
    for (int i = 0; i < NPT_R * SIMD; i++) zr_p[i] = (i < R) ? zrec[i] : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= S_IDLE;
      done       <= 1'b0;
      d_fa       <= 1'b0;
      res_done_q <= 1'b0;
      old_done_q <= 1'b0;
      for (int i = 0; i < NPT_F * SIMD; i++) fin[i] <= '0;
      for (int i = 0; i < R; i++) z[i] <= '0;
      for (int i = 0; i < FEAT; i++) feat_out[i] <= '0;
    end else begin
      done <= 1'b0;
      if (red_yv)
        for (int p = 0; p < PE; p++)
          if (int'(ry_chunk) * PE + p < R) z[int'(ry_chunk) * PE + p] <= rnd(ry[p]);
      if (res_yv)
        for (int p = 0; p < PE; p++)
          if (int'(ty_chunk) * PE + p < FEAT)
            feat_out[int'(ty_chunk) * PE + p] <= rnd(ty[p]);
      unique case (st)
        S_IDLE: if (start) begin
          for (int i = 0; i < NPT_F * SIMD; i++) fin[i] <= (i < FEAT) ? feat[i] : '0;
          st <= S_RED;
        end
        S_RED: if (red_done) st <= S_ZRDY;   // last chunk of z lands this edge
        S_ZRDY: st <= S_OMP;
        S_OMP: if (omp_done) begin
          res_done_q <= 1'b0;
          old_done_q <= 1'b0;
          st         <= S_POST;
        end
        S_POST: begin
          if (res_done) res_done_q <= 1'b1;
          if (old_done) begin
            old_done_q <= 1'b1;
            d_fa       <= outl;
          end
          if ((res_done || res_done_q) && (old_done || old_done_q)) st <= S_FINISH;
        end
        S_FINISH: begin
          done <= 1'b1;
          st   <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
