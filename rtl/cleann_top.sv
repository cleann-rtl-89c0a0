// cleann_top: the complete Trojan shield placed around a protected network.
//
// Two analyzers watch the network.  The DCT analyzer inspects the input
// image in the frequency domain, suppresses the patches whose DCT cannot be
// sparsely reconstructed from a dictionary of benign patches, and hands the
// masked image (out_*) to the network.  The feature analyzer receives the
// network's penultimate-layer features (feat), checks them the same way
// against a latent dictionary and returns denoised features (feat_out)
// for the network's last layers.  decision_agg turns the two alarms into a
// verdict: discard the sample if either analyzer fired, otherwise let the
// classification stand.  The network itself is outside this block.
//
// Configuration: every learned table is written through `cfg` (one element
// per cycle, target selected by cfg.tgt, see cleann_pkg); d_eps2 and f_eps2
// are the two outlier thresholds epsilon^2 in Q(2*FW).
// Sample flow: pulse `start` and stream the image (in_valid/in_ready/
// in_pix, channel-major raster).  da_done reports the DCT analyzer's
// decision.  Once the network has produced the features of the masked
// image, pulse feat_start with feat valid; fa_done reports the feature
// analyzer's decision and feat_out.  verdict_valid pulses with
// discard/classify; need_fa says the verdict waits for the features.
module cleann_top
  import cleann_pkg::*;
#(
  parameter int C        = D_CH,
  parameter int IMG      = D_IMG,
  parameter int P        = D_PATCH,
  parameter int D_M      = D_ATOMS,
  parameter int D_LAM    = D_LAMBDA,
  parameter int FEAT     = F_FEAT,
  parameter int R        = F_RANK,
  parameter int F_M      = F_ATOMS,
  parameter int F_LAM    = F_LAMBDA,
  parameter int PE       = MVM_P,
  parameter int SIMD     = MVM_SIMD
) (
  input  logic    clk,
  input  logic    rst_n,
  input  cfg_wr_t cfg,
  input  acc_t    d_eps2,
  input  acc_t    f_eps2,
  // input image
  input  logic    start,
  input  logic    in_valid,
  output logic    in_ready,
  input  data_t   in_pix,
  // masked image to the network
  output logic    out_valid,
  output logic    out_last,
  output data_t   out_pix,
  output logic    da_done,
  output logic    d_da,
  output logic [(IMG/P)*(IMG/P)-1:0] mask,
  // penultimate features from / to the network
  input  logic    feat_start,
  input  data_t   feat [FEAT],
  output data_t   feat_out [FEAT],
  output logic    fa_done,
  output logic    d_fa,
  // verdict
  output logic    need_fa,
  output logic    verdict_valid,
  output logic    discard,
  output logic    classify
);
  logic [(IMG/P)*(IMG/P)-1:0] mask_raw;

  function automatic logic sel(input cfg_wr_t c, input cfg_tgt_e t);
    return c.we && (c.tgt == t);
  endfunction

  dct_analyzer #(.C(C), .IMG(IMG), .P(P), .M(D_M), .LAMBDA(D_LAM),
                 .PE(PE), .SIMD(SIMD)) u_da (
    .clk, .rst_n,
    .dict_we(sel(cfg, CFG_D_DICT)), .dict_atom(cfg.row), .dict_elem(cfg.col),
    .dict_data(cfg.data),
    .mu_we(sel(cfg, CFG_D_MU)), .mu_idx(cfg.col), .mu_data(cfg.data),
    .sig_we(sel(cfg, CFG_D_SIGINV)), .sig_row(cfg.row), .sig_col(cfg.col),
    .sig_data(cfg.data), .eps2(d_eps2),
    .start, .in_valid, .in_ready, .in_pix,
    .out_valid, .out_last, .out_pix,
    .busy(), .done(da_done), .d_da, .mask_raw, .mask
  );

  feature_analyzer #(.FEAT(FEAT), .R(R), .M(F_M), .LAMBDA(F_LAM),
                     .PE(PE), .SIMD(SIMD)) u_fa (
    .clk, .rst_n,
    .dict_we(sel(cfg, CFG_F_DICT)), .dict_atom(cfg.row), .dict_elem(cfg.col),
    .dict_data(cfg.data),
    .mu_we(sel(cfg, CFG_F_MU)), .mu_idx(cfg.col), .mu_data(cfg.data),
    .sig_we(sel(cfg, CFG_F_SIGINV)), .sig_row(cfg.row), .sig_col(cfg.col),
    .sig_data(cfg.data),
    .wred_we(sel(cfg, CFG_F_WRED)), .wres_we(sel(cfg, CFG_F_WRES)),
    .w_row(cfg.row), .w_col(cfg.col), .w_data(cfg.data), .eps2(f_eps2),
    .start(feat_start), .feat, .busy(), .done(fa_done), .d_fa, .mdist(),
    .feat_out
  );

  decision_agg u_dec (
    .clk, .rst_n, .start,
    .da_done, .d_da, .fa_done, .d_fa,
    .need_fa, .verdict_valid, .discard, .classify
  );
endmodule
