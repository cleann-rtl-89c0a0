// tb_cleann_top: end-to-end test of the shield at its default (GTSRB) size:
// 3 x 32 x 32 images in 4 x 4 patches, a 1000-atom input dictionary with
// sparsity 5, 256 penultimate features reduced to 85, a 420-atom latent
// dictionary with sparsity 80, eight 8-lane processing elements.
//
// Learned tables, chosen so the expected result is known exactly:
//  - input dictionary: atom j is the unit vector on zigzag coefficient
//    j % 6 of channel (j / 6) % 3, so any patch that is flat in every channel
//    (its DCT is the three DC terms) is reconstructed exactly;
//  - latent dictionary: atom j is the unit vector e_(j % 85);
//  - reduction: the first 85 features; restoring: its transpose;
//  - means zero, inverse covariances the identity, thresholds 5e-4 and
//    3e-3 (the paper's GTSRB values).
// Samples:
//  A  image with a high-frequency trigger (a +-0.25 checkerboard) on the
//     2 x 2 patch block at the bottom right and on the isolated patch
//     (0,0): the raw mask holds all five, erosion removes (0,0) and the
//     block's inner edge, dilation restores the block; the sample is
//     discarded by the DCT analyzer and the block's pixels leave as zero.
//  B  clean image, features with 40 non-zeros among the first 85: no
//     alarm, the features come back unchanged, the sample is classified.
//  C  clean image, features with all 85 non-zero and distinct: the 80
//     largest are kept, the 5 smallest are the error, the feature analyzer
//     raises the alarm and the sample is discarded.
// Every mechanism is counted and a count of zero is a failure.  Cycles in
// which the weight fetch waits for a free bank are only reported: at this
// size a bank fills exactly as fast as it is consumed.  The
// sparse-recovery cycle shares of sample B are printed and the input
// analyzer's sparse recovery must be the largest, as in the paper's
// cycle breakdown.
module tb_cleann_top;
  import cleann_pkg::*;
  localparam int C = D_CH, IMG = D_IMG, P = D_PATCH, K = IMG / P, L = C * P * P;
  localparam int FEAT = F_FEAT, R = F_RANK;
  localparam real S2 = 4194304.0;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  cfg_wr_t cfg;
  acc_t    d_eps2, f_eps2;
  logic    start = 1'b0, in_valid = 1'b0, in_ready;
  data_t   in_pix = '0, out_pix;
  logic    out_valid, out_last, da_done, d_da;
  logic [K*K-1:0] mask;
  logic    feat_start = 1'b0, fa_done, d_fa;
  data_t   feat [FEAT], feat_out [FEAT];
  logic    need_fa, verdict_valid, discard, classify;

  cleann_top dut (.*);

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------- mechanism counters ----------------
  int n_da_alarm = 0, n_erode = 0, n_dilate = 0, n_suppress = 0, n_overlap = 0;
  int n_stall = 0, n_fa_alarm = 0, n_classify = 0, n_disc_da = 0, n_disc_fa = 0;
  int n_omp_iter = 0;
  longint cyc_dsr = 0, cyc_fsr = 0, cyc_all = 0;
  bit  measure = 1'b0;

  always @(posedge clk) if (rst_n) begin
    if (dut.u_da.u_sr.u_mvm.w_valid && !dut.u_da.u_sr.u_mvm.w_ready) n_stall++;
    if (dut.u_da.u_sr.u_mvm.w_valid && dut.u_da.u_sr.u_mvm.w_ready &&
        dut.u_da.u_sr.u_mvm.u_pp.rd_avail) n_overlap++;
    if (dut.u_fa.u_sr.u_sqrt.done) n_omp_iter++;
    if (dut.u_da.u_dilate.done) begin
      if ((dut.mask_raw & ~dut.u_da.eroded) != '0) n_erode++;
      if ((dut.u_da.dilated & ~dut.u_da.eroded) != '0) n_dilate++;
    end
    if (measure) begin
      cyc_all++;
      if (dut.u_da.u_sr.busy) cyc_dsr++;
      if (dut.u_fa.u_sr.busy) cyc_fsr++;
    end
  end

  // ---------------- image stream and checker ----------------
  data_t img [C][IMG][IMG];
  data_t exp_out [$];
  int    nout;

  always @(posedge clk) if (rst_n && out_valid) begin
    automatic data_t e = (exp_out.size() > 0) ? exp_out.pop_front() : data_t'(16'h7fff);
    nout++;
    checks++;
    if (out_pix !== e) begin
      failures++;
      if (failures < 20) $display("FAIL out pixel %0d: %0d exp %0d", nout, out_pix, e);
    end
  end

  function automatic bit trojan_patch(int pr, int pc);
    return (pr >= K - 2 && pc >= K - 2) || (pr == 0 && pc == 0);
  endfunction

  task automatic cfgw(input cfg_tgt_e t, input int r, input int c, input data_t v);
    @(negedge clk);
    cfg.we = 1'b1; cfg.tgt = t; cfg.row = 16'(r); cfg.col = 16'(c); cfg.data = v;
  endtask

  // Send one image and wait for the DCT analyzer's decision.
  task automatic send_image(input bit trig, input logic [K*K-1:0] exp_mask, input string nm);
    for (int c = 0; c < C; c++)
      for (int y = 0; y < IMG; y++)
        for (int x = 0; x < IMG; x++) begin
          automatic int pr = y / P, pc = x / P;
          automatic int v = 205 + 51 * (pr + pc) + 100 * c;
          if (trig && trojan_patch(pr, pc)) v += ((y + x) % 2) ? 512 : -512;
          img[c][y][x] = data_t'(v);
        end
    nout = 0;
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    for (int c = 0; c < C; c++)
      for (int y = 0; y < IMG; y++)
        for (int x = 0; x < IMG; x++) begin
          in_valid = 1'b1;
          in_pix = img[c][y][x];
          exp_out.push_back(exp_mask[(y / P) * K + x / P] ? '0 : img[c][y][x]);
          if (exp_mask[(y / P) * K + x / P]) n_suppress++;
          while (!in_ready) @(negedge clk);
          @(negedge clk);
        end
    in_valid = 1'b0;
    while (!da_done) @(negedge clk);
    chk(mask === exp_mask, $sformatf("%s mask %h exp %h", nm, mask, exp_mask));
    chk(d_da === (exp_mask != '0), $sformatf("%s d_da %0b", nm, d_da));
    chk(exp_out.size() == 0 && nout == C * IMG * IMG, $sformatf("%s %0d pixels out", nm, nout));
    if (d_da) n_da_alarm++;
  endtask

  // Supply features; troj selects all-85-non-zero vectors.
  task automatic send_feat(input bit troj, input string nm);
    int  perm [R];
    bit  keep [R];
    real dropped;
    dropped = 0.0;
    for (int i = 0; i < R; i++) begin perm[i] = i; keep[i] = 1'b0; end
    for (int i = R - 1; i > 0; i--) begin
      automatic int j = $urandom % (i + 1);
      automatic int t = perm[i];
      perm[i] = perm[j]; perm[j] = t;
    end
    for (int i = 0; i < FEAT; i++) feat[i] = (i >= R) ? data_t'($urandom % 4096) : '0;
    // k-th largest magnitude goes to position perm[k]
    for (int k = 0; k < (troj ? R : 40); k++) begin
      automatic int mag = 1885 - 20 * k;
      feat[perm[k]] = data_t'(($urandom % 2) ? mag : -mag);
      if (k < F_LAMBDA) keep[perm[k]] = 1'b1;
      else dropped += (real'(mag) / 2048.0) ** 2;
    end
    repeat (2) @(negedge clk);
    chk(need_fa === 1'b1, $sformatf("%s waits for the feature analyzer", nm));
    @(negedge clk);
    feat_start = 1'b1;
    @(negedge clk);
    feat_start = 1'b0;
    while (!fa_done) @(negedge clk);
    chk(d_fa === troj, $sformatf("%s d_fa %0b", nm, d_fa));
    chk(real'(dut.u_fa.mdist) / S2 - dropped < 0.002 && dropped - real'(dut.u_fa.mdist) / S2 < 0.002,
        $sformatf("%s distance %f exp %f", nm, real'(dut.u_fa.mdist) / S2, dropped));
    for (int i = 0; i < FEAT; i++) begin
      automatic int e = (i < R && keep[i]) ? int'(feat[i]) : 0;
      automatic int g = int'(feat_out[i]);
      chk(g - e <= 2 && e - g <= 2, $sformatf("%s feat_out[%0d] = %0d exp %0d", nm, i, g, e));
    end
    if (d_fa) n_fa_alarm++;
  endtask

  task automatic wait_verdict(input bit exp_discard, input string nm);
    while (!verdict_valid) @(negedge clk);
    chk(discard === exp_discard && classify === !exp_discard,
        $sformatf("%s verdict discard=%0b classify=%0b", nm, discard, classify));
  endtask

  initial begin
    logic [K*K-1:0] blk;
    longint t0;
    cfg = '0;
    d_eps2 = acc_t'(2097);               // 5e-4 in Q22
    f_eps2 = acc_t'(12583);              // 3e-3 in Q22
    for (int i = 0; i < FEAT; i++) feat[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // ---- learned tables ----
    for (int j = 0; j < D_ATOMS; j++)
      for (int i = 0; i < L; i++)
        cfgw(CFG_D_DICT, j, i, (i == ((j / 6) % C) * P * P + j % 6) ? data_t'(2048) : '0);
    for (int i = 0; i < L; i++) cfgw(CFG_D_MU, 0, i, '0);
    for (int i = 0; i < L; i++)
      for (int j = 0; j < L; j++) cfgw(CFG_D_SIGINV, i, j, (i == j) ? data_t'(2048) : '0);
    for (int j = 0; j < F_ATOMS; j++)
      for (int i = 0; i < R; i++) cfgw(CFG_F_DICT, j, i, (i == j % R) ? data_t'(2048) : '0);
    for (int i = 0; i < R; i++) cfgw(CFG_F_MU, 0, i, '0);
    for (int i = 0; i < R; i++)
      for (int j = 0; j < R; j++) cfgw(CFG_F_SIGINV, i, j, (i == j) ? data_t'(2048) : '0);
    for (int i = 0; i < R; i++)
      for (int j = 0; j < FEAT; j++) cfgw(CFG_F_WRED, i, j, (i == j) ? data_t'(2048) : '0);
    for (int i = 0; i < FEAT; i++)
      for (int j = 0; j < R; j++) cfgw(CFG_F_WRES, i, j, (i == j) ? data_t'(2048) : '0);
    @(negedge clk);
    cfg = '0;

    blk = '0;
    for (int pr = K - 2; pr < K; pr++)
      for (int pc = K - 2; pc < K; pc++) blk[pr * K + pc] = 1'b1;

    // ---- sample A: trigger in the image ----
    send_image(1'b1, blk, "A");
    wait_verdict(1'b1, "A");
    if (discard) n_disc_da++;
    chk(need_fa === 1'b0, "A needs no feature verdict");

    // ---- sample B: clean ----
    t0 = cyc_all;
    measure = 1'b1;
    send_image(1'b0, '0, "B");
    send_feat(1'b0, "B");
    wait_verdict(1'b0, "B");
    measure = 1'b0;
    if (classify) n_classify++;

    // ---- sample C: trigger in the features ----
    send_image(1'b0, '0, "C");
    send_feat(1'b1, "C");
    wait_verdict(1'b1, "C");
    if (discard) n_disc_fa++;

    $display("sample B: %0d cycles, input sparse recovery %0.1f%%, feature sparse recovery %0.1f%%",
             cyc_all, 100.0 * real'(cyc_dsr) / real'(cyc_all), 100.0 * real'(cyc_fsr) / real'(cyc_all));
    chk(cyc_dsr > cyc_fsr && 2 * cyc_dsr > cyc_all, "input sparse recovery dominates the cycles");
    $display("mechanisms: da_alarm=%0d erode=%0d dilate=%0d suppress=%0d pp_overlap=%0d pp_stall=%0d",
             n_da_alarm, n_erode, n_dilate, n_suppress, n_overlap, n_stall);
    $display("            fa_alarm=%0d fa_omp_iter=%0d classify=%0d discard_da=%0d discard_fa=%0d",
             n_fa_alarm, n_omp_iter, n_classify, n_disc_da, n_disc_fa);
    chk(n_da_alarm > 0, "DCT analyzer alarm happened");
    chk(n_erode > 0, "erosion removed a bit");
    chk(n_dilate > 0, "dilation restored a bit");
    chk(n_suppress > 0, "pixels were suppressed");
    chk(n_overlap > 0, "weight fetch overlapped computation");
    chk(n_fa_alarm > 0, "feature analyzer alarm happened");
    chk(n_omp_iter >= 2 * F_LAMBDA, "feature sparse recovery iterations ran");
    chk(n_classify > 0, "a sample was classified");
    chk(n_disc_da > 0, "a sample was discarded by the DCT analyzer");
    chk(n_disc_fa > 0, "a sample was discarded by the feature analyzer");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
