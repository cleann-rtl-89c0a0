// tb_feature_analyzer: 16 features reduced to rank 8, a 10-atom latent
// dictionary (the 8 unit vectors plus two negated copies), sparsity 3,
// identity inverse covariance and a threshold of 0.01.
//
// The reduction keeps the first 8 features and the restoring matrix is its
// transpose, so the expected output is known in closed form: a benign
// vector with at most 3 non-zeros in the first 8 features comes back
// unchanged there (zeros elsewhere) with no alarm; a vector with 6
// non-zeros of distinct size comes back with only its 3 largest, and the
// distance equals the energy of the 3 dropped ones, which raises the alarm.
module tb_feature_analyzer;
  import cleann_pkg::*;
  localparam int FEAT = 16, R = 8, M = 10, LAMBDA = 3, PE = 4, SIMD = 4;
  localparam real SCALE = 2048.0, SCALE2 = 4194304.0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic dict_we = 1'b0, mu_we = 1'b0, sig_we = 1'b0, wred_we = 1'b0, wres_we = 1'b0;
  logic [15:0] dict_atom = '0, dict_elem = '0, mu_idx = '0, sig_row = '0, sig_col = '0;
  logic [15:0] w_row = '0, w_col = '0;
  data_t dict_data = '0, mu_data = '0, sig_data = '0, w_data = '0;
  acc_t eps2, mdist;
  logic start = 1'b0, busy, done, d_fa;
  data_t feat [FEAT], feat_out [FEAT];

  feature_analyzer #(.FEAT(FEAT), .R(R), .M(M), .LAMBDA(LAMBDA), .PE(PE), .SIMD(SIMD)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wr(ref logic we, input int r, input int c, input data_t v, ref logic [15:0] rr,
                    ref logic [15:0] cc, ref data_t dd);
    @(negedge clk);
    we = 1'b1; rr = 16'(r); cc = 16'(c); dd = v;
    @(negedge clk);
    we = 1'b0;
  endtask

  initial begin
    for (int i = 0; i < FEAT; i++) feat[i] = '0;
    eps2 = acc_t'(41943);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int j = 0; j < M; j++)
      for (int i = 0; i < R; i++)
        wr(dict_we, j, i, (i == j % 8) ? ((j >= 8) ? data_t'(-2048) : data_t'(2048)) : '0,
           dict_atom, dict_elem, dict_data);
    for (int i = 0; i < R; i++) wr(mu_we, 0, i, '0, sig_row, mu_idx, mu_data);
    for (int i = 0; i < R; i++)
      for (int j = 0; j < R; j++) wr(sig_we, i, j, (i == j) ? data_t'(2048) : '0, sig_row, sig_col, sig_data);
    for (int i = 0; i < R; i++)
      for (int j = 0; j < FEAT; j++) wr(wred_we, i, j, (i == j) ? data_t'(2048) : '0, w_row, w_col, w_data);
    for (int i = 0; i < FEAT; i++)
      for (int j = 0; j < R; j++) wr(wres_we, i, j, (i == j) ? data_t'(2048) : '0, w_row, w_col, w_data);

    for (int trial = 0; trial < 6; trial++) begin
      automatic bit troj = trial % 2;
      int  perm [R];
      int  keep [R];
      real dropped;
      dropped = 0.0;
      for (int i = 0; i < R; i++) perm[i] = i;
      for (int i = R - 1; i > 0; i--) begin
        automatic int j = $urandom % (i + 1);
        automatic int t = perm[i];
        perm[i] = perm[j]; perm[j] = t;
      end
      for (int i = 0; i < FEAT; i++) feat[i] = (i >= R) ? data_t'($urandom % 4096) : '0;
      for (int i = 0; i < R; i++) keep[i] = 0;
      // non-zeros of decreasing size; the first three are the ones kept
      for (int k = 0; k < (troj ? 6 : 3); k++) begin
        automatic int mag = 1843 - 205 * k;
        feat[perm[k]] = data_t'(($urandom % 2) ? mag : -mag);
        if (k < 3) keep[perm[k]] = 1;
        else dropped += (real'(mag) / SCALE) ** 2;
      end
      @(negedge clk);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      while (!done) @(negedge clk);
      chk(d_fa === troj, $sformatf("trial %0d alarm %0b", trial, d_fa));
      chk(real'(mdist) / SCALE2 - dropped < 0.002 && dropped - real'(mdist) / SCALE2 < 0.002,
          $sformatf("trial %0d distance %f exp %f", trial, real'(mdist) / SCALE2, dropped));
      for (int i = 0; i < FEAT; i++) begin
        automatic int e = (i < R && keep[i]) ? int'(feat[i]) : 0;
        automatic int g = int'(feat_out[i]);
        chk(g - e <= 2 && e - g <= 2, $sformatf("trial %0d feat_out[%0d] = %0d exp %0d", trial, i, g, e));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
