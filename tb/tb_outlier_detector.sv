// tb_outlier_detector: random means, symmetric inverse covariances and
// error vectors of 6 elements; the distance (e-mu) Sigma^-1 (e-mu)^T is
// computed here in double precision and compared with the block's value,
// and the outlier flag is checked against thresholds set just below and
// just above the true distance.
module tb_outlier_detector;
  import cleann_pkg::*;
  localparam int D = 6, P = 4, SIMD = 4;
  localparam real SCALE = 2048.0;
  localparam real SCALE2 = 4194304.0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic mu_we = 1'b0, sig_we = 1'b0, start = 1'b0, busy, done, outlier;
  logic [15:0] mu_idx = '0, sig_row = '0, sig_col = '0;
  data_t mu_data = '0, sig_data = '0;
  acc_t eps2 = '0, mdist;
  data_t e [D];

  outlier_detector #(.D(D), .P(P), .SIMD(SIMD)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  real mu [D], S [D][D];

  initial begin
    for (int i = 0; i < D; i++) e[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int trial = 0; trial < 8; trial++) begin
      real z [D], dref;
      int  t0;
      for (int i = 0; i < D; i++) begin
        @(negedge clk);
        mu_we = 1'b1; mu_idx = 16'(i); mu_data = data_t'(int'($urandom % 1025) - 512);
        mu[i] = real'(mu_data) / SCALE;
      end
      @(negedge clk);
      mu_we = 1'b0;
      for (int i = 0; i < D; i++)
        for (int j = i; j < D; j++) begin
          automatic data_t v = (i == j) ? data_t'(2048 + $urandom % 2048) : data_t'(int'($urandom % 513) - 256);
          S[i][j] = real'(v) / SCALE;
          S[j][i] = S[i][j];
          @(negedge clk);
          sig_we = 1'b1; sig_row = 16'(i); sig_col = 16'(j); sig_data = v;
          @(negedge clk);
          sig_row = 16'(j); sig_col = 16'(i);
        end
      @(negedge clk);
      sig_we = 1'b0;
      for (int i = 0; i < D; i++) begin
        e[i] = data_t'(int'($urandom % 2049) - 1024);
        z[i] = real'(e[i]) / SCALE - mu[i];
      end
      dref = 0.0;
      for (int i = 0; i < D; i++)
        for (int j = 0; j < D; j++) dref += z[i] * S[i][j] * z[j];
      eps2 = (trial % 2) ? acc_t'($rtoi(dref * SCALE2 * 0.9)) : acc_t'($rtoi(dref * SCALE2 * 1.1) + 10);
      @(negedge clk);
      start = 1'b1;
      t0 = cyc;
      @(negedge clk);
      start = 1'b0;
      while (!done) @(negedge clk);
      begin
        automatic real got = real'(mdist) / SCALE2;
        checks++;
        if (got - dref > 0.01 + 0.001 * dref || dref - got > 0.01 + 0.001 * dref) begin
          failures++; $display("FAIL trial %0d dist %f exp %f", trial, got, dref);
        end
        checks++;
        if (outlier !== (trial % 2 == 1)) begin failures++; $display("FAIL trial %0d outlier flag", trial); end
        checks++;
        if (cyc - t0 > 2 * 2 + 2 + 10 || cyc - t0 < 2 * 2) begin
          failures++; $display("FAIL cycles %0d", cyc - t0);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
