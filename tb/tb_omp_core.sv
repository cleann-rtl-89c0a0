// tb_omp_core: sparse recovery against a floating-point OMP model.
//
// A 12-atom dictionary of random unit-norm 10-element atoms is loaded;
// inputs are random combinations of up to three atoms.  For each input the
// model here runs OMP (argmax of |D^T r| over atoms not yet chosen, then
// Gram-Schmidt and the residual update) in double precision on the same
// quantised dictionary; the core's reconstruction and residual must match
// it within a fixed-point tolerance, reconstruction + residual must equal
// the input, and the run must take the number of cycles the schedule
// predicts.
module tb_omp_core;
  import cleann_pkg::*;
  localparam int L = 10, M = 12, LAMBDA = 3, P = 4, SIMD = 4;
  localparam int NPT = 3, NCH = 3;
  localparam real SCALE = 2048.0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic dict_we = 1'b0, start = 1'b0, busy, done;
  logic [15:0] dict_atom = '0, dict_elem = '0;
  data_t dict_data = '0;
  data_t x [L], recon [L], resid [L];

  omp_core #(.L(L), .M(M), .LAMBDA(LAMBDA), .P(P), .SIMD(SIMD)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real D [M][L];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic real urand();
    return (real'($urandom % 20001) / 10000.0) - 1.0;
  endfunction

  task automatic ref_omp(input real xr [L], output real rec [L], output real res [L]);
    real r [L], q [LAMBDA][L], e [L];
    bit  used [M];
    for (int i = 0; i < L; i++) r[i] = xr[i];
    for (int j = 0; j < M; j++) used[j] = 0;
    for (int it = 0; it < LAMBDA; it++) begin
      automatic int  bj = -1;
      automatic real bm = -1.0, nrm = 0.0, c = 0.0;
      for (int j = 0; j < M; j++) begin
        automatic real pj = 0.0;
        for (int i = 0; i < L; i++) pj += D[j][i] * r[i];
        if (pj < 0) pj = -pj;
        if (!used[j] && pj > bm) begin bm = pj; bj = j; end
      end
      used[bj] = 1;
      for (int i = 0; i < L; i++) e[i] = D[bj][i];
      for (int k = 0; k < it; k++) begin
        automatic real rk = 0.0;
        for (int i = 0; i < L; i++) rk += q[k][i] * e[i];
        for (int i = 0; i < L; i++) e[i] -= rk * q[k][i];
      end
      for (int i = 0; i < L; i++) nrm += e[i] * e[i];
      nrm = $sqrt(nrm);
      for (int i = 0; i < L; i++) q[it][i] = e[i] / nrm;
      for (int i = 0; i < L; i++) c += q[it][i] * r[i];
      for (int i = 0; i < L; i++) r[i] -= c * q[it][i];
    end
    for (int i = 0; i < L; i++) begin rec[i] = xr[i] - r[i]; res[i] = r[i]; end
  endtask

  // expected cycles from start to done (see the timing note of omp_core)
  function automatic int exp_cycles();
    int t = 2;
    for (int it = 0; it < LAMBDA; it++)
      t += (NCH + 1) * NPT + 4 + (NPT + 1) + it * 2 * NPT + NPT + (AW / 2 + 1)
           + (AW + 1) + NPT + 2 * NPT + 4;
    return t;
  endfunction

  initial begin
    for (int i = 0; i < L; i++) x[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int j = 0; j < M; j++) begin
      automatic real n = 0.0;
      for (int i = 0; i < L; i++) begin D[j][i] = urand(); n += D[j][i] * D[j][i]; end
      n = $sqrt(n);
      for (int i = 0; i < L; i++) begin
        @(negedge clk);
        dict_we = 1'b1; dict_atom = 16'(j); dict_elem = 16'(i);
        dict_data = data_t'($rtoi(D[j][i] / n * SCALE));
        D[j][i] = real'(dict_data) / SCALE;
      end
    end
    @(negedge clk);
    dict_we = 1'b0;
    for (int trial = 0; trial < 12; trial++) begin
      real xr [L], rec [L], res [L];
      int  t0;
      automatic int na = 1 + trial % 3;
      for (int i = 0; i < L; i++) xr[i] = 0.0;
      for (int a = 0; a < na; a++) begin
        automatic int  j = $urandom % M;
        automatic real g = 0.3 + 0.7 * ((urand() + 1.0) / 2.0);
        if ($urandom % 2) g = -g;
        for (int i = 0; i < L; i++) xr[i] += g * D[j][i];
      end
      if (trial >= 9) for (int i = 0; i < L; i++) xr[i] += 0.2 * urand();  // not sparse
      for (int i = 0; i < L; i++) begin
        x[i] = data_t'($rtoi(xr[i] * SCALE));
        xr[i] = real'(x[i]) / SCALE;
      end
      ref_omp(xr, rec, res);
      @(negedge clk);
      start = 1'b1;
      t0 = cyc;
      @(negedge clk);
      start = 1'b0;
      while (!done) @(negedge clk);
      checks++;
      if (cyc - t0 > exp_cycles() || cyc - t0 < exp_cycles() - 20) begin
        failures++; $display("FAIL trial %0d: %0d cycles, expected about %0d", trial, cyc - t0, exp_cycles());
      end
      for (int i = 0; i < L; i++) begin
        automatic real er = real'(recon[i]) / SCALE - rec[i];
        automatic real es = real'(resid[i]) / SCALE - res[i];
        checks++;
        if (er > 0.02 || er < -0.02 || es > 0.02 || es < -0.02) begin
          failures++;
          $display("FAIL trial %0d elem %0d: recon %f exp %f resid %f exp %f", trial, i,
                   real'(recon[i]) / SCALE, rec[i], real'(resid[i]) / SCALE, res[i]);
        end
        checks++;
        if (32'(recon[i]) + 32'(resid[i]) != 32'(x[i])) begin failures++; $display("FAIL recon+resid != x"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
