// tb_dct_extract: random patches through two instances, 2 channels of
// 4 x 4 and 1 channel of 8 x 8.  The orthonormal 2D DCT is computed here
// with $cos, reordered by a zigzag scan written independently of the
// block, and compared coefficient by coefficient within a few LSBs; the
// run must take C*P*P + 1 cycles.
module tb_dct_extract;
  import cleann_pkg::*;
  localparam real SCALE = 2048.0;
  localparam real PI = 3.14159265358979;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 1'b0, busy4, done4, busy8, done8;
  data_t patch4 [2][4][4], coef4 [32];
  data_t patch8 [1][8][8], coef8 [64];

  dct_extract #(.C(2), .P(4)) dut4 (.clk, .rst_n, .start, .patch(patch4), .busy(busy4), .done(done4), .coef(coef4));
  dct_extract #(.C(1), .P(8)) dut8 (.clk, .rst_n, .start, .patch(patch8), .busy(busy8), .done(done8), .coef(coef8));

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic real fabs(input real a);
    return (a < 0.0) ? -a : a;
  endfunction

  // zigzag position n -> (u, v) by walking the scan
  task automatic zz(input int P, input int n, output int u, output int v);
    int uu = 0, vv = 0;
    for (int k = 0; k < n; k++) begin
      if ((uu + vv) % 2 == 0) begin          // moving up-right
        if (vv == P - 1) uu++;
        else if (uu == 0) vv++;
        else begin uu--; vv++; end
      end else begin                          // moving down-left
        if (uu == P - 1) vv++;
        else if (vv == 0) uu++;
        else begin uu++; vv--; end
      end
    end
    u = uu; v = vv;
  endtask

  function automatic real dct_ref(input int P, input real px [8][8], input int u, input int v);
    real s = 0.0, cu, cv;
    cu = (u == 0) ? $sqrt(1.0 / P) : $sqrt(2.0 / P);
    cv = (v == 0) ? $sqrt(1.0 / P) : $sqrt(2.0 / P);
    for (int i = 0; i < P; i++)
      for (int j = 0; j < P; j++)
        s += px[i][j] * $cos(u * PI / P * (i + 0.5)) * $cos(v * PI / P * (j + 0.5));
    return cu * cv * s;
  endfunction

  initial begin
    real px [8][8];
    int  t0, u, v;
    for (int c = 0; c < 2; c++) for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) patch4[c][i][j] = '0;
    for (int i = 0; i < 8; i++) for (int j = 0; j < 8; j++) patch8[0][i][j] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int trial = 0; trial < 6; trial++) begin
      for (int c = 0; c < 2; c++) for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++)
        patch4[c][i][j] = data_t'($urandom % 2048);
      for (int i = 0; i < 8; i++) for (int j = 0; j < 8; j++)
        patch8[0][i][j] = data_t'((trial == 0) ? (((i + j) % 2) ? 1024 : 0) : ($urandom % 2048));
      @(negedge clk);
      start = 1'b1;
      t0 = cyc;
      @(negedge clk);
      start = 1'b0;
      while (!done4) @(negedge clk);
      checks++;
      if (cyc - t0 != 2 * 16 + 1) begin failures++; $display("FAIL P4 cycles %0d", cyc - t0); end
      while (!done8) @(negedge clk);
      checks++;
      if (cyc - t0 != 64 + 1) begin failures++; $display("FAIL P8 cycles %0d", cyc - t0); end
      for (int c = 0; c < 2; c++) begin
        for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) px[i][j] = real'(patch4[c][i][j]) / SCALE;
        for (int n = 0; n < 16; n++) begin
          automatic real r;
          zz(4, n, u, v);
          r = dct_ref(4, px, u, v);
          checks++;
          if (fabs(real'(coef4[c * 16 + n]) / SCALE - r) > 4.0 / SCALE) begin
            failures++; $display("FAIL P4 c%0d n%0d (%0d,%0d): %f exp %f", c, n, u, v, real'(coef4[c*16+n]) / SCALE, r);
          end
        end
      end
      for (int i = 0; i < 8; i++) for (int j = 0; j < 8; j++) px[i][j] = real'(patch8[0][i][j]) / SCALE;
      for (int n = 0; n < 64; n++) begin
        automatic real r;
        zz(8, n, u, v);
        r = dct_ref(8, px, u, v);
        checks++;
        if (fabs(real'(coef8[n]) / SCALE - r) > 6.0 / SCALE) begin
          failures++; $display("FAIL P8 n%0d (%0d,%0d): %f exp %f", n, u, v, real'(coef8[n]) / SCALE, r);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
