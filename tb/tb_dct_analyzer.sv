// tb_dct_analyzer: one-channel 16 x 16 images in 4 x 4 patches (a 4 x 4
// patch grid), a 20-atom dictionary that holds only the six lowest zigzag
// frequencies, identity inverse covariance and a threshold of 0.01.
//
// Benign patches are flat, so their DCT is a single DC term the
// dictionary reproduces exactly.  A checkerboard added to a patch puts
// most of its energy into high frequencies the dictionary lacks, so the
// patch must be flagged.  The first image carries a checkerboard on the
// 2 x 2 bottom-right patch block and on the isolated patch (0,0): the raw
// mask must hold all five, erosion must drop the isolated one and dilation
// must restore the block, so the final mask is the block alone, and those
// patches must leave the upsampler as zeros.  The second image is clean
// and must pass unchanged with no alarm.
module tb_dct_analyzer;
  import cleann_pkg::*;
  localparam int C = 1, IMG = 16, P = 4, M = 20, LAMBDA = 3, PE = 4, SIMD = 4;
  localparam int K = IMG / P, L = C * P * P;
  localparam real SCALE = 2048.0;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic dict_we = 1'b0, mu_we = 1'b0, sig_we = 1'b0;
  logic [15:0] dict_atom = '0, dict_elem = '0, mu_idx = '0, sig_row = '0, sig_col = '0;
  data_t dict_data = '0, mu_data = '0, sig_data = '0;
  acc_t eps2;
  logic start = 1'b0, in_valid = 1'b0, in_ready, out_valid, out_last, busy, done, d_da;
  data_t in_pix = '0, out_pix;
  logic [K*K-1:0] mask_raw, mask;

  dct_analyzer #(.C(C), .IMG(IMG), .P(P), .M(M), .LAMBDA(LAMBDA), .PE(PE), .SIMD(SIMD)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  data_t img [IMG][IMG];
  data_t exp_out [$];
  int    nout = 0, nzero = 0;

  always @(posedge clk) if (rst_n && out_valid) begin
    automatic data_t e = exp_out.pop_front();
    nout++;
    if (out_pix == '0 && e == '0) nzero++;
    checks++;
    if (out_pix !== e) begin failures++; $display("FAIL out pixel %0d: %0d exp %0d", nout, out_pix, e); end
  end

  function automatic bit trojan_patch(int pr, int pc);
    return (pr >= 2 && pc >= 2) || (pr == 0 && pc == 0);
  endfunction

  task automatic run_image(input bit with_trigger, input logic [K*K-1:0] exp_raw,
                           input logic [K*K-1:0] exp_mask);
    for (int y = 0; y < IMG; y++)
      for (int x = 0; x < IMG; x++) begin
        automatic int pr = y / P, pc = x / P;
        automatic int v = 205 + 102 * (pr + pc);                 // flat per patch
        if (with_trigger && trojan_patch(pr, pc)) v += ((y + x) % 2) ? 512 : -512;
        img[y][x] = data_t'(v);
      end
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    for (int y = 0; y < IMG; y++)
      for (int x = 0; x < IMG; x++) begin
        in_valid = 1'b1;
        in_pix = img[y][x];
        exp_out.push_back(exp_mask[(y / P) * K + x / P] ? '0 : img[y][x]);
        while (!in_ready) @(negedge clk);
        @(negedge clk);
      end
    in_valid = 1'b0;
    while (!done) @(negedge clk);
    chk(mask_raw === exp_raw, $sformatf("raw mask %h exp %h", mask_raw, exp_raw));
    chk(mask === exp_mask, $sformatf("mask %h exp %h", mask, exp_mask));
    chk(d_da === (exp_mask != '0), "d_da");
    chk(exp_out.size() == 0, "all pixels out");
  endtask

  initial begin
    logic [K*K-1:0] raw1, fin1;
    eps2 = acc_t'(41943);                  // 0.01 in Q22
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // dictionary: atom j = unit vector on zigzag coefficient j % 6
    for (int j = 0; j < M; j++)
      for (int i = 0; i < L; i++) begin
        @(negedge clk);
        dict_we = 1'b1; dict_atom = 16'(j); dict_elem = 16'(i);
        dict_data = (i == j % 6) ? data_t'(2047) : '0;
      end
    @(negedge clk);
    dict_we = 1'b0;
    for (int i = 0; i < L; i++) begin
      @(negedge clk);
      mu_we = 1'b1; mu_idx = 16'(i); mu_data = '0;
    end
    @(negedge clk);
    mu_we = 1'b0;
    for (int i = 0; i < L; i++)
      for (int j = 0; j < L; j++) begin
        @(negedge clk);
        sig_we = 1'b1; sig_row = 16'(i); sig_col = 16'(j);
        sig_data = (i == j) ? data_t'(2048) : '0;
      end
    @(negedge clk);
    sig_we = 1'b0;

    raw1 = '0;
    for (int pr = 0; pr < K; pr++)
      for (int pc = 0; pc < K; pc++) raw1[pr * K + pc] = trojan_patch(pr, pc);
    fin1 = '0;
    for (int pr = 2; pr < K; pr++)
      for (int pc = 2; pc < K; pc++) fin1[pr * K + pc] = 1'b1;
    run_image(1'b1, raw1, fin1);
    chk(nzero >= 4 * P * P, "suppressed patches output zeros");
    run_image(1'b0, '0, '0);
    chk(nout == 2 * IMG * IMG, "pixel count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
