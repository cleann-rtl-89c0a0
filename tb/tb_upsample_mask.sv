// tb_upsample_mask: streams random 2-channel 8 x 8 images, with gaps, past
// random 2 x 2 patch masks (P = 4) and checks every output pixel: zero
// where its patch (y/4, x/4) is flagged, the input pixel otherwise, one
// cycle after it entered, with out_last on the final pixel only.
module tb_upsample_mask;
  import cleann_pkg::*;
  localparam int C = 2, IMG = 8, P = 4, K = 2;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear = 1'b0, in_valid = 1'b0, out_valid, out_last;
  logic [K*K-1:0] mask = '0;
  data_t in_pix = '0, out_pix;

  upsample_mask #(.C(C), .IMG(IMG), .P(P)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  data_t exp_q [$];
  logic  last_q [$];
  int    nout = 0;
  always @(posedge clk) if (rst_n && out_valid) begin
    automatic data_t e = exp_q.pop_front();
    automatic logic  l = last_q.pop_front();
    nout++;
    checks++;
    if (out_pix !== e || out_last !== l) begin
      failures++; $display("FAIL pixel %0d: %0d exp %0d last %0b", nout, out_pix, e, out_last);
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int img = 0; img < 4; img++) begin
      @(negedge clk);
      clear = 1'b1;
      mask = K*K'($urandom);
      @(negedge clk);
      clear = 1'b0;
      for (int c = 0; c < C; c++)
        for (int y = 0; y < IMG; y++)
          for (int x = 0; x < IMG; x++) begin
            in_valid = 1'b1;
            in_pix = data_t'($urandom);
            exp_q.push_back(mask[(y / P) * K + x / P] ? '0 : in_pix);
            last_q.push_back(c == C - 1 && y == IMG - 1 && x == IMG - 1);
            @(negedge clk);
            if ($urandom % 5 == 0) begin in_valid = 1'b0; @(negedge clk); end
          end
      in_valid = 1'b0;
      repeat (2) @(negedge clk);
    end
    checks++;
    if (nout != 4 * C * IMG * IMG || exp_q.size() != 0) begin failures++; $display("FAIL count %0d", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
