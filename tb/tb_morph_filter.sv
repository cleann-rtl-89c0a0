// tb_morph_filter: random and hand-made 6 x 6 masks through an erosion and
// a dilation instance.  Each result is compared with a reference written
// here (every 3 x 3 neighbour set / any neighbour set, with positions off
// the mask counting as set for erosion and clear for dilation), and the
// hand-made case checks that an isolated bit is removed by erosion and a
// 2 x 2 corner block survives and is restored by dilation.
module tb_morph_filter;
  localparam int K = 6;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 1'b0, done_e, done_d;
  logic [K*K-1:0] mask_in = '0, out_e, out_d;

  morph_filter #(.K(K), .DILATE(1'b0)) dut_e (.clk, .rst_n, .start, .mask_in, .done(done_e), .mask_out(out_e));
  morph_filter #(.K(K), .DILATE(1'b1)) dut_d (.clk, .rst_n, .start, .mask_in, .done(done_d), .mask_out(out_d));

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic at(logic [K*K-1:0] m, int r, int c, logic outside);
    if (r < 0 || r >= K || c < 0 || c >= K) return outside;
    return m[r * K + c];
  endfunction

  function automatic logic [K*K-1:0] ref_morph(logic [K*K-1:0] m, bit dil);
    logic [K*K-1:0] o;
    for (int r = 0; r < K; r++)
      for (int c = 0; c < K; c++) begin
        int n = 0;
        for (int dr = -1; dr <= 1; dr++)
          for (int dc = -1; dc <= 1; dc++) n += at(m, r + dr, c + dc, !dil);
        o[r * K + c] = dil ? (n > 0) : (n == 9);
      end
    return o;
  endfunction

  task automatic apply(input logic [K*K-1:0] m);
    @(negedge clk);
    mask_in = m;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    checks++;
    if (!done_e || !done_d) begin failures++; $display("FAIL done timing"); end
    checks++;
    if (out_e !== ref_morph(m, 0)) begin failures++; $display("FAIL erosion %h", m); end
    checks++;
    if (out_d !== ref_morph(m, 1)) begin failures++; $display("FAIL dilation %h", m); end
  endtask

  initial begin
    logic [K*K-1:0] m, er;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 40; t++) begin
      m = {$urandom, $urandom};
      if (t % 2) m = m | {$urandom, $urandom};
      apply(m);
    end
    // isolated bit at (1,1), 2x2 block at the bottom-right corner
    m = '0;
    m[1 * K + 1] = 1'b1;
    m[4 * K + 4] = 1'b1; m[4 * K + 5] = 1'b1; m[5 * K + 4] = 1'b1; m[5 * K + 5] = 1'b1;
    apply(m);
    er = out_e;
    checks++;
    if (er[1 * K + 1] !== 1'b0 || er[5 * K + 5] !== 1'b1 || er[4 * K + 4] !== 1'b0) begin
      failures++; $display("FAIL hand-made erosion");
    end
    apply(er);
    checks++;
    if (out_d[4 * K + 4] !== 1'b1 || out_d[1 * K + 1] !== 1'b0) begin
      failures++; $display("FAIL hand-made dilation");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
