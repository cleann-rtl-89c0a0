// tb_matrix_mem: loads a 5 x 7 matrix into a store with 2 x 4 tiles, then
// checks the tile stream (order, chunk markers and zero padding) while ready
// is withheld at random, and the row-vector read port.
module tb_matrix_mem;
  import cleann_pkg::*;
  localparam int P = 2, SIMD = 4, ROWS = 5, COLS = 7;
  localparam int NCH = 3, NPT = 2;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic we = 1'b0, start = 1'b0, s_valid, s_ready = 1'b0, s_last;
  logic [15:0] wrow = '0, wcol = '0, vrow = '0, vpart = '0;
  data_t wdata = '0, s_data [P][SIMD], vdata [SIMD];
  data_t ref_m [ROWS][COLS];

  matrix_mem #(.P(P), .SIMD(SIMD), .ROWS(ROWS), .COLS(COLS)) dut (.*);

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic data_t expv(int r, int c);
    return (r < ROWS && c < COLS) ? ref_m[r][c] : '0;
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        @(negedge clk);
        ref_m[r][c] = data_t'($urandom);
        we = 1'b1; wrow = 16'(r); wcol = 16'(c); wdata = ref_m[r][c];
      end
    @(negedge clk);
    we = 1'b0;
    // tile stream, ready held low at random: check contents with ready held high, sampling before the edge
    @(negedge clk);
    s_ready = 1'b0;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    for (int ch = 0; ch < NCH; ch++)
      for (int pt = 0; pt < NPT; pt++) begin
        s_ready = 1'b0;
        while (!s_valid) @(negedge clk);
        repeat ($urandom % 3) @(negedge clk);
        for (int p = 0; p < P; p++)
          for (int s = 0; s < SIMD; s++) begin
            checks++;
            if (s_data[p][s] !== expv(ch * P + p, pt * SIMD + s)) begin
              failures++;
              $display("FAIL tile ch%0d pt%0d [%0d][%0d]", ch, pt, p, s);
            end
          end
        checks++;
        if (s_last !== (pt == NPT - 1)) begin failures++; $display("FAIL s_last"); end
        s_ready = 1'b1;
        @(negedge clk);
      end
    s_ready = 1'b0;
    repeat (2) @(negedge clk);
    checks++;
    if (s_valid) begin failures++; $display("FAIL extra tile"); end
    // vector port
    for (int r = 0; r < ROWS; r++)
      for (int pt = 0; pt < NPT; pt++) begin
        vrow = 16'(r); vpart = 16'(pt);
        @(negedge clk);
        for (int s = 0; s < SIMD; s++) begin
          checks++;
          if (vdata[s] !== expv(r, pt * SIMD + s)) begin failures++; $display("FAIL vec r%0d pt%0d s%0d", r, pt, s); end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
