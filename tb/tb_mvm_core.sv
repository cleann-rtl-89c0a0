// tb_mvm_core: a 10 x 9 matrix held in a matrix_mem is multiplied with
// random vectors on a core of 4 PEs x 4 lanes.  Every output is compared
// with a product computed here, and the run must end within the expected
// cycle count: one chunk of weights is buffered ahead, then one column
// partition per cycle, (NCH + 1) * NPT + a few pipeline cycles.
module tb_mvm_core;
  import cleann_pkg::*;
  localparam int P = 4, SIMD = 4, ROWS = 10, COLS = 9;
  localparam int NCH = 3, NPT = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic we = 1'b0, start = 1'b0, busy, done;
  logic [15:0] wrow = '0, wcol = '0;
  data_t wdata = '0;
  logic  s_valid, s_ready, s_last, y_valid;
  data_t s_data [P][SIMD];
  data_t xv [NPT*SIMD];
  data_t x_data [SIMD];
  logic [$clog2(NPT+1)-1:0] x_part;
  logic [$clog2(NCH+1)-1:0] y_chunk;
  acc_t  y_data [P];
  data_t W [ROWS][COLS];

  matrix_mem #(.P(P), .SIMD(SIMD), .ROWS(ROWS), .COLS(COLS)) u_mem (
    .clk, .rst_n, .we, .wrow, .wcol, .wdata, .start, .s_valid, .s_ready, .s_last,
    .s_data, .vrow(16'd0), .vpart(16'd0), .vdata()
  );
  always_comb for (int s = 0; s < SIMD; s++) x_data[s] = xv[int'(x_part) * SIMD + s];
  mvm_core #(.P(P), .SIMD(SIMD), .ROWS(ROWS), .COLS(COLS)) dut (
    .clk, .rst_n, .start, .busy, .done,
    .w_valid(s_valid), .w_ready(s_ready), .w_last(s_last), .w_data(s_data),
    .x_part, .x_data, .y_valid, .y_chunk, .y_data
  );

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0, t0 = 0, nres = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (rst_n && y_valid) begin
    nres++;
    for (int p = 0; p < P; p++) begin
      automatic int   r = int'(y_chunk) * P + p;
      automatic acc_t e = '0;
      if (r < ROWS) for (int c = 0; c < COLS; c++) e += acc_t'(W[r][c]) * acc_t'(xv[c]);
      checks++;
      if (y_data[p] !== e) begin failures++; $display("FAIL y[%0d] = %0d exp %0d", r, y_data[p], e); end
    end
  end

  initial begin
    for (int i = 0; i < NPT * SIMD; i++) xv[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        @(negedge clk);
        W[r][c] = data_t'($urandom);
        we = 1'b1; wrow = 16'(r); wcol = 16'(c); wdata = W[r][c];
      end
    @(negedge clk);
    we = 1'b0;
    for (int run = 0; run < 4; run++) begin
      for (int i = 0; i < COLS; i++) xv[i] = data_t'($urandom);
      nres = 0;
      @(negedge clk);
      start = 1'b1;
      t0 = cyc;
      @(negedge clk);
      start = 1'b0;
      while (!done) @(negedge clk);
      checks++;
      if (cyc - t0 > (NCH + 1) * NPT + 6 || cyc - t0 < NCH * NPT) begin
        failures++; $display("FAIL cycles %0d", cyc - t0);
      end
      $display("run %0d: %0d cycles", run, cyc - t0);
      @(negedge clk);
      checks++;
      if (nres != NCH) begin failures++; $display("FAIL %0d result chunks", nres); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
