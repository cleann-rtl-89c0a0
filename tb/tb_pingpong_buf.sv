// tb_pingpong_buf: fills the two-bank buffer with numbered chunks while a
// slow reader consumes them.  Checks that every tile reads back in order,
// that the writer is stalled while both banks are full, and that filling
// continues while the other bank is being read (overlap).
module tb_pingpong_buf;
  import cleann_pkg::*;
  localparam int P = 2, SIMD = 2, NPART = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_valid = 1'b0, wr_ready, wr_last = 1'b0, rd_avail, rd_release = 1'b0;
  data_t wr_data [P][SIMD], rd_data [P][SIMD];
  logic [$clog2(NPART+1)-1:0] rd_part = '0;

  pingpong_buf #(.P(P), .SIMD(SIMD), .NPART(NPART)) dut (.*);

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic data_t val(int ch, int pt, int p, int s);
    return data_t'(ch * 1000 + pt * 100 + p * 10 + s);
  endfunction

  localparam int NCHUNK = 6;
  int stalls = 0, overlap = 0;

  // writer
  initial begin
    for (int p = 0; p < P; p++) for (int s = 0; s < SIMD; s++) wr_data[p][s] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int ch = 0; ch < NCHUNK; ch++)
      for (int pt = 0; pt < NPART; pt++) begin
        @(negedge clk);
        wr_valid = 1'b1;
        wr_last  = (pt == NPART - 1);
        for (int p = 0; p < P; p++) for (int s = 0; s < SIMD; s++) wr_data[p][s] = val(ch, pt, p, s);
        while (!wr_ready) begin stalls++; @(negedge clk); end
        if (rd_avail) overlap++;
        @(posedge clk);
      end
    @(negedge clk);
    wr_valid = 1'b0;
  end

  // slow reader: 4 cycles per tile
  initial begin
    @(posedge rst_n);
    for (int ch = 0; ch < NCHUNK; ch++) begin
      do @(negedge clk); while (!rd_avail);
      for (int pt = 0; pt < NPART; pt++) begin
        rd_part = pt[$clog2(NPART+1)-1:0];
        repeat (3) @(negedge clk);
        #1;
        for (int p = 0; p < P; p++) for (int s = 0; s < SIMD; s++) begin
          checks++;
          if (rd_data[p][s] !== val(ch, pt, p, s)) begin
            failures++;
            $display("FAIL ch%0d pt%0d [%0d][%0d] = %0d", ch, pt, p, s, rd_data[p][s]);
          end
        end
        if (pt == NPART - 1) begin
          rd_release = 1'b1;
          @(negedge clk);
          rd_release = 1'b0;
        end
      end
    end
    repeat (3) @(negedge clk);
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL writer never stalled"); end
    checks++;
    if (overlap == 0) begin failures++; $display("FAIL no fill/read overlap"); end
    checks++;
    if (rd_avail) begin failures++; $display("FAIL bank still full"); end
    $display("stalls=%0d overlap=%0d", stalls, overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
