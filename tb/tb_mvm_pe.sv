// tb_mvm_pe: checks one processing element.  Random rows of 1..4
// partitions of SIMD weights and inputs are fed back to back; every dot
// product is compared with a sum computed here, and the result must appear
// exactly 2 cycles after the last partition was presented.
module tb_mvm_pe;
  import cleann_pkg::*;
  localparam int SIMD = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 1'b0, first = 1'b0, last = 1'b0, out_valid;
  data_t w [SIMD], x [SIMD];
  acc_t acc;

  mvm_pe #(.SIMD(SIMD)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  acc_t exp_q [$];
  int   t_last [$];
  int   cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && out_valid) begin
    automatic acc_t e = exp_q.pop_front();
    automatic int   t = t_last.pop_front();
    checks++;
    if (acc !== e) begin failures++; $display("FAIL dot %0d exp %0d", acc, e); end
    checks++;
    if (cyc - t != 2) begin failures++; $display("FAIL latency %0d", cyc - t); end
  end

  initial begin
    for (int s = 0; s < SIMD; s++) begin w[s] = '0; x[s] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    for (int row = 0; row < 40; row++) begin
      automatic int   np = 1 + ($urandom % 4);
      automatic acc_t sum = '0;
      for (int k = 0; k < np; k++) begin
        @(negedge clk);
        in_valid = 1'b1;
        first    = (k == 0);
        last     = (k == np - 1);
        for (int s = 0; s < SIMD; s++) begin
          w[s] = data_t'($urandom);
          x[s] = data_t'($urandom);
          sum += acc_t'(w[s]) * acc_t'(x[s]);
        end
        if (k == np - 1) begin exp_q.push_back(sum); t_last.push_back(cyc); end
        if ($urandom % 4 == 0) begin
          @(negedge clk);
          in_valid = 1'b0; first = 1'b0; last = 1'b0;
        end
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL missing results"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
