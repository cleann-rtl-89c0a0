// tb_udiv_iter: random and edge-case operands of the 48-bit iterative
// divider; checks quo = floor(num/den), the all-ones result of a zero
// divisor, and the latency of W + 1 cycles from start to done.
module tb_udiv_iter;
  localparam int W = 48;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, done;
  logic [W-1:0] num = '0, den = '0, quo;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  udiv_iter #(.W(W)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(input logic [W-1:0] n, input logic [W-1:0] d);
    logic [W-1:0] e;
    int cyc;
    @(negedge clk);
    num = n; den = d; start = 1'b1;
    @(negedge clk);
    start = 1'b0; num = '0; den = '0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    e = (d == '0) ? '1 : n / d;
    checks += 2;
    if (quo !== e) begin failures++; $display("FAIL %0d / %0d = %0d exp %0d", n, d, quo, e); end
    if (cyc != W + 1) begin failures++; $display("FAIL latency %0d", cyc); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    one(W'(1) << 33, W'(2048)); one(W'(1) << 33, W'(1)); one('1, W'(3)); one(W'(5), W'(7));
    one(W'(100), '0); one('0, W'(9));
    for (int t = 0; t < 300; t++)
      one(W'({$urandom, $urandom}), W'({$urandom, $urandom}) >> ($urandom % W));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
