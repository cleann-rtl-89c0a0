// tb_isqrt_iter: random and edge-case operands of the 48-bit iterative
// square root; checks root^2 <= din < (root+1)^2 and the latency of W/2 + 1
// cycles from start to done.
module tb_isqrt_iter;
  localparam int W = 48;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, done;
  logic [W-1:0] din = '0;
  logic [W/2-1:0] root;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  isqrt_iter #(.W(W)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(input logic [W-1:0] v);
    longint unsigned r;
    int cyc;
    @(negedge clk);
    din = v; start = 1'b1;
    @(negedge clk);
    start = 1'b0; din = '0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    r = longint'(root);
    checks += 2;
    if (!(r * r <= longint'(v) && (r + 1) * (r + 1) > longint'(v))) begin
      failures++; $display("FAIL sqrt(%0d) = %0d", v, r);
    end
    if (cyc != W / 2 + 1) begin failures++; $display("FAIL latency %0d", cyc); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    one('0); one(W'(1)); one(W'(2)); one(W'(3)); one(W'(4)); one('1);
    one(W'(64'd4194304)); one(W'(64'd17592186044416));
    for (int t = 0; t < 200; t++) begin
      automatic logic [W-1:0] v = W'({$urandom, $urandom}) >> ($urandom % W);
      one(v);
      one(W'(longint'(v[W/2-1:0]) * longint'(v[W/2-1:0])));   // perfect squares
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
