// tb_decision_agg: drives the four paths of the decision flow (DCT alarm;
// DCT clear then feature alarm; both clear; a feature strobe arriving
// before it is waited for) and checks verdict timing, discard / classify
// and need_fa against the expected outcome of each.
module tb_decision_agg;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 1'b0, da_done = 1'b0, d_da = 1'b0, fa_done = 1'b0, d_fa = 1'b0;
  logic need_fa, verdict_valid, discard, classify;

  decision_agg dut (.*);

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic pulse(ref logic s);
    s = 1'b1;
    @(negedge clk);
    s = 1'b0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int rep = 0; rep < 8; rep++) begin
      automatic int path = rep % 4;
      @(negedge clk);
      pulse(start);
      chk(!verdict_valid && !discard && !classify && !need_fa, "cleared at start");
      if (path == 3) begin              // early feature strobe is ignored
        d_fa = 1'b1;
        pulse(fa_done);
        chk(!verdict_valid, "early feature strobe ignored");
      end
      repeat ($urandom % 4) @(negedge clk);
      d_da = (path == 0);
      pulse(da_done);
      if (path == 0) begin
        chk(verdict_valid && discard && !classify && !need_fa, "DCT alarm discards");
        continue;
      end
      chk(!verdict_valid && need_fa, "waits for features");
      repeat (1 + $urandom % 4) @(negedge clk);
      chk(!verdict_valid && need_fa, "still waiting");
      d_fa = (path == 1);
      pulse(fa_done);
      if (path == 1) chk(verdict_valid && discard && !classify, "feature alarm discards");
      else           chk(verdict_valid && classify && !discard, "clean sample classified");
      chk(!need_fa, "need_fa dropped");
      @(negedge clk);
      chk(!verdict_valid && (discard ^ classify), "verdict holds");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
