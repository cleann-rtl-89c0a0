// decision_agg: the shield's decision flow for one sample.
//
// A sample is first judged by the DCT analyzer.  If it raised an alarm the
// sample is discarded at once and the feature analyzer's result is not
// waited for.  Otherwise the flow asks for the feature analyzer's verdict
// (need_fa) and discards the sample if that analyzer raised an alarm, or
// lets the classification stand if it did not.  An attack therefore only
// succeeds if both analyzers miss it.
//
// Interface: `start` opens a new sample; da_done/d_da and fa_done/d_fa are
// the analyzers' one-cycle completion strobes and decisions (a strobe that
// arrives while not waited for is ignored).  The verdict appears one cycle
// after the deciding strobe: verdict_valid pulses with exactly one of
// discard and classify set; both hold until the next start.  need_fa is high
// while the feature analyzer's decision is awaited.
// The decision order follows the paper's flowchart; the strobes are this
// design's choice.
// The lint notice that rst_n is used both asynchronously and synchronously
// stands: the synchronous use is only the `disable iff` of the handshake
// assertion, which is not logic.
module decision_agg (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  logic da_done,
  input  logic d_da,
  input  logic fa_done,
  input  logic d_fa,
  output logic need_fa,
  output logic verdict_valid,
  output logic discard,
  output logic classify
);
  typedef enum logic [1:0] {S_IDLE, S_WAIT_DA, S_WAIT_FA} state_e;
  state_e st;

  assign need_fa = (st == S_WAIT_FA);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st            <= S_IDLE;
      verdict_valid <= 1'b0;
      discard       <= 1'b0;
      classify      <= 1'b0;
    end else begin
      verdict_valid <= 1'b0;
      if (start) begin
        discard  <= 1'b0;
        classify <= 1'b0;
        st       <= S_WAIT_DA;
      end else begin
        unique case (st)
          S_WAIT_DA: if (da_done) begin
            if (d_da) begin
              discard       <= 1'b1;
              verdict_valid <= 1'b1;
              st            <= S_IDLE;
            end else begin
              st <= S_WAIT_FA;
            end
          end
          S_WAIT_FA: if (fa_done) begin
            discard       <= d_fa;
            classify      <= !d_fa;
            verdict_valid <= 1'b1;
            st            <= S_IDLE;
          end
          default: ;
        endcase
      end
    end
  end

  a_one_verdict: assert property (@(posedge clk) disable iff (!rst_n)
    verdict_valid |-> (discard ^ classify));
endmodule
