// udiv_iter: iterative unsigned divider, quo = floor(num / den).
//
// Restoring division, one quotient bit per cycle: a `start` pulse latches
// num and den, and W + 1 cycles later `done` pulses with the quotient, which
// stays valid until the next start.  A zero divisor gives an all-ones
// quotient.  The sparse-recovery core uses it once per OMP iteration to
// form 1/R[i,i]; the divider circuit is this design's choice.
module udiv_iter #(
  parameter int W = 48
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] num,
  input  logic [W-1:0] den,
  output logic         done,
  output logic [W-1:0] quo
);
  logic [W-1:0] n_q, d_q, rem;
  logic [W:0]   trial;
  int           cnt;
  logic         run;

  assign trial = {rem, n_q[W-1]} - {1'b0, d_q};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_q  <= '0;
      d_q  <= '0;
      rem  <= '0;
      quo  <= '0;
      cnt  <= 0;
      run  <= 1'b0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        n_q <= num;
        d_q <= den;
        rem <= '0;
        quo <= '0;
        cnt <= 0;
        run <= 1'b1;
      end else if (run) begin
        if (!trial[W]) begin
          rem <= trial[W-1:0];
          quo <= {quo[W-2:0], 1'b1};
        end else begin
          rem <= {rem[W-2:0], n_q[W-1]};
          quo <= {quo[W-2:0], 1'b0};
        end
        n_q <= n_q << 1;
        cnt <= cnt + 1;
        if (cnt == W - 1) begin
          run  <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
