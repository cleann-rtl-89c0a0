// isqrt_iter: iterative integer square root, root = floor(sqrt(din)).
//
// Digit-by-digit (non-restoring) method, one result bit per cycle: a
// `start` pulse latches din, and W/2 + 1 cycles later `done` pulses with the
// root, which stays valid until the next start.  Used by the sparse-recovery
// core for the norm R[i,i] = ||eps||_2 of the Gram-Schmidt step; the paper
// does not say how that square root is computed, so this circuit is this
// design's choice.
module isqrt_iter #(
  parameter int W = 48
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [W-1:0]   din,
  output logic           done,
  output logic [W/2-1:0] root
);
  logic [W-1:0] op, res, one;
  logic         run;

  assign root = res[W/2-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      op   <= '0;
      res  <= '0;
      one  <= '0;
      run  <= 1'b0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        op  <= din;
        res <= '0;
        one <= W'(1) << (W - 2);
        run <= 1'b1;
      end else if (run) begin
        if (op >= res + one) begin
          op  <= op - (res + one);
          res <= (res >> 1) + one;
        end else begin
          res <= res >> 1;
        end
        one <= one >> 2;
        if (one == W'(1)) begin
          run  <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
