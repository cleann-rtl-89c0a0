// mvm_pe: one processing element of the matrix-vector core.
//
// Each cycle with in_valid high the PE multiplies SIMD weights by the SIMD
// input elements shared by all PEs, sums the products in a binary adder
// tree and adds the sum to its accumulator.  `first` restarts the
// accumulator with the new partial sum, `last` marks the final partition
// of a row: one cycle after the last partition has been accumulated the
// finished dot product appears on `acc` with out_valid high for one cycle.
//
// Pipeline: products are registered (stage 1), then tree sum and
// accumulate (stage 2).  Latency from in_valid to out_valid is 2 cycles and
// a new partition is accepted every cycle.  The multiplier array, tree
// adder and accumulator follow the PE core drawing of the paper; the two
// pipeline stages are this design's choice.
module mvm_pe
  import cleann_pkg::*;
#(
  parameter int SIMD = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  logic  first,
  input  logic  last,
  input  data_t w [SIMD],
  input  data_t x [SIMD],
  output logic  out_valid,
  output acc_t  acc
);
  localparam int LV = (SIMD > 1) ? $clog2(SIMD) : 1;
  localparam int NP = 1 << LV;

  acc_t prod_q [NP];
  logic v1, f1, l1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0;
      f1 <= 1'b0;
      l1 <= 1'b0;
      for (int i = 0; i < NP; i++) prod_q[i] <= '0;
    end else begin
      v1 <= in_valid;
      f1 <= first;
      l1 <= last;
      if (in_valid)
        for (int i = 0; i < NP; i++)
          prod_q[i] <= (i < SIMD) ? acc_t'(w[i]) * acc_t'(x[i]) : '0;
    end
  end

  // Binary tree adder: level k holds NP >> k partial sums.
  acc_t tree [LV+1][NP];
  always_comb begin
    for (int k = 0; k <= LV; k++)
      for (int i = 0; i < NP; i++) tree[k][i] = '0;
    for (int i = 0; i < NP; i++) tree[0][i] = prod_q[i];
    for (int k = 1; k <= LV; k++)
      for (int i = 0; i < (NP >> k); i++)
        tree[k][i] = tree[k-1][2*i] + tree[k-1][2*i+1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= v1 && l1;
      if (v1) acc <= f1 ? tree[LV][0] : acc + tree[LV][0];
    end
  end
endmodule
