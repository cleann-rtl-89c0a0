// outlier_detector: flags a reconstruction-error vector that lies outside
// the benign distribution, using the multivariate Chebyshev bound.
//
// For an error vector e of D elements the block computes
//     z = e - mu,   y = Sigma^-1 z   (MVM core),   mdist = z . y
// and raises `outlier` when mdist >= eps2.  mu and Sigma^-1 are learned
// offline on benign data and loaded through the write ports; eps2 is the
// threshold epsilon^2, in Q(2*FW) like mdist.  The first matrix-vector
// product runs on the MVM core; the second, the vector product z . y, is
// folded into the result stream: each chunk of P elements of y is
// multiplied with z as it leaves the core.
//
// Interface: pulse `start` with e valid; `done` pulses with mdist and
// outlier valid, and they hold until the next start.  Latency:
// ceil(D/P)*ceil(D/SIMD) + about 5 cycles.
// The distance formula, the threshold test and the two matrix-vector
// products follow the paper; the number format and folding the second
// product into the result stream are this design's choice.
module outlier_detector
  import cleann_pkg::*;
#(
  parameter int D    = 48,
  parameter int P    = 8,
  parameter int SIMD = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  // learned statistics
  input  logic  mu_we,
  input  logic [15:0] mu_idx,
  input  data_t mu_data,
  input  logic  sig_we,
  input  logic [15:0] sig_row,
  input  logic [15:0] sig_col,
  input  data_t sig_data,
  input  acc_t  eps2,
  // operation
  input  logic  start,
  input  data_t e [D],
  output logic  busy,
  output logic  done,
  output acc_t  mdist,
  output logic  outlier
);
  localparam int NPT = (D + SIMD - 1) / SIMD;
  localparam int DP  = NPT * SIMD;

  data_t mu [D];
  data_t z  [DP];

  always_ff @(posedge clk) begin
    if (mu_we && int'(mu_idx) < D) mu[int'(mu_idx)] <= mu_data;
  end

  logic  mvm_start, mvm_done, y_valid;
  logic  s_valid, s_ready, s_last;
  data_t s_data [P][SIMD];
  data_t x_slice [SIMD];
  acc_t  y_data [P];
  logic [$clog2(NPT+1)-1:0] x_part;
  logic [$clog2((D+P-1)/P+1)-1:0] y_chunk;

  matrix_mem #(.P(P), .SIMD(SIMD), .ROWS(D), .COLS(D)) u_siginv (
    .clk, .rst_n,
    .we(sig_we), .wrow(sig_row), .wcol(sig_col), .wdata(sig_data),
    .start(mvm_start), .s_valid, .s_ready, .s_last, .s_data,
    .vrow(16'd0), .vpart(16'd0), .vdata()
  );

  always_comb
    for (int s = 0; s < SIMD; s++) x_slice[s] = z[int'(x_part) * SIMD + s];

  mvm_core #(.P(P), .SIMD(SIMD), .ROWS(D), .COLS(D)) u_mvm (
    .clk, .rst_n, .start(mvm_start), .busy(), .done(mvm_done),
    .w_valid(s_valid), .w_ready(s_ready), .w_last(s_last), .w_data(s_data),
    .x_part, .x_data(x_slice),
    .y_valid, .y_chunk, .y_data
  );

  // z . y for the chunk on the result port
  acc_t part;
  always_comb begin
    part = '0;
    for (int p = 0; p < P; p++) begin
      automatic int   j  = int'(y_chunk) * P + p;
      automatic acc_t yq = (y_data[p] + (acc_t'(1) <<< (FW - 1))) >>> FW;
      if (j < D) part += acc_t'(z[j]) * yq;
    end
  end

  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_RUN, S_CMP} state_e;
  state_e st;

  assign busy      = (st != S_IDLE);
  assign mvm_start = (st == S_LOAD);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= S_IDLE;
      mdist    <= '0;
      outlier <= 1'b0;
      done    <= 1'b0;
      for (int i = 0; i < DP; i++) z[i] <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          for (int i = 0; i < DP; i++)
            z[i] <= (i < D) ? sat(acc_t'(e[i]) - acc_t'(mu[i])) : '0;
          mdist <= '0;
          st   <= S_LOAD;
        end
        S_LOAD: st <= S_RUN;
        S_RUN: begin
          if (y_valid) mdist <= mdist + part;
          if (mvm_done) st <= S_CMP;
        end
        S_CMP: begin
          outlier <= (mdist >= eps2);
          done    <= 1'b1;
          st      <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
