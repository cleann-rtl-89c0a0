// omp_core: sparse recovery by Orthogonal Matching Pursuit with an
// incrementally built QR factorisation (modified Gram-Schmidt).
//
// Given an input x (L elements) and a dictionary D of M unit-norm atoms of
// L elements each, the core runs LAMBDA iterations.  Iteration i:
//   1. projection  p = D^T r_i on the MVM core (P PEs x SIMD lanes); the
//      atom j with the largest |p_j| is selected,
//   2. Gram-Schmidt: eps = D[:,j];  for every earlier column q_k:
//      R[k,i] = q_k . eps,  eps -= R[k,i] q_k;  R[i,i] = ||eps||_2,
//      q_i = eps / R[i,i]   (square root and reciprocal are iterative),
//   3. residual update  r_{i+1} = r_i - q_i (q_i . r_i).
// Because the q_k are orthonormal and span the chosen atoms, x - r_LAMBDA
// is the least-squares reconstruction D* v of Algorithm 1, so the core
// returns it (recon) together with the reconstruction error r (resid)
// without ever forming v.  Vector steps 2 and 3 process SIMD elements per
// cycle.
//
// Interface: the dictionary is loaded through the write port (row = atom,
// col = element).  Pulse `start` with x valid; `done` pulses when recon and
// resid are valid; they hold until the next start.  Cycle count per
// iteration i (NPT = ceil(L/SIMD), NCH = ceil(M/P)):
//   NCH*NPT + 3 (projection) + NPT+1 (fetch) + i*2*NPT (Gram-Schmidt)
//   + NPT (norm) + AW/2 (sqrt) + AW (divide) + NPT (scale) + 2*NPT (residual)
//   plus a few state transitions.
//
// From the paper: the OMP loop, the use of the MVM core for the projection,
// the MGS update of Q and R, and the residual update r -= q q^T r.  This
// design's own choices: fixed-point format, excluding atoms already chosen
// from the argmax, returning x - r instead of solving for v, and the
// iterative square root and divider.
module omp_core
  import cleann_pkg::*;
#(
  parameter int L      = 48,
  parameter int M      = 1000,
  parameter int LAMBDA = 5,
  parameter int P      = 8,
  parameter int SIMD   = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  // dictionary load
  input  logic  dict_we,
  input  logic [15:0] dict_atom,
  input  logic [15:0] dict_elem,
  input  data_t dict_data,
  // operation
  input  logic  start,
  input  data_t x [L],
  output logic  busy,
  output logic  done,
  output data_t recon [L],
  output data_t resid [L]
);
  localparam int NPT = (L + SIMD - 1) / SIMD;
  localparam int LP  = NPT * SIMD;
  localparam int IW  = $clog2(LAMBDA + 1);

  typedef enum logic [3:0] {
    S_IDLE, S_PROJ, S_FETCH, S_DOT_QE, S_AXPY_QE, S_NORM, S_SQRT,
    S_DIV, S_SCALE, S_DOT_QR, S_AXPY_QR, S_FINISH
  } state_e;
  state_e st;

  data_t xv  [LP];
  data_t r   [LP];
  data_t eps [LP];
  data_t q   [LAMBDA][LP];
  logic [M-1:0] used;

  logic [IW-1:0] it;     // OMP iteration i
  logic [IW-1:0] kq;     // Gram-Schmidt column k
  int            pt;     // partition counter
  acc_t          acc;    // dot-product accumulator, Q(2*FW)
  data_t         coef;   // R[k,i] or q_i . r, Q(FW)
  logic [15:0]   best;
  acc_t          best_mag;
  logic          best_ok;
  logic [AW-1:0] inv;    // 1 / R[i,i], Q(2*FW)

  // ---------------- dictionary and projection ----------------
  logic  mvm_start, mvm_done, y_valid;
  logic  s_valid, s_ready, s_last;
  data_t s_data [P][SIMD];
  data_t v_data [SIMD];
  data_t x_slice [SIMD];
  acc_t  y_data [P];
  logic [$clog2(NPT+1)-1:0] x_part;
  logic [$clog2((M+P-1)/P+1)-1:0] y_chunk;

  matrix_mem #(.P(P), .SIMD(SIMD), .ROWS(M), .COLS(L)) u_dict (
    .clk, .rst_n,
    .we(dict_we), .wrow(dict_atom), .wcol(dict_elem), .wdata(dict_data),
    .start(mvm_start), .s_valid, .s_ready, .s_last, .s_data,
    .vrow(best), .vpart(16'(pt)), .vdata(v_data)
  );

  always_comb
    for (int s = 0; s < SIMD; s++) x_slice[s] = r[int'(x_part) * SIMD + s];

  mvm_core #(.P(P), .SIMD(SIMD), .ROWS(M), .COLS(L)) u_mvm (
    .clk, .rst_n, .start(mvm_start), .busy(), .done(mvm_done),
    .w_valid(s_valid), .w_ready(s_ready), .w_last(s_last), .w_data(s_data),
    .x_part, .x_data(x_slice),
    .y_valid, .y_chunk, .y_data
  );

  assign mvm_start = (st == S_PROJ) && (pt == 0);

  // Largest |p_j| among the atoms of this chunk that are still unused.
  acc_t         cmag;
  logic [15:0]  cidx;
  logic         cok;
  always_comb begin
    cmag = best_mag;
    cidx = best;
    cok  = best_ok;
    for (int p = 0; p < P; p++) begin
      automatic int   j = int'(y_chunk) * P + p;
      automatic acc_t a = (y_data[p] < 0) ? -y_data[p] : y_data[p];
      if (j < M && !used[j] && (!cok || a > cmag)) begin
        cmag = a;
        cidx = 16'(j);
        cok  = 1'b1;
      end
    end
  end

  // ---------------- SIMD slice arithmetic ----------------
  function automatic acc_t slice_dot(input data_t a [SIMD], input data_t b [SIMD]);
    acc_t s = '0;
    for (int i = 0; i < SIMD; i++) s += acc_t'(a[i]) * acc_t'(b[i]);
    return s;
  endfunction

  data_t sl_q [SIMD], sl_e [SIMD], sl_r [SIMD];
  always_comb begin
    for (int s = 0; s < SIMD; s++) begin
      sl_q[s] = q[(st == S_DOT_QE || st == S_AXPY_QE) ? int'(kq) : int'(it)][pt * SIMD + s];
      sl_e[s] = eps[pt * SIMD + s];
      sl_r[s] = r[pt * SIMD + s];
    end
  end

  // ---------------- norm helpers ----------------
  logic          sq_start, sq_done, dv_start, dv_done;
  logic [AW/2-1:0] root;
  logic [AW-1:0]   quo;

  isqrt_iter #(.W(AW)) u_sqrt (
    .clk, .rst_n, .start(sq_start), .din(acc), .done(sq_done), .root
  );
  udiv_iter #(.W(AW)) u_div (
    .clk, .rst_n, .start(dv_start), .num(AW'(1) << (3 * FW)),
    .den(AW'(root)), .done(dv_done), .quo
  );

  // ---------------- control ----------------
  assign busy = (st != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= S_IDLE;
      it       <= '0;
      kq       <= '0;
      pt       <= 0;
      acc      <= '0;
      coef     <= '0;
      best     <= '0;
      best_mag <= '0;
      best_ok  <= 1'b0;
      inv      <= '0;
      used     <= '0;
      done     <= 1'b0;
      sq_start <= 1'b0;
      dv_start <= 1'b0;
      for (int e = 0; e < L; e++) begin
        recon[e] <= '0;
        resid[e] <= '0;
      end
      for (int e = 0; e < LP; e++) begin
        xv[e]  <= '0;
        r[e]   <= '0;
        eps[e] <= '0;
        for (int i = 0; i < LAMBDA; i++) q[i][e] <= '0;
      end
    end else begin
      done     <= 1'b0;
      sq_start <= 1'b0;
      dv_start <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          for (int e = 0; e < LP; e++) begin
            xv[e] <= (e < L) ? x[e] : '0;
            r[e]  <= (e < L) ? x[e] : '0;
          end
          used     <= '0;
          it       <= '0;
          pt       <= 0;
          best_ok  <= 1'b0;
          best_mag <= '0;
          st       <= S_PROJ;
        end

        // p = D^T r, keep the running argmax of |p|
        S_PROJ: begin
          pt <= 1;
          if (y_valid) begin
            best     <= cidx;
            best_mag <= cmag;
            best_ok  <= cok;
          end
          if (mvm_done) begin
            pt <= 0;
            st <= S_FETCH;
          end
        end

        // eps <- D[:, best], one partition per cycle (1-cycle read)
        S_FETCH: begin
          used[best] <= 1'b1;
          if (pt > 0)
            for (int s = 0; s < SIMD; s++) eps[(pt - 1) * SIMD + s] <= v_data[s];
          if (pt == NPT) begin
            pt  <= 0;
            acc <= '0;
            kq  <= '0;
            st  <= (it == '0) ? S_NORM : S_DOT_QE;
          end else begin
            pt <= pt + 1;
          end
        end

        // R[k,i] = q_k . eps
        S_DOT_QE: begin
          if (pt == NPT - 1) begin
            coef <= rnd(acc + slice_dot(sl_q, sl_e));
            acc  <= '0;
            pt   <= 0;
            st   <= S_AXPY_QE;
          end else begin
            acc <= acc + slice_dot(sl_q, sl_e);
            pt  <= pt + 1;
          end
        end

        // eps -= R[k,i] q_k
        S_AXPY_QE: begin
          for (int s = 0; s < SIMD; s++)
            eps[pt * SIMD + s] <= sat(acc_t'(sl_e[s]) - acc_t'(qmul(coef, sl_q[s])));
          if (pt == NPT - 1) begin
            pt <= 0;
            if (kq == it - 1'b1) st <= S_NORM;
            else begin
              kq <= kq + 1'b1;
              st <= S_DOT_QE;
            end
          end else begin
            pt <= pt + 1;
          end
        end

        // ||eps||^2
        S_NORM: begin
          if (pt == NPT - 1) begin
            acc      <= acc + slice_dot(sl_e, sl_e);
            pt       <= 0;
            sq_start <= 1'b1;
            st       <= S_SQRT;
          end else begin
            acc <= acc + slice_dot(sl_e, sl_e);
            pt  <= pt + 1;
          end
        end

        // R[i,i] = sqrt(||eps||^2), Q(FW)
        S_SQRT: if (sq_done) begin
          if (root == '0) begin
            // Chosen atom lies in the span of the earlier ones: no new
            // direction, q_i stays zero and the residual is unchanged.
            for (int e = 0; e < LP; e++) q[it][e] <= '0;
            acc <= '0;
            st  <= S_DOT_QR;
          end else begin
            dv_start <= 1'b1;
            st       <= S_DIV;
          end
        end

        // 1 / R[i,i] in Q(2*FW)
        S_DIV: if (dv_done) begin
          inv <= quo;
          pt  <= 0;
          st  <= S_SCALE;
        end

        // q_i = eps / R[i,i]
        S_SCALE: begin
          for (int s = 0; s < SIMD; s++)
            q[it][pt * SIMD + s] <= sat((acc_t'(sl_e[s]) * acc_t'(inv)
                                         + (acc_t'(1) <<< (2 * FW - 1))) >>> (2 * FW));
          if (pt == NPT - 1) begin
            pt  <= 0;
            acc <= '0;
            st  <= S_DOT_QR;
          end else begin
            pt <= pt + 1;
          end
        end

        // c = q_i . r
        S_DOT_QR: begin
          if (pt == NPT - 1) begin
            coef <= rnd(acc + slice_dot(sl_q, sl_r));
            acc  <= '0;
            pt   <= 0;
            st   <= S_AXPY_QR;
          end else begin
            acc <= acc + slice_dot(sl_q, sl_r);
            pt  <= pt + 1;
          end
        end

        // r -= c q_i
        S_AXPY_QR: begin
          for (int s = 0; s < SIMD; s++)
            r[pt * SIMD + s] <= sat(acc_t'(sl_r[s]) - acc_t'(qmul(coef, sl_q[s])));
          if (pt == NPT - 1) begin
            pt <= 0;
            if (it == IW'(LAMBDA - 1)) st <= S_FINISH;
            else begin
              it       <= it + 1'b1;
              best_ok  <= 1'b0;
              best_mag <= '0;
              st       <= S_PROJ;
            end
          end else begin
            pt <= pt + 1;
          end
        end

        S_FINISH: begin
          for (int e = 0; e < L; e++) begin
            recon[e] <= sat(acc_t'(xv[e]) - acc_t'(r[e]));
            resid[e] <= r[e];
          end
          done <= 1'b1;
          st   <= S_IDLE;
        end

        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
