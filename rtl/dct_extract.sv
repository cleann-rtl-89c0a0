// dct_extract: 2D DCT of one P x P image patch per channel, coefficients
// emitted in zigzag order.
//
//   F[u,v] = C(u) C(v) sum_{i,j} x[i,j] cos(u pi (i+1/2) / P) cos(v pi (j+1/2) / P)
//
// with the orthonormal scale C(0) = sqrt(1/P), C(k>0) = sqrt(2/P).  The
// basis is the kernel of a stride-P group convolution with one group per
// channel: each output coefficient is a P*P-term dot product of the patch
// with a constant 2D basis image.  The basis (Q15) is computed at
// elaboration from a table of cos(k pi/16), k = 0..8, by symmetry, which
// covers P = 2, 4 and 8.  The coefficients of each channel are ordered by
// the JPEG zigzag scan (diagonals u+v = s, alternating direction), so
// coef[c*P*P + n] is the n-th zigzag coefficient of channel c.
//
// Interface: pulse `start` with the patch valid; one coefficient is
// produced per cycle (P*P multipliers), and `done` pulses C*P*P + 1 cycles
// later with all of coef valid; they hold until the next start.
// The DCT formula, the zigzag ordering and the convolution view follow the
// paper; the scale C(u,v), which the paper leaves as "a scalar constant",
// and the one-coefficient-per-cycle schedule are this design's choice.
module dct_extract
  import cleann_pkg::*;
#(
  parameter int C = 3,
  parameter int P = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  data_t patch [C][P][P],
  output logic  busy,
  output logic  done,
  output data_t coef [C*P*P]
);
  localparam int PP = P * P;

  typedef int basis_t [PP*PP];
  typedef int zz_t    [PP];

  // cos(k*pi/16) in Q15, k = 0..8
  function automatic int cos16(input int k);
    case (k)
      0: return 32768; 1: return 32138; 2: return 30274; 3: return 27246;
      4: return 23170; 5: return 18205; 6: return 12540; 7: return 6393;
      default: return 0;
    endcase
  endfunction

  // cos(n*pi/16) for any n >= 0
  function automatic int cosn(input int n);
    int m;
    m = n % 32;
    if (m > 16) m = 32 - m;
    if (m > 8) return -cos16(16 - m);
    return cos16(m);
  endfunction

  function automatic int alpha(input int u);
    case (P)
      2:       return (u == 0) ? 23170 : 32768;
      4:       return (u == 0) ? 16384 : 23170;
      default: return (u == 0) ? 11585 : 16384;
    endcase
  endfunction

  // 1D basis b[u][i] = C(u) cos((2i+1) u pi / 2P), Q15
  function automatic int b1(input int u, input int i);
    return (alpha(u) * cosn((2 * i + 1) * u * (8 / P)) + 16384) >>> 15;
  endfunction

  function automatic basis_t gen_basis();
    basis_t t;
    for (int u = 0; u < P; u++)
      for (int v = 0; v < P; v++)
        for (int i = 0; i < P; i++)
          for (int j = 0; j < P; j++)
            t[(u * P + v) * PP + i * P + j] = (b1(u, i) * b1(v, j) + 16384) >>> 15;
    return t;
  endfunction

  // zigzag index n -> u*P + v
  function automatic zz_t gen_zz();
    zz_t z;
    int  n;
    n = 0;
    for (int s = 0; s <= 2 * P - 2; s++) begin
      if (s % 2 == 1) begin
        for (int u = 0; u < P; u++)
          if (s - u >= 0 && s - u < P) begin z[n] = u * P + (s - u); n++; end
      end else begin
        for (int u = P - 1; u >= 0; u--)
          if (s - u >= 0 && s - u < P) begin z[n] = u * P + (s - u); n++; end
      end
    end
    return z;
  endfunction

  localparam basis_t BASIS = gen_basis();
  localparam zz_t    ZZ    = gen_zz();

  data_t px [C][P][P];
  int    cnt;
  logic  run;

  // One coefficient: dot product of the current channel with basis ZZ[k].
  acc_t sum;
  always_comb begin
    automatic int ch = cnt / PP;
    automatic int uv = ZZ[cnt % PP];
    sum = '0;
    for (int i = 0; i < P; i++)
      for (int j = 0; j < P; j++)
        sum += acc_t'(px[ch % C][i][j]) * acc_t'(BASIS[uv * PP + i * P + j]);
  end

  assign busy = run;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run  <= 1'b0;
      cnt  <= 0;
      done <= 1'b0;
      for (int n = 0; n < C * PP; n++) coef[n] <= '0;
      for (int c = 0; c < C; c++)
        for (int i = 0; i < P; i++)
          for (int j = 0; j < P; j++) px[c][i][j] <= '0;
    end else begin
      done <= 1'b0;
      if (start && !run) begin
        px  <= patch;
        cnt <= 0;
        run <= 1'b1;
      end else if (run) begin
        coef[cnt] <= sat((sum + (acc_t'(1) <<< 14)) >>> 15);
        if (cnt == C * PP - 1) begin
          run  <= 1'b0;
          done <= 1'b1;
        end else begin
          cnt <= cnt + 1;
        end
      end
    end
  end
endmodule
