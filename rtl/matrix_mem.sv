// matrix_mem: on-chip store for one learned matrix (a dictionary, an
// inverse covariance or an SVD projection), organised for the MVM core.
//
// The ROWS x COLS matrix is kept as tiles of P rows x SIMD columns.  The
// host loads it one element per cycle (we, wrow, wcol, wdata).  After a
// `start` pulse the stream port delivers every tile, chunk-major and
// partition-minor, one per cycle while s_ready is high, with s_last on the
// last tile of each chunk; this is the weight stream the MVM core expects.
// Positions outside ROWS x COLS (padding up to the tile grid) always read as
// zero, so the padding never has to be written.  A second, vector port
// returns SIMD consecutive elements of row vrow (partition vpart) one cycle
// after the request; the sparse-recovery core uses it to fetch the chosen
// dictionary atom.
//
// Storage is one memory word per tile (P*SIMD elements), written one
// element at a time with a part-select and read a whole tile per cycle, so
// it maps onto wide block RAM with two read ports.  The paper keeps its
// tables in on-chip memory; the tile layout and both read ports are this
// design's choice.
module matrix_mem
  import cleann_pkg::*;
#(
  parameter int P    = 8,
  parameter int SIMD = 8,
  parameter int ROWS = 16,
  parameter int COLS = 16
) (
  input  logic  clk,
  input  logic  rst_n,
  // host write port
  input  logic  we,
  input  logic [15:0] wrow,
  input  logic [15:0] wcol,
  input  data_t wdata,
  // tile stream
  input  logic  start,
  output logic  s_valid,
  input  logic  s_ready,
  output logic  s_last,
  output data_t s_data [P][SIMD],
  // row-vector read (1-cycle latency)
  input  logic [15:0] vrow,
  input  logic [15:0] vpart,
  output data_t vdata [SIMD]
);
  localparam int NCH = (ROWS + P - 1) / P;
  localparam int NPT = (COLS + SIMD - 1) / SIMD;
  localparam int TW  = P * SIMD * DW;            // one tile per memory word

  typedef logic [TW-1:0] tile_t;

  // mem[c*NPT + k] holds tile (chunk c, partition k); element (p, s) of the
  // tile sits at bit (p*SIMD + s)*DW.
  tile_t mem [NCH*NPT];

  always_ff @(posedge clk) begin
    if (we && (int'(wrow) < ROWS) && (int'(wcol) < COLS))
      mem[(int'(wrow) / P) * NPT + int'(wcol) / SIMD]
         [((int'(wrow) % P) * SIMD + int'(wcol) % SIMD) * DW +: DW] <= wdata;
  end

  // ---------------- tile stream ----------------
  logic  active;
  int    c, k;
  int    tc, tk;                 // position of the tile on the port
  logic  load;
  tile_t tile_q;

  assign load = active && (!s_valid || s_ready);

  always_ff @(posedge clk) begin
    if (load) tile_q <= mem[c * NPT + k];
  end

  // padding outside ROWS x COLS reads as zero
  always_comb
    for (int p = 0; p < P; p++)
      for (int s = 0; s < SIMD; s++)
        s_data[p][s] = ((tc * P + p < ROWS) && (tk * SIMD + s < COLS))
                       ? data_t'(tile_q[(p * SIMD + s) * DW +: DW]) : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active  <= 1'b0;
      c       <= 0;
      k       <= 0;
      tc      <= 0;
      tk      <= 0;
      s_valid <= 1'b0;
      s_last  <= 1'b0;
    end else begin
      if (start) begin
        active  <= 1'b1;
        c       <= 0;
        k       <= 0;
        s_valid <= 1'b0;
      end else if (load) begin
        tc      <= c;
        tk      <= k;
        s_valid <= 1'b1;
        s_last  <= (k == NPT - 1);
        if (k == NPT - 1) begin
          k <= 0;
          if (c == NCH - 1) active <= 1'b0;
          else              c <= c + 1;
        end else begin
          k <= k + 1;
        end
      end else if (s_valid && s_ready) begin
        s_valid <= 1'b0;
      end
    end
  end

  // ---------------- row-vector port ----------------
  tile_t vtile_q;
  int    vr_q, vp_q;

  always_ff @(posedge clk) begin
    vtile_q <= mem[(int'(vrow) / P) * NPT + int'(vpart) % NPT];
    vr_q    <= int'(vrow);
    vp_q    <= int'(vpart) % NPT;
  end

  always_comb
    for (int s = 0; s < SIMD; s++)
      vdata[s] = ((vr_q < ROWS) && (vp_q * SIMD + s < COLS))
                 ? data_t'(vtile_q[((vr_q % P) * SIMD + s) * DW +: DW]) : '0;
endmodule
