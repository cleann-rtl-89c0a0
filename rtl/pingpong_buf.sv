// pingpong_buf: two-bank weight buffer of the matrix-vector core.
//
// The weight matrix is consumed in chunks of P rows.  A chunk arrives as
// NPART tiles of P x SIMD weights (one column partition per tile, in
// order), written into the bank selected by the fill side; the tile
// flagged wr_last completes the chunk and hands the bank to the read side.
// While the PEs read one bank (rd_part selects the tile, read
// combinationally) the other bank is being filled, so weight fetch overlaps
// computation.  The read side frees its bank with rd_release; the fill
// side stalls (wr_ready low) while both banks are full.
//
// Handshake: a tile is written on a cycle with wr_valid && wr_ready.
// rd_avail is high while the read bank holds a complete chunk.  The
// overlap of weight reads with PE computation follows the paper; bank
// depth, tile format and the release handshake are this design's choice.
// The lint notice that rst_n is used both asynchronously and synchronously
// stands: the synchronous use is only the `disable iff` of the handshake
// assertion, which is not logic.
module pingpong_buf
  import cleann_pkg::*;
#(
  parameter int P     = 8,
  parameter int SIMD  = 8,
  parameter int NPART = 6
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  wr_valid,
  output logic  wr_ready,
  input  logic  wr_last,
  input  data_t wr_data [P][SIMD],
  output logic  rd_avail,
  input  logic [$clog2(NPART+1)-1:0] rd_part,
  output data_t rd_data [P][SIMD],
  input  logic  rd_release
);
  localparam int PW = $clog2(NPART + 1);

  data_t bank [2][NPART][P][SIMD];
  logic [1:0]    full;
  logic          wsel, rsel;
  logic [PW-1:0] wptr;

  assign wr_ready = !full[wsel];
  assign rd_avail = full[rsel];

  always_comb begin
    for (int p = 0; p < P; p++)
      for (int s = 0; s < SIMD; s++)
        rd_data[p][s] = bank[rsel][rd_part < PW'(NPART) ? rd_part : '0][p][s];
  end

  always_ff @(posedge clk) begin
    if (wr_valid && wr_ready)
      for (int p = 0; p < P; p++)
        for (int s = 0; s < SIMD; s++)
          bank[wsel][wptr][p][s] <= wr_data[p][s];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full <= '0;
      wsel <= 1'b0;
      rsel <= 1'b0;
      wptr <= '0;
    end else begin
      if (rd_release && full[rsel]) begin
        full[rsel] <= 1'b0;
        rsel       <= ~rsel;
      end
      if (wr_valid && wr_ready) begin
        if (wr_last) begin
          full[wsel] <= 1'b1;
          wsel       <= ~wsel;
          wptr       <= '0;
        end else begin
          wptr <= wptr + 1'b1;
        end
      end
    end
  end

  // A chunk is never released before it was filled.
  a_release_full: assert property (@(posedge clk) disable iff (!rst_n)
    rd_release |-> full[rsel]);
endmodule
