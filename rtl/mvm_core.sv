// mvm_core: matrix-vector multiplication core, y = W x.
//
// W has ROWS rows and COLS columns.  It is processed in chunks of P rows
// (one row per PE) and, inside a chunk, in column partitions of SIMD
// elements: every cycle all P PEs take the same SIMD-element slice of x
// and each its own SIMD weights, so the core does P*SIMD multiply-adds per
// cycle.  Weights stream in as P x SIMD tiles (chunk-major, partition-minor,
// rows and columns padded with zeros to multiples of P and SIMD) through a
// ping-pong buffer, so the fetch of chunk c+1 overlaps the computation of
// chunk c.  The input vector is read from the client: x_part names the
// partition and x_data must hold its SIMD elements in the same cycle.
//
// Interface: pulse `start`; tiles are taken on w_valid && w_ready, w_last
// flagging the last tile of each chunk.  For every chunk the P dot products
// (Q(2*FW) accumulators) appear on y_data with y_valid for one cycle and
// y_chunk its index.  `done` pulses with the last chunk's results.
// Timing: with weights available, NCH*NPT cycles plus 2 cycles of PE
// pipeline, where NCH = ceil(ROWS/P) and NPT = ceil(COLS/SIMD).
// The two parallelism levels P and SIMD, the shared input slice, the tree
// adder, accumulator and ping-pong buffer follow the paper; the streaming
// handshakes are this design's choice.
module mvm_core
  import cleann_pkg::*;
#(
  parameter int P    = 8,
  parameter int SIMD = 8,
  parameter int ROWS = 16,
  parameter int COLS = 16
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  output logic  busy,
  output logic  done,
  // weight tiles
  input  logic  w_valid,
  output logic  w_ready,
  input  logic  w_last,
  input  data_t w_data [P][SIMD],
  // input vector partition
  output logic [$clog2((COLS+SIMD-1)/SIMD+1)-1:0] x_part,
  input  data_t x_data [SIMD],
  // results
  output logic  y_valid,
  output logic [$clog2((ROWS+P-1)/P+1)-1:0] y_chunk,
  output acc_t  y_data [P]
);
  localparam int NCH = (ROWS + P - 1) / P;
  localparam int NPT = (COLS + SIMD - 1) / SIMD;
  localparam int CW  = $clog2(NCH + 1);
  localparam int PW  = $clog2(NPT + 1);

  logic          run;
  logic [CW-1:0] ch, ych;
  logic [PW-1:0] k;
  logic          avail, issue, first, last;
  data_t         tile [P][SIMD];
  logic [P-1:0]  pe_ov;

  pingpong_buf #(.P(P), .SIMD(SIMD), .NPART(NPT)) u_pp (
    .clk, .rst_n,
    .wr_valid(w_valid), .wr_ready(w_ready), .wr_last(w_last), .wr_data(w_data),
    .rd_avail(avail), .rd_part(k), .rd_data(tile), .rd_release(issue && last)
  );

  assign issue  = run && avail;
  assign first  = (k == '0);
  assign last   = (k == PW'(NPT - 1));
  assign x_part = k;

  for (genvar p = 0; p < P; p++) begin : g_pe
    mvm_pe #(.SIMD(SIMD)) u_pe (
      .clk, .rst_n,
      .in_valid(issue), .first, .last,
      .w(tile[p]), .x(x_data),
      .out_valid(pe_ov[p]), .acc(y_data[p])
    );
  end

  assign y_valid = pe_ov[0];
  assign y_chunk = ych;
  assign done    = y_valid && (ych == CW'(NCH - 1));
  assign busy    = run || (ych != '0) || start;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0;
      ch  <= '0;
      k   <= '0;
      ych <= '0;
    end else begin
      if (start) begin
        run <= 1'b1;
        ch  <= '0;
        k   <= '0;
      end else if (issue) begin
        if (last) begin
          k <= '0;
          if (ch == CW'(NCH - 1)) run <= 1'b0;
          else                    ch  <= ch + 1'b1;
        end else begin
          k <= k + 1'b1;
        end
      end
      if (y_valid) ych <= (ych == CW'(NCH - 1)) ? '0 : ych + 1'b1;
    end
  end
endmodule
