// upsample_mask: nearest-neighbour upsampling of the patch mask to image
// size, and suppression of the flagged regions, out = (1 - mask) * image.
//
// The mask has one bit per P x P patch (K = IMG/P patches per side; bit
// r*K + c is patch row r, column c).  Pixels arrive in raster order,
// channel-major (channel, row, column), one per cycle with in_valid; pixel
// (y, x) of every channel takes the mask bit of patch (y/P, x/P), which is
// nearest-neighbour upsampling by P, and a pixel under a set bit is
// replaced by zero.  `clear` resets the raster position before a new image.
//
// Timing: one cycle of latency, one pixel per cycle; out_last marks the
// final pixel of the image.  Upsampling and the (1 - mask) product follow
// the paper; the pixel order is this design's choice.
module upsample_mask
  import cleann_pkg::*;
#(
  parameter int C   = 3,
  parameter int IMG = 32,
  parameter int P   = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clear,
  input  logic [(IMG/P)*(IMG/P)-1:0] mask,
  input  logic  in_valid,
  input  data_t in_pix,
  output logic  out_valid,
  output logic  out_last,
  output data_t out_pix
);
  localparam int K = IMG / P;

  int ch, y, x;
  logic hit;

  assign hit = mask[(y / P) * K + (x / P)];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ch        <= 0;
      y         <= 0;
      x         <= 0;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      out_pix   <= '0;
    end else begin
      out_valid <= in_valid && !clear;
      out_last  <= 1'b0;
      if (clear) begin
        ch <= 0;
        y  <= 0;
        x  <= 0;
      end else if (in_valid) begin
        out_pix  <= hit ? '0 : in_pix;
        out_last <= (ch == C - 1) && (y == IMG - 1) && (x == IMG - 1);
        if (x == IMG - 1) begin
          x <= 0;
          if (y == IMG - 1) begin
            y  <= 0;
            ch <= (ch == C - 1) ? 0 : ch + 1;
          end else begin
            y <= y + 1;
          end
        end else begin
          x <= x + 1;
        end
      end
    end
  end
endmodule
