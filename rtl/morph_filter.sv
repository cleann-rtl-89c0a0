// morph_filter: binary erosion or dilation of a K x K patch mask with a
// 3 x 3 square structuring element.
//
// Erosion (DILATE = 0) keeps a mask bit only if it and all eight neighbours
// are set, removing small isolated false alarms; positions outside the mask
// count as set, so a region touching the border is not eaten away from that
// side.  Dilation (DILATE = 1) sets a bit if it or any neighbour is set,
// restoring the extent of the regions that survived erosion; outside
// positions count as clear.  Bit r*K + c of the mask is row r, column c.
//
// Interface: pulse `start` with mask_in valid; one cycle later `done`
// pulses and mask_out holds the result until the next start.
// Erosion followed by dilation on the outlier mask follows the paper; the
// 3 x 3 element and the border rule are this design's choice.
module morph_filter #(
  parameter int K      = 8,
  parameter bit DILATE = 1'b0
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [K*K-1:0] mask_in,
  output logic           done,
  output logic [K*K-1:0] mask_out
);
  logic [K*K-1:0] res;

  always_comb begin
    for (int r = 0; r < K; r++)
      for (int c = 0; c < K; c++) begin
        automatic logic b = DILATE ? 1'b0 : 1'b1;
        for (int dr = -1; dr <= 1; dr++)
          for (int dc = -1; dc <= 1; dc++) begin
            automatic int   rr = r + dr;
            automatic int   cc = c + dc;
            automatic logic v  = (rr >= 0 && rr < K && cc >= 0 && cc < K)
                                 ? mask_in[rr * K + cc] : !DILATE;
            b = DILATE ? (b | v) : (b & v);
          end
        res[r * K + c] = b;
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mask_out <= '0;
      done     <= 1'b0;
    end else begin
      done <= start;
      if (start) mask_out <= res;
    end
  end
endmodule
