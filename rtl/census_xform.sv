// Census transform of one K x K window (combinational).
//
// Each of the K*K-1 neighbours of the centre pixel gives one bit, set when
// the neighbour is darker than the centre. Bits are ordered in raster order
// of the window, the centre skipped, bit 0 being the top-left cell.
// Neighbours outside the image give 0. The paper names only "an image
// pre-processing method" that makes matching robust to illumination changes;
// the census transform, its window size and this bit order are this design's
// choice.
module census_xform #(
  parameter int K  = 5,
  parameter int DW = 8
) (
  input  logic [K-1:0][K-1:0][DW-1:0] win,
  input  logic [K-1:0][K-1:0]         in_img,
  output logic [K*K-2:0]              census
);
  localparam int R = K / 2;
  always_comb begin
    int b;
    b = 0;
    census = '0;
    for (int r = 0; r < K; r++)
      for (int c = 0; c < K; c++)
        if (!(r == R && c == R)) begin
          census[b] = in_img[r][c] && (win[r][c] < win[R][R]);
          b++;
        end
  end
endmodule
