// Texture score and texture test of one K x K window (combinational).
//
// The score s_t is the sum of absolute intensity differences between
// horizontally adjacent pixels of the window (pairs with a pixel outside the
// image are skipped). A pixel is "textured" when s_t >= t_t; the disparity of
// an untextured pixel is later replaced by the invalid label (done where the
// disparity is formed, in cost_volume_pp). The paper gives the test
// (score below a configurable threshold -> invalid) but not the score; the
// gradient sum and the window size are this design's choice.
module texture_filter #(
  parameter int K  = 5,
  parameter int DW = 8,
  parameter int SW = 16
) (
  input  logic [K-1:0][K-1:0][DW-1:0] win,
  input  logic [K-1:0][K-1:0]         in_img,
  input  logic [SW-1:0]               thresh,
  output logic [SW-1:0]               score,
  output logic                        textured
);
  always_comb begin
    int s;
    s = 0;
    for (int r = 0; r < K; r++)
      for (int c = 0; c < K - 1; c++)
        if (in_img[r][c] && in_img[r][c+1])
          s += (win[r][c] > win[r][c+1]) ? int'(win[r][c]) - int'(win[r][c+1])
                                         : int'(win[r][c+1]) - int'(win[r][c]);
    score    = SW'(s);
    textured = (score >= thresh);
  end
endmodule
