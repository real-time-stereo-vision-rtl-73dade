// Image pre-processing of the rectified stereo pair.
//
// One win_stream holds a K x K window over both images at once (left pixel
// in the low byte, right pixel in the high byte). From each window it forms
// the census codes of the left and right centre pixels and the texture flag
// of the left centre pixel. Output is one record per pixel in raster order,
// K/2 rows and K/2 columns after the pixel entered; the window generator's
// registered output is the output register (valid/ready). The paper does not
// name its pre-processing method; census (K = 5, 24 bits) is this design's
// choice. The texture score is computed here, on the same window, because
// the texture filter needs the left image and this is where it is held.
module preproc #(
  parameter int K    = 5,
  parameter int MAXW = ss_pkg::MAX_W
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [ss_pkg::COORD_W-1:0]  width,
  input  logic [ss_pkg::COORD_W-1:0]  height,
  input  logic [15:0]                 tex_thresh,
  input  logic                        in_valid,
  output logic                        in_ready,
  input  logic [ss_pkg::PIX_W-1:0]    in_l,
  input  logic [ss_pkg::PIX_W-1:0]    in_r,
  output logic                        out_valid,
  input  logic                        out_ready,
  output logic [K*K-2:0]              census_l,
  output logic [K*K-2:0]              census_r,
  output logic                        textured
);
  import ss_pkg::*;
  logic [K-1:0][K-1:0][2*PIX_W-1:0] win;
  logic [K-1:0][K-1:0][PIX_W-1:0]   win_l, win_r;
  logic [K-1:0][K-1:0]              in_img;
  logic [COORD_W-1:0]               ox, oy;
  logic [15:0]                      score;

  win_stream #(.K(K), .DW(2 * PIX_W), .MAXW(MAXW)) u_win (
    .clk, .rst_n, .width, .height,
    .in_valid, .in_ready, .in_data({in_r, in_l}),
    .out_valid, .out_ready, .win, .in_img, .out_x(ox), .out_y(oy));

  always_comb
    for (int r = 0; r < K; r++)
      for (int c = 0; c < K; c++) begin
        win_l[r][c] = win[r][c][PIX_W-1:0];
        win_r[r][c] = win[r][c][2*PIX_W-1:PIX_W];
      end

  census_xform #(.K(K), .DW(PIX_W)) u_cl (.win(win_l), .in_img, .census(census_l));
  census_xform #(.K(K), .DW(PIX_W)) u_cr (.win(win_r), .in_img, .census(census_r));
  texture_filter #(.K(K), .DW(PIX_W), .SW(16)) u_tex (
    .win(win_l), .in_img, .thresh(tex_thresh), .score, .textured);
endmodule
