// Noise reduction: edge-aware 3 x 3 smoothing of the disparity map.
//
// A valid centre pixel is replaced by the rounded mean of the valid pixels
// of its 3 x 3 neighbourhood whose disparity lies within nr_thresh (1/16
// pixel units) of the centre, so that averaging never crosses a depth
// discontinuity and never uses invalid pixels. Invalid pixels stay invalid.
// The paper gives the function (smoothing aware of discontinuities and of
// invalid disparities); the masked mean, the window and the threshold are
// this design's choices. Timing: one pixel per cycle, output one row and one
// column behind input. This is the last stage; its output is the disparity
// output of the pipeline.
module noise_reduce #(
  parameter int K    = 3,
  parameter int MAXW = ss_pkg::MAX_W
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [ss_pkg::COORD_W-1:0]  width,
  input  logic [ss_pkg::COORD_W-1:0]  height,
  input  logic [7:0]                  thresh,
  input  logic                        in_valid,
  output logic                        in_ready,
  input  logic [ss_pkg::DISP_W-1:0]   in_disp,
  output logic                        out_valid,
  input  logic                        out_ready,
  output logic [ss_pkg::DISP_W-1:0]   out_disp,
  output logic                        out_changed
);
  import ss_pkg::*;
  localparam int R = K / 2;

  logic [K-1:0][K-1:0][DISP_W-1:0] win;
  logic [K-1:0][K-1:0]             in_img;
  logic [COORD_W-1:0]              ox, oy;

  win_stream #(.K(K), .DW(DISP_W), .MAXW(MAXW)) u_win (
    .clk, .rst_n, .width, .height, .in_valid, .in_ready, .in_data(in_disp),
    .out_valid, .out_ready, .win, .in_img, .out_x(ox), .out_y(oy));

  always_comb begin
    int cen, sum, n;
    cen = int'(win[R][R]);
    sum = 0;
    n   = 0;
    for (int r = 0; r < K; r++)
      for (int c = 0; c < K; c++) begin
        int v, d;
        v = int'(win[r][c]);
        d = (v > cen) ? v - cen : cen - v;
        if (in_img[r][c] && win[r][c] != DISP_INVALID && d <= int'(thresh)) begin
          sum += v;
          n++;
        end
      end
    if (win[R][R] == DISP_INVALID || n == 0) out_disp = win[R][R];
    else out_disp = DISP_W'((sum + n / 2) / n);
    out_changed = (out_disp != win[R][R]);
  end
endmodule
