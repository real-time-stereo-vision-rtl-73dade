// Gap interpolation: fills small gaps of invalid disparities.
//
// For an invalid centre pixel, the nearest valid pixels to the left and
// right (distances a, b) and above and below (distances u, v) are searched
// within LMAX pixels. The horizontal gap length is l_h = a + b - 1, the
// vertical one l_v = u + v - 1. Following the paper, a gap is filled only if
// min(l_h, l_v) <= l_max and the two edge disparities are similar, here
// meaning they differ by at most gap_sim (1/16 pixel units). The pixel then
// gets the linear interpolation between the two edges of the shorter
// qualifying gap (horizontal on a tie). Valid pixels pass unchanged; an edge
// lying outside the image counts as missing.
// The edge search, the similarity threshold and linear interpolation are
// this design's choices where the paper says only "interpolating the
// disparities from its edges". The window is (2*LMAX+1)^2; only its centre
// row and column are used.
// Timing: one pixel per cycle, output LMAX rows and columns behind input.
module gap_interp #(
  parameter int LMAX = 8,
  parameter int MAXW = ss_pkg::MAX_W
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [ss_pkg::COORD_W-1:0]  width,
  input  logic [ss_pkg::COORD_W-1:0]  height,
  input  logic [3:0]                  l_max,
  input  logic [7:0]                  sim,
  input  logic                        in_valid,
  output logic                        in_ready,
  input  logic [ss_pkg::DISP_W-1:0]   in_disp,
  output logic                        out_valid,
  input  logic                        out_ready,
  output logic [ss_pkg::DISP_W-1:0]   out_disp,
  output logic                        out_filled
);
  import ss_pkg::*;
  localparam int K = 2 * LMAX + 1;
  localparam int R = LMAX;

  logic [K-1:0][K-1:0][DISP_W-1:0] win;
  logic [K-1:0][K-1:0]             in_img;
  logic [COORD_W-1:0]              ox, oy;

  win_stream #(.K(K), .DW(DISP_W), .MAXW(MAXW)) u_win (
    .clk, .rst_n, .width, .height, .in_valid, .in_ready, .in_data(in_disp),
    .out_valid, .out_ready, .win, .in_img, .out_x(ox), .out_y(oy));

  // value at distance t (1..LMAX) along direction dir: 0 left, 1 right, 2 up, 3 down
  function automatic logic [DISP_W:0] edge_cell(input int dir, input int t);
    int r, c;
    r = R; c = R;
    case (dir)
      0: c = R - t;
      1: c = R + t;
      2: r = R - t;
      default: r = R + t;
    endcase
    return {in_img[r][c] && (win[r][c] != DISP_INVALID), win[r][c]};
  endfunction

  // linear interpolation between e0 (distance a) and e1 (distance b)
  function automatic logic [DISP_W-1:0] lerp(input int e0, input int e1, input int a, input int b);
    int num, q;
    num = (e1 - e0) * a;
    q = (num >= 0) ? (num + (a + b) / 2) / (a + b) : -((-num + (a + b) / 2) / (a + b));
    return DISP_W'(e0 + q);
  endfunction

  always_comb begin
    int gdist [4];
    int val [4];
    int lh, lv, lm;
    logic okh, okv;
    for (int dir = 0; dir < 4; dir++) begin
      gdist[dir] = 0;
      val[dir]  = 0;
      for (int t = LMAX; t >= 1; t--) begin
        automatic logic [DISP_W:0] cv = edge_cell(dir, t);
        if (cv[DISP_W]) begin gdist[dir] = t; val[dir] = int'(cv[DISP_W-1:0]); end
      end
    end
    lm  = int'(l_max);
    lh  = gdist[0] + gdist[1] - 1;
    lv  = gdist[2] + gdist[3] - 1;
    okh = (gdist[0] != 0) && (gdist[1] != 0) && (lh <= lm) &&
          (((val[0] > val[1]) ? val[0] - val[1] : val[1] - val[0]) <= int'(sim));
    okv = (gdist[2] != 0) && (gdist[3] != 0) && (lv <= lm) &&
          (((val[2] > val[3]) ? val[2] - val[3] : val[3] - val[2]) <= int'(sim));
    out_filled = 1'b0;
    out_disp   = win[R][R];
    if (win[R][R] == DISP_INVALID) begin
      if (okh && (!okv || lh <= lv)) begin
        out_filled = 1'b1;
        out_disp   = lerp(val[0], val[1], gdist[0], gdist[1]);
      end else if (okv) begin
        out_filled = 1'b1;
        out_disp   = lerp(val[2], val[3], gdist[2], gdist[3]);
      end
    end
  end
endmodule
