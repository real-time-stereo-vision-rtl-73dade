// Speckle filter: removes small connected components of similar disparity.
//
// For each pixel a WS_MAX x WS_MAX window of the disparity map is formed by
// win_stream. Two 4-neighbouring valid pixels are connected when their
// disparities differ by at most speckle_sim (1/16 pixel units). Starting at
// the centre pixel, the connected region is grown by ITER dilation steps
// inside the run-time window of w_s x w_s pixels (w_s odd, <= WS_MAX). If the
// region never reaches the border ring of that window, the component is
// smaller than the window and the centre pixel is a speckle: it gets the
// invalid label. Otherwise it passes unchanged.
//
// The paper gives the function (connected components below a minimum size,
// set by the window size w_s, are invalidated), not the method; this
// window-limited region growing is this design's choice. Limits that follow:
// components are judged only inside the window, a component that leaves the
// image within the window counts as small, and a region winding for more
// than ITER steps is not followed to its end.
// Timing: one pixel per cycle, output WS_MAX/2 rows and columns behind input.
module speckle_filter #(
  parameter int WS_MAX = 9,
  parameter int ITER   = 2 * WS_MAX,
  parameter int MAXW   = ss_pkg::MAX_W
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [ss_pkg::COORD_W-1:0]  width,
  input  logic [ss_pkg::COORD_W-1:0]  height,
  input  logic [3:0]                  ws,
  input  logic [7:0]                  sim,
  input  logic                        in_valid,
  output logic                        in_ready,
  input  logic [ss_pkg::DISP_W-1:0]   in_disp,
  output logic                        out_valid,
  input  logic                        out_ready,
  output logic [ss_pkg::DISP_W-1:0]   out_disp,
  output logic                        out_removed
);
  import ss_pkg::*;
  localparam int K = WS_MAX;
  localparam int R = K / 2;

  logic [K-1:0][K-1:0][DISP_W-1:0] win;
  logic [K-1:0][K-1:0]             in_img;
  logic [COORD_W-1:0]              ox, oy;

  win_stream #(.K(K), .DW(DISP_W), .MAXW(MAXW)) u_win (
    .clk, .rst_n, .width, .height, .in_valid, .in_ready, .in_data(in_disp),
    .out_valid, .out_ready, .win, .in_img, .out_x(ox), .out_y(oy));

  function automatic logic close(input logic [DISP_W-1:0] a, input logic [DISP_W-1:0] b,
                                 input logic [7:0] t);
    return ((a > b) ? (a - b) : (b - a)) <= DISP_W'(t);
  endfunction

  always_comb begin
    automatic int rr = int'(ws) / 2;
    logic [K-1:0][K-1:0] ok, reach, nxt;
    logic [K-1:0][K-1:0] sh, sv;     // link to the right / downward neighbour
    logic border_hit;
    for (int r = 0; r < K; r++)
      for (int c = 0; c < K; c++) begin
        automatic int dr = (r > R) ? r - R : R - r;
        automatic int dc = (c > R) ? c - R : R - c;
        ok[r][c] = in_img[r][c] && (win[r][c] != DISP_INVALID) && (dr <= rr) && (dc <= rr);
      end
    for (int r = 0; r < K; r++)
      for (int c = 0; c < K; c++) begin
        sh[r][c] = (c < K - 1) && ok[r][c] && ok[r][(c < K - 1) ? c + 1 : c]
                   && close(win[r][c], win[r][(c < K - 1) ? c + 1 : c], sim);
        sv[r][c] = (r < K - 1) && ok[r][c] && ok[(r < K - 1) ? r + 1 : r][c]
                   && close(win[r][c], win[(r < K - 1) ? r + 1 : r][c], sim);
      end
    reach = '0;
    reach[R][R] = ok[R][R];
    for (int it = 0; it < ITER; it++) begin
      nxt = reach;
      for (int r = 0; r < K; r++)
        for (int c = 0; c < K; c++) begin
          if (c > 0     && reach[r][c-1] && sh[r][c-1]) nxt[r][c] = 1'b1;
          if (c < K - 1 && reach[r][c+1] && sh[r][c])   nxt[r][c] = 1'b1;
          if (r > 0     && reach[r-1][c] && sv[r-1][c]) nxt[r][c] = 1'b1;
          if (r < K - 1 && reach[r+1][c] && sv[r][c])   nxt[r][c] = 1'b1;
        end
      reach = nxt;
    end
    border_hit = 1'b0;
    for (int r = 0; r < K; r++)
      for (int c = 0; c < K; c++) begin
        automatic int dr = (r > R) ? r - R : R - r;
        automatic int dc = (c > R) ? c - R : R - c;
        if (reach[r][c] && (dr == rr || dc == rr)) border_hit = 1'b1;
      end
    out_removed = ok[R][R] && !border_hit;
    out_disp    = out_removed ? DISP_INVALID : win[R][R];
  end
endmodule
