// Raster-scan K x K window generator with valid/ready flow control.
//
// Pixels of a width x height frame enter in raster order. The module keeps
// K-1 line buffers and a K x K register window. An internal cursor walks a
// padded frame of (width+R) x (height+R) positions, R = K/2: positions in_img
// the image consume one input pixel, the R extra columns at the end of each
// row and the R extra rows at the end of the frame are filled with zeros and
// need no input. This flushes the window at every row and frame end, so each
// image pixel gets exactly one window, centred on it, in raster order.
// in_img[r][c] tells which window cells lie in_img the image; users decide the
// border policy from it. win[r][c]: r = 0 is the top row, c = 0 the left column.
//
// Timing: one cursor step per cycle at most; a window leaves as soon as it is
// complete, R rows and R columns after its centre pixel entered. Output data
// is registered; out_valid stays high until out_ready. width/height must be
// stable during a frame. All of this is a generic design choice; the paper
// only says that its filters work on local neighbourhoods.
module win_stream #(
  parameter int K    = 5,
  parameter int DW   = 8,
  parameter int MAXW = ss_pkg::MAX_W
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [ss_pkg::COORD_W-1:0]   width,
  input  logic [ss_pkg::COORD_W-1:0]   height,
  input  logic                         in_valid,
  output logic                         in_ready,
  input  logic [DW-1:0]                in_data,
  output logic                         out_valid,
  input  logic                         out_ready,
  output logic [K-1:0][K-1:0][DW-1:0]  win,
  output logic [K-1:0][K-1:0]          in_img,
  output logic [ss_pkg::COORD_W-1:0]   out_x,
  output logic [ss_pkg::COORD_W-1:0]   out_y
);
  import ss_pkg::*;
  localparam int R = K / 2;
  localparam int LBW = MAXW + R;

  logic [COORD_W:0] cx, cy;              // cursor in the padded frame
  logic [DW-1:0] lb [K-1][LBW];          // lb[0] = newest stored row
  logic real_pos, step;
  logic [DW-1:0] col_in;
  logic [K-1:0][DW-1:0] col;             // column entering the window

  assign real_pos = (cx < {1'b0, width}) && (cy < {1'b0, height});
  assign step     = (real_pos ? in_valid : 1'b1) && (!out_valid || out_ready);
  assign in_ready = real_pos && (!out_valid || out_ready);
  assign col_in   = real_pos ? in_data : '0;

  always_comb begin
    for (int r = 0; r < K - 1; r++) col[r] = lb[K-2-r][cx];
    col[K-1] = col_in;
  end

  always_ff @(posedge clk) begin
    if (step) begin
      lb[0][cx] <= col_in;
      for (int j = 1; j < K - 1; j++) lb[j][cx] <= lb[j-1][cx];
      for (int r = 0; r < K; r++) begin
        for (int c = 0; c < K - 1; c++) win[r][c] <= win[r][c+1];
        win[r][K-1] <= col[r];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cx <= '0; cy <= '0; out_valid <= 1'b0; out_x <= '0; out_y <= '0;
    end else if (step) begin
      out_valid <= (cx >= R) && (cy >= R);
      out_x     <= COORD_W'(cx - R);
      out_y     <= COORD_W'(cy - R);
      if (cx == {1'b0, width} + R - 1) begin
        cx <= '0;
        cy <= (cy == {1'b0, height} + R - 1) ? '0 : cy + 1'b1;
      end else begin
        cx <= cx + 1'b1;
      end
    end else if (out_ready) begin
      out_valid <= 1'b0;
    end
  end

  always_comb begin
    for (int r = 0; r < K; r++)
      for (int c = 0; c < K; c++) begin
        automatic int yy = int'(out_y) - R + r;
        automatic int xx = int'(out_x) - R + c;
        in_img[r][c] = (yy >= 0) && (yy < int'(height)) && (xx >= 0) && (xx < int'(width));
      end
  end
endmodule
