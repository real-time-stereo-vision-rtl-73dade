// Stereo image rectification by bilinear interpolation in a 79 x 79 window.
//
// The synchronized left/right camera pixels enter as one stream, in raster
// order. For every output pixel (x, y) the rectification map supplies one
// word with a sub-pixel displacement (dx, dy) for the left and one for the
// right image, interleaved in a single stream as the paper describes. The
// output pixel is the bilinear interpolation of the four input pixels around
// (x + dx, y + dy). Offsets are limited to the window: the integer part to
// -39..+39 pixels (window 79 x 79, as in the paper), so the four neighbours
// reach at most 40 rows/columns away; larger offsets are clamped. Samples
// outside the image are clamped to the nearest border pixel.
//
// How it works: 2*RAD+3 = 81 image rows per camera are held in a circular row
// memory. A cursor walks a frame padded by RAD+1 = 40 columns and rows (like
// win_stream); each step stores one input pixel and makes the output pixel 40
// rows and 40 columns behind it pending. A pending pixel leaves, combined with
// one map word, when out_ready and map_valid are both high; the map word is
// consumed with it.
//
// Own choices (the paper is silent): uncompressed map words of 4 fractional
// bits (ss_pkg::rect_map_t; the paper's compressed map format is not given),
// clamping at the image border, round-to-nearest in the interpolation,
// valid/ready handshakes.
// Lint note: Verilator reports rst_n as used both asynchronously (reset of
// the flip-flops) and synchronously; the synchronous use is only the
// assertion's 'disable iff (!rst_n)', which creates no hardware.
module rectify #(
  parameter int WIN  = 79,
  parameter int MAXW = ss_pkg::MAX_W
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [ss_pkg::COORD_W-1:0]  width,
  input  logic [ss_pkg::COORD_W-1:0]  height,
  // camera pixel pair
  input  logic                        in_valid,
  output logic                        in_ready,
  input  logic [ss_pkg::PIX_W-1:0]    in_l,
  input  logic [ss_pkg::PIX_W-1:0]    in_r,
  // rectification map, one word per output pixel
  input  logic                        map_valid,
  output logic                        map_ready,
  input  ss_pkg::rect_map_t           map,
  // rectified pixel pair
  output logic                        out_valid,
  input  logic                        out_ready,
  output logic [ss_pkg::PIX_W-1:0]    out_l,
  output logic [ss_pkg::PIX_W-1:0]    out_r
);
  import ss_pkg::*;
  localparam int RAD   = WIN / 2;        // 39
  localparam int LAG   = RAD + 1;        // 40: farthest neighbour
  localparam int ROWS  = 2 * LAG + 1;    // 81 row slots
  localparam int SW    = $clog2(ROWS);

  logic [PIX_W-1:0] mem_l [ROWS][MAXW];
  logic [PIX_W-1:0] mem_r [ROWS][MAXW];

  logic [COORD_W:0] cx, cy;
  logic [SW-1:0]    wslot;               // slot of cursor row cy
  logic             real_pos, step;
  logic             pend;
  logic [COORD_W-1:0] xo, yo;
  logic [SW-1:0]    yslot;               // slot of row yo

  assign real_pos  = (cx < {1'b0, width}) && (cy < {1'b0, height});
  assign step      = (real_pos ? in_valid : 1'b1) && (!pend || (map_valid && out_ready));
  assign in_ready  = real_pos && (!pend || (map_valid && out_ready));
  assign out_valid = pend && map_valid;
  assign map_ready = pend && out_ready;

  always_ff @(posedge clk) begin
    if (step && real_pos) begin
      mem_l[wslot][cx[COORD_W-1:0]] <= in_l;
      mem_r[wslot][cx[COORD_W-1:0]] <= in_r;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cx <= '0; cy <= '0; wslot <= '0; pend <= 1'b0;
      xo <= '0; yo <= '0; yslot <= '0;
    end else begin
      if (step) begin
        pend  <= (cx >= LAG) && (cy >= LAG);
        xo    <= COORD_W'(cx - LAG);
        yo    <= COORD_W'(cy - LAG);
        yslot <= (int'(wslot) >= LAG) ? SW'(int'(wslot) - LAG) : SW'(int'(wslot) + ROWS - LAG);
        if (cx == {1'b0, width} + LAG - 1) begin
          cx <= '0;
          if (cy == {1'b0, height} + LAG - 1) begin
            cy <= '0; wslot <= '0;
          end else begin
            cy <= cy + 1'b1;
            wslot <= (int'(wslot) == ROWS - 1) ? '0 : wslot + 1'b1;
          end
        end else begin
          cx <= cx + 1'b1;
        end
      end else if (map_valid && out_ready) begin
        pend <= 1'b0;
      end
    end
  end

  // Bilinear sample of one image around (xo + dx, yo + dy).
  function automatic logic [PIX_W-1:0] sample(
      input logic [PIX_W-1:0] p00, input logic [PIX_W-1:0] p01,
      input logic [PIX_W-1:0] p10, input logic [PIX_W-1:0] p11,
      input logic [RECT_FRAC-1:0] fx, input logic [RECT_FRAC-1:0] fy);
    localparam int ONE = 1 << RECT_FRAC;
    int acc;
    acc = int'(p00) * (ONE - int'(fx)) * (ONE - int'(fy))
        + int'(p01) * int'(fx) * (ONE - int'(fy))
        + int'(p10) * (ONE - int'(fx)) * int'(fy)
        + int'(p11) * int'(fx) * int'(fy);
    return PIX_W'((acc + (1 << (2 * RECT_FRAC - 1))) >> (2 * RECT_FRAC));
  endfunction

  // Clamp a signed offset to the window: integer part -RAD..+RAD.
  function automatic int clamp_ofs(input logic signed [RECT_OFS_W-1:0] d);
    int v;
    v = int'(d);
    if (v < -RAD * (1 << RECT_FRAC)) v = -RAD * (1 << RECT_FRAC);
    if (v > RAD * (1 << RECT_FRAC) + (1 << RECT_FRAC) - 1) v = RAD * (1 << RECT_FRAC) + (1 << RECT_FRAC) - 1;
    return v;
  endfunction

  function automatic int clampi(input int v, input int lo, input int hi);
    return (v < lo) ? lo : ((v > hi) ? hi : v);
  endfunction

  // Row slot holding image row yo + delta, delta in -LAG..LAG.
  function automatic int slot_of(input int delta);
    int s;
    s = int'(yslot) + delta;
    if (s < 0) s += ROWS;
    if (s >= ROWS) s -= ROWS;
    return s;
  endfunction

  always_comb begin
    int ox, oy, ix, iy, x0, x1, y0, y1, s0, s1;
    logic [RECT_FRAC-1:0] fx, fy;
    // left image
    ox = clamp_ofs(map.dxl); oy = clamp_ofs(map.dyl);
    ix = ox >>> RECT_FRAC;   iy = oy >>> RECT_FRAC;
    fx = RECT_FRAC'(ox);     fy = RECT_FRAC'(oy);
    x0 = clampi(int'(xo) + ix,     0, int'(width) - 1);
    x1 = clampi(int'(xo) + ix + 1, 0, int'(width) - 1);
    y0 = clampi(int'(yo) + iy,     0, int'(height) - 1);
    y1 = clampi(int'(yo) + iy + 1, 0, int'(height) - 1);
    s0 = slot_of(y0 - int'(yo)); s1 = slot_of(y1 - int'(yo));
    out_l = sample(mem_l[s0][x0], mem_l[s0][x1], mem_l[s1][x0], mem_l[s1][x1], fx, fy);
    // right image
    ox = clamp_ofs(map.dxr); oy = clamp_ofs(map.dyr);
    ix = ox >>> RECT_FRAC;   iy = oy >>> RECT_FRAC;
    fx = RECT_FRAC'(ox);     fy = RECT_FRAC'(oy);
    x0 = clampi(int'(xo) + ix,     0, int'(width) - 1);
    x1 = clampi(int'(xo) + ix + 1, 0, int'(width) - 1);
    y0 = clampi(int'(yo) + iy,     0, int'(height) - 1);
    y1 = clampi(int'(yo) + iy + 1, 0, int'(height) - 1);
    s0 = slot_of(y0 - int'(yo)); s1 = slot_of(y1 - int'(yo));
    out_r = sample(mem_r[s0][x0], mem_r[s0][x1], mem_r[s1][x0], mem_r[s1][x1], fx, fy);
  end

  // A pending pixel waits for its map word; the map word must not change
  // while it is offered.
  property p_map_hold;
    @(posedge clk) disable iff (!rst_n) (map_valid && !map_ready) |=> map_valid;
  endproperty
  a_map_hold: assert property (p_map_hold);
endmodule
