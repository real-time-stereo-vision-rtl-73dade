// Self-checking test of gap_interp. Two frames of sloped disparity with
// horizontal, vertical and large holes, plus holes across a depth step,
// are streamed in with random gaps and stalls. The reference searches the
// nearest valid edges in the frame itself and applies the min(l_h, l_v) <=
// l_max rule, the edge similarity test and linear interpolation.
module tb_gap_interp;
  localparam int W = 29, H = 19, MAXW = 32, FR = 2;
  localparam logic [11:0] INV = 12'hFFF;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready, out_changed;
  logic [11:0] in_disp, out_disp;
  logic [3:0] lmax = 4'd5;
  logic [7:0] sim = 8'd64;
  localparam int LM = 8;
  int checks = 0, failures = 0, n_changed = 0;
  logic [11:0] img [FR][H][W];

  always #5 clk = ~clk;

  gap_interp #(.LMAX(LM), .MAXW(MAXW)) dut (
    .clk, .rst_n, .width(11'(W)), .height(11'(H)), .l_max(lmax), .sim,
    .in_valid, .in_ready, .in_disp, .out_valid, .out_ready, .out_disp, .out_filled(out_changed));

  function automatic int lerp(int e0, int e1, int a, int b);
    int num, q;
    num = (e1 - e0) * a;
    q = (num >= 0) ? (num + (a + b) / 2) / (a + b) : -((-num + (a + b) / 2) / (a + b));
    return e0 + q;
  endfunction

  function automatic int ref_px(int f, int y, int x);
    int d [4], v [4], dy [4], dx [4], lh, lv;
    bit okh, okv;
    if (img[f][y][x] != INV) return int'(img[f][y][x]);
    dx = '{-1, 1, 0, 0}; dy = '{0, 0, -1, 1};
    for (int k = 0; k < 4; k++) begin
      d[k] = 0; v[k] = 0;
      for (int t = 1; t <= LM; t++) begin
        int yy = y + t * dy[k], xx = x + t * dx[k];
        if (yy < 0 || yy >= H || xx < 0 || xx >= W) break;
        if (img[f][yy][xx] != INV) begin d[k] = t; v[k] = img[f][yy][xx]; break; end
      end
    end
    lh = d[0] + d[1] - 1; lv = d[2] + d[3] - 1;
    okh = d[0] && d[1] && lh <= lmax && ((v[0] > v[1]) ? v[0] - v[1] : v[1] - v[0]) <= sim;
    okv = d[2] && d[3] && lv <= lmax && ((v[2] > v[3]) ? v[2] - v[3] : v[3] - v[2]) <= sim;
    if (okh && (!okv || lh <= lv)) return lerp(v[0], v[1], d[0], d[1]);
    if (okv) return lerp(v[2], v[3], d[2], d[3]);
    return INV;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int f = 0; f < FR; f++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++)
          img[f][y][x] = 12'(((x < 20) ? 300 : 900) + 5 * x + 3 * y);
    for (int f = 0; f < FR; f++)
      for (int k = 0; k < 14; k++) begin
        int by, bx, lx, ly, t;
        by = $urandom_range(0, H - 1); bx = $urandom_range(0, W - 1);
        lx = $urandom_range(1, 9);     ly = $urandom_range(1, 3);
        if (k % 2) begin t = lx; lx = ly; ly = t; end
        for (int yy = by; yy < by + ly && yy < H; yy++)
          for (int xx = bx; xx < bx + lx && xx < W; xx++) img[f][yy][xx] = INV;
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
  end

  // input driver: pixel ii of the frame sequence, random gaps, valid held
  // until accepted
  int ii = 0;
  always @(posedge clk) begin
    automatic int nxt = ii;
    if (rst_n && in_valid && in_ready) nxt = ii + 1;
    ii <= nxt;
    if (!rst_n) in_valid <= 1'b0;
    else if (nxt < FR * H * W && ((in_valid && !in_ready) || $urandom_range(0, 3) != 0)) begin
      in_valid <= 1'b1;
      in_disp  <= img[nxt / (H * W)][(nxt / W) % H][nxt % W];
    end else in_valid <= 1'b0;
  end

  int of = 0, oy = 0, ox = 0;
  always @(posedge clk) out_ready <= rst_n && ($urandom_range(0, 3) != 0);
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (int'(out_disp) != ref_px(of, oy, ox)) begin
      failures++;
      if (failures < 5) $display("f%0d (%0d,%0d) got %0d exp %0d", of, ox, oy, out_disp, ref_px(of, oy, ox));
    end
    if (out_changed) n_changed++;
    if (ox == W - 1) begin
      ox <= 0;
      if (oy == H - 1) begin
        oy <= 0; of <= of + 1;
        if (of == FR - 1) begin
          checks++;
          if (n_changed == 0) failures++;
          $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
          $finish;
        end
      end else oy <= oy + 1;
    end else ox <= ox + 1;
  end
endmodule
