// Self-checking test of rectify with the paper's 79 x 79 window. A random
// left/right frame pair and a random displacement map (offsets over the
// whole -39..+39 range, a few beyond it to test clamping, 4 fractional bits)
// are streamed in by independent drivers with random gaps; the output side
// stalls at random. Every output pixel is compared with a bilinear
// interpolation computed here. Two frames test the frame wrap.
module tb_rectify;
  localparam int W = 90, H = 50, MAXW = 96, FR = 2, N = W * H;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, map_valid, map_ready, out_valid, out_ready;
  logic [7:0] in_l, in_r, out_l, out_r;
  ss_pkg::rect_map_t map;
  int checks = 0, failures = 0, n_clamped = 0;
  logic [7:0] img_l [FR][H][W], img_r [FR][H][W];
  ss_pkg::rect_map_t mp [FR][H][W];

  always #5 clk = ~clk;

  rectify #(.WIN(79), .MAXW(MAXW)) dut (
    .clk, .rst_n, .width(11'(W)), .height(11'(H)),
    .in_valid, .in_ready, .in_l, .in_r, .map_valid, .map_ready, .map,
    .out_valid, .out_ready, .out_l, .out_r);

  function automatic int clampi(int v, int lo, int hi);
    return v < lo ? lo : (v > hi ? hi : v);
  endfunction

  function automatic int bil(int f, int ch, int x, int y, int dx, int dy);
    int ix, iy, fx, fy, x0, x1, y0, y1, p00, p01, p10, p11;
    dx = clampi(dx, -39 * 16, 39 * 16 + 15);
    dy = clampi(dy, -39 * 16, 39 * 16 + 15);
    ix = dx >>> 4; iy = dy >>> 4; fx = dx & 15; fy = dy & 15;
    x0 = clampi(x + ix, 0, W - 1); x1 = clampi(x + ix + 1, 0, W - 1);
    y0 = clampi(y + iy, 0, H - 1); y1 = clampi(y + iy + 1, 0, H - 1);
    if (ch == 0) begin
      p00 = img_l[f][y0][x0]; p01 = img_l[f][y0][x1]; p10 = img_l[f][y1][x0]; p11 = img_l[f][y1][x1];
    end else begin
      p00 = img_r[f][y0][x0]; p01 = img_r[f][y0][x1]; p10 = img_r[f][y1][x0]; p11 = img_r[f][y1][x1];
    end
    return (p00 * (16 - fx) * (16 - fy) + p01 * fx * (16 - fy) + p10 * (16 - fx) * fy + p11 * fx * fy + 128) >> 8;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int f = 0; f < FR; f++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          img_l[f][y][x] = 8'($urandom_range(0, 255));
          img_r[f][y][x] = 8'((x * 3 + y * 5 + f * 7) & 255);
          if ($urandom_range(0, 49) == 0) begin
            mp[f][y][x].dxl = 11'sd700; mp[f][y][x].dyl = -11'sd700;
          end else begin
            mp[f][y][x].dxl = 11'($signed($urandom_range(0, 1279)) - 640);
            mp[f][y][x].dyl = 11'($signed($urandom_range(0, 1279)) - 640);
          end
          mp[f][y][x].dxr = 11'($signed($urandom_range(0, 63)) - 32);
          mp[f][y][x].dyr = 11'($signed($urandom_range(0, 63)) - 32);
        end
    repeat (3) @(posedge clk);
    rst_n = 1;
  end

  int ii = 0, mi = 0;
  always @(posedge clk) begin
    automatic int nxt = ii, nm = mi;
    if (rst_n && in_valid && in_ready) nxt = ii + 1;
    if (rst_n && map_valid && map_ready) nm = mi + 1;
    ii <= nxt; mi <= nm;
    if (!rst_n) begin in_valid <= 0; map_valid <= 0; end
    else begin
      if (nxt < FR * N && ((in_valid && !in_ready) || $urandom_range(0, 3) != 0)) begin
        in_valid <= 1'b1;
        in_l <= img_l[nxt / N][(nxt / W) % H][nxt % W];
        in_r <= img_r[nxt / N][(nxt / W) % H][nxt % W];
      end else in_valid <= 1'b0;
      // the map word, once offered, is held until taken
      if (nm < FR * N && ((map_valid && !map_ready) || $urandom_range(0, 3) != 0)) begin
        map_valid <= 1'b1;
        map <= mp[nm / N][(nm / W) % H][nm % W];
      end else map_valid <= 1'b0;
    end
  end

  int oi = 0;
  always @(posedge clk) out_ready <= rst_n && ($urandom_range(0, 4) != 0);
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    automatic int f = oi / N, y = (oi / W) % H, x = oi % W;
    automatic int el = bil(f, 0, x, y, int'(mp[f][y][x].dxl), int'(mp[f][y][x].dyl));
    automatic int er = bil(f, 1, x, y, int'(mp[f][y][x].dxr), int'(mp[f][y][x].dyr));
    checks += 2;
    if (int'(out_l) != el) failures++;
    if (int'(out_r) != er) failures++;
    if ((int'(out_l) != el || int'(out_r) != er) && failures < 6)
      $display("f%0d (%0d,%0d) got %0d/%0d exp %0d/%0d", f, x, y, out_l, out_r, el, er);
    if (mp[f][y][x].dxl == 11'sd700) n_clamped++;
    oi <= oi + 1;
    if (oi == FR * N - 1) begin
      checks++;
      if (n_clamped == 0) failures++;
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end
endmodule
