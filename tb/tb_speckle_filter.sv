// Self-checking test of speckle_filter. Two frames with large smooth
// regions, scattered small blobs of odd disparity and invalid pixels are
// streamed in with random gaps and stalls; each output is compared with a
// reference that grows the region from the centre by breadth-first search
// (ITER steps, inside the w_s window) and removes the pixel when the region
// does not reach the window border.
module tb_speckle_filter;
  localparam int W = 23, H = 9, MAXW = 32, FR = 2;
  localparam logic [11:0] INV = 12'hFFF;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready, out_changed;
  logic [11:0] in_disp, out_disp;
  logic [3:0] ws = 4'd7;
  logic [7:0] sim = 8'd16;
  localparam int WSM = 9, ITER = 18;
  int checks = 0, failures = 0, n_changed = 0;
  logic [11:0] img [FR][H][W];

  always #5 clk = ~clk;

  speckle_filter #(.WS_MAX(WSM), .MAXW(MAXW)) dut (
    .clk, .rst_n, .width(11'(W)), .height(11'(H)), .ws, .sim,
    .in_valid, .in_ready, .in_disp, .out_valid, .out_ready, .out_disp, .out_removed(out_changed));

  function automatic int ref_px(int f, int y, int x);
    int rr, dst [WSM][WSM];
    bit ok [WSM][WSM];
    bit hit;
    if (img[f][y][x] == INV) return INV;
    rr = ws / 2;
    for (int r = 0; r < WSM; r++)
      for (int c = 0; c < WSM; c++) begin
        int yy = y + r - WSM / 2, xx = x + c - WSM / 2;
        ok[r][c] = (yy >= 0 && yy < H && xx >= 0 && xx < W) && (img[f][yy][xx] != INV)
                   && ((r > WSM/2 ? r - WSM/2 : WSM/2 - r) <= rr) && ((c > WSM/2 ? c - WSM/2 : WSM/2 - c) <= rr);
        dst[r][c] = -1;
      end
    dst[WSM/2][WSM/2] = 0;
    for (int it = 0; it < ITER; it++)
      for (int r = 0; r < WSM; r++)
        for (int c = 0; c < WSM; c++)
          if (dst[r][c] == it) begin
            int nr [4], nc [4];
            nr = '{r, r, r - 1, r + 1}; nc = '{c - 1, c + 1, c, c};
            for (int k = 0; k < 4; k++) begin
              int a, b, va, vb;
              a = nr[k]; b = nc[k];
              if (a < 0 || a >= WSM || b < 0 || b >= WSM) continue;
              if (!ok[a][b] || dst[a][b] >= 0) continue;
              va = img[f][y + r - WSM/2][x + c - WSM/2];
              vb = img[f][y + a - WSM/2][x + b - WSM/2];
              if (((va > vb) ? va - vb : vb - va) <= int'(sim)) dst[a][b] = it + 1;
            end
          end
    hit = 0;
    for (int r = 0; r < WSM; r++)
      for (int c = 0; c < WSM; c++)
        if (dst[r][c] >= 0 && (((r > WSM/2 ? r - WSM/2 : WSM/2 - r) == rr) || ((c > WSM/2 ? c - WSM/2 : WSM/2 - c) == rr))) hit = 1;
    return hit ? int'(img[f][y][x]) : INV;
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
          if ($urandom_range(0, 14) == 0) img[f][y][x] = INV;
          else img[f][y][x] = 12'(((x < W / 2) ? 400 : 900) + $urandom_range(0, 8));
    // small blobs of a different disparity
    for (int f = 0; f < FR; f++)
      for (int k = 0; k < 6; k++) begin
        int by, bx;
        by = $urandom_range(0, H - 2); bx = $urandom_range(0, W - 3);
        for (int dy = 0; dy < 2; dy++) for (int dx = 0; dx < 3; dx++)
          if ($urandom_range(0, 4) != 0) img[f][by + dy][bx + dx] = 12'(2000 + 3 * k);
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
