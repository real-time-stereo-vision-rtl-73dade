// Self-checking test of noise_reduce. Two random frames of disparities
// (smooth regions, steps and invalid pixels) are streamed in with random
// input gaps and output stalls; every output is compared with a reference
// masked 3x3 mean computed here from the frame. Also checks the order and
// number of outputs and the latency bound of the window.
module tb_noise_reduce;
  localparam int W = 23, H = 9, MAXW = 32, FR = 2;
  localparam logic [11:0] INV = 12'hFFF;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready, out_changed;
  logic [11:0] in_disp, out_disp;
  logic [7:0] thresh = 8'd24;
  int checks = 0, failures = 0, n_changed = 0;
  logic [11:0] img [FR][H][W];

  always #5 clk = ~clk;

  noise_reduce #(.K(3), .MAXW(MAXW)) dut (
    .clk, .rst_n, .width(11'(W)), .height(11'(H)), .thresh,
    .in_valid, .in_ready, .in_disp, .out_valid, .out_ready, .out_disp, .out_changed);

  function automatic int ref_px(int f, int y, int x);
    int cen, sum, n;
    cen = img[f][y][x];
    if (cen == INV) return INV;
    sum = 0; n = 0;
    for (int dy = -1; dy <= 1; dy++)
      for (int dx = -1; dx <= 1; dx++) begin
        int yy = y + dy, xx = x + dx, v;
        if (yy < 0 || yy >= H || xx < 0 || xx >= W) continue;
        v = img[f][yy][xx];
        if (v == INV) continue;
        if (((v > cen) ? v - cen : cen - v) > int'(thresh)) continue;
        sum += v; n++;
      end
    return (sum + n / 2) / n;
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
          if ($urandom_range(0, 9) == 0) img[f][y][x] = INV;
          else img[f][y][x] = 12'(((x < W / 2) ? 400 : 900) + $urandom_range(0, 20));
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
