// Self-checking test of preproc. Two random stereo frames (flat and
// textured areas) are streamed in with random gaps and stalls; the census
// codes of both images and the texture flag of the left image are compared
// with references computed here from the frames.
module tb_preproc;
  localparam int W = 23, H = 9, MAXW = 32, FR = 2;
  localparam logic [11:0] INV = 12'hFFF;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready, out_changed;
  logic [11:0] in_disp, out_disp;
  logic [15:0] thresh = 16'd300;
  logic [23:0] census_l, census_r;
  logic [7:0] in_l, in_r;
  int checks = 0, failures = 0, n_changed = 0;
  logic [11:0] img [FR][H][W];

  always #5 clk = ~clk;

  preproc #(.K(5), .MAXW(MAXW)) dut (
    .clk, .rst_n, .width(11'(W)), .height(11'(H)), .tex_thresh(thresh),
    .in_valid, .in_ready, .in_l, .in_r, .out_valid, .out_ready, .census_l, .census_r,
    .textured(out_changed));
  assign in_l = in_disp[7:0];
  assign in_r = in_disp[11:8] * 16;

  function automatic int pix(int f, int y, int x, int ch);
    return ch ? int'(img[f][y][x][11:8]) * 16 : int'(img[f][y][x][7:0]);
  endfunction
  function automatic logic [23:0] ref_census(int f, int y, int x, int ch);
    logic [23:0] c;
    int b;
    b = 0;
    for (int r = -2; r <= 2; r++)
      for (int q = -2; q <= 2; q++) begin
        int yy, xx;
        if (r == 0 && q == 0) continue;
        yy = y + r; xx = x + q;
        c[b] = (yy >= 0 && yy < H && xx >= 0 && xx < W) && (pix(f, yy, xx, ch) < pix(f, y, x, ch));
        b++;
      end
    return c;
  endfunction
  function automatic bit ref_tex(int f, int y, int x);
    int s;
    s = 0;
    for (int r = -2; r <= 2; r++)
      for (int q = -2; q < 2; q++) begin
        int yy, xx, a, bb;
        yy = y + r; xx = x + q;
        if (yy < 0 || yy >= H || xx < 0 || xx + 1 >= W) continue;
        a = pix(f, yy, xx, 0); bb = pix(f, yy, xx + 1, 0);
        s += (a > bb) ? a - bb : bb - a;
      end
    return s >= int'(thresh);
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
          img[f][y][x] = (x < W / 3) ? {4'(y), 8'(100 + (x & 1))} : 12'($urandom_range(0, 4095));
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
    checks += 2;
    if (census_l != ref_census(of, oy, ox, 0)) failures++;
    if (census_r != ref_census(of, oy, ox, 1)) failures++;
    if (out_changed != ref_tex(of, oy, ox)) failures++;
    if (failures > 0 && failures < 4) $display("f%0d (%0d,%0d) %h %h %0b", of, ox, oy, census_l, census_r, out_changed);
    if (!out_changed) n_changed++;
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
