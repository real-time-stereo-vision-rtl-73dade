// End-to-end test of scenescan_top with every parameter at its default (P = 32, DMAX = 256, lines up to 1856 pixels), on two 640 x 480 frames with a 128 pixel disparity range (n_i = 4), the first configuration of the frame-rate table.
//
// Scene: the left image is random texture with a flat (untextured) square;
// the right image is the left one shifted by D0 pixels, except for a few
// small patches shifted by D0 + 6 (they become speckles). Frame 0 uses an
// identity rectification map; frame 1 offsets the right image by +2.0
// pixels horizontally in the map, so the disparity seen after
// rectification becomes D0 + 2. Checks: the number and order of outputs,
// that most pixels of the clean area are valid and within one pixel of the
// expected disparity, and that every mechanism of the pipeline happened at
// least once (input stall, output stall, uniqueness / texture / consistency
// rejects, sub-pixel offsets, speckle removal, gap filling, smoothing).
module tb_scenescan_full;
  import ss_pkg::*;
  localparam int W = 640, H = 480, N = W * H, FR = 2;
  localparam int D0 = 9, NI = 4;
  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  logic cam_valid, cam_ready, map_valid, map_ready, disp_valid, disp_ready;
  logic [7:0] cam_l, cam_r;
  rect_map_t map;
  logic [11:0] disp;
  logic ev_pixel, ev_uniq_fail, ev_tex_fail, ev_subpix, ev_cons_fail, ev_speckle, ev_gap_fill, ev_smooth;
  int checks = 0, failures = 0;
  logic [7:0] left [H][W + 64];
  bit patch [H][W];
  int cnt [10];
  string names [10] = '{"input stall", "output stall", "uniqueness reject", "texture reject",
                        "consistency reject", "sub-pixel offset", "speckle removed", "gap filled",
                        "smoothed", "pixel"};

  always #5 clk = ~clk;

  scenescan_top  dut (
    .clk, .rst_n, .cfg, .cam_valid, .cam_ready, .cam_l, .cam_r,
    .map_valid, .map_ready, .map, .disp_valid, .disp_ready, .disp,
    .ev_pixel, .ev_uniq_fail, .ev_tex_fail, .ev_subpix, .ev_cons_fail,
    .ev_speckle, .ev_gap_fill, .ev_smooth);

  function automatic bit flat(int y, int x);
    return (y >= H / 2 - 4 && y < H / 2 + 4 && x >= W / 2 && x < W / 2 + 10);
  endfunction

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg = '0;
    cfg.width = 11'(W); cfg.height = 11'(H);
    cfg.p1 = 8'd8; cfg.p2 = 8'd48;
    cfg.n_iter = 4'(NI); cfg.disp_offset = 8'd0;
    cfg.uniq_q = 8'd18;         // q = 1.125
    cfg.cons_tc = 8'd1;
    cfg.tex_thresh = 16'd120;
    cfg.speckle_ws = 4'd7; cfg.speckle_sim = 8'd16;
    cfg.gap_lmax = 4'd4; cfg.gap_sim = 8'd32;
    cfg.nr_thresh = 8'd16;
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W + 64; x++) left[y][x] = 8'($urandom_range(0, 255));
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        if (flat(y, x)) left[y][x] = 8'd128;
        patch[y][x] = 0;
      end
    for (int k = 0; k < 4; k++) begin
      int py, px;
      py = 3 + (k * 5) % (H - 6); px = W / 4 + k * (W / 8);
      for (int y = py; y < py + 2; y++) for (int x = px; x < px + 2; x++) patch[y][x] = 1;
    end
    for (int i = 0; i < 10; i++) cnt[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
  end

  // right pixel (x, y) of the camera: the left scene seen D0 (or D0+6) further
  function automatic logic [7:0] right_px(int y, int x);
    int xs;
    xs = x + (patch[y][x] ? D0 + 6 : D0);
    if (xs >= W) return left[y][xs];          // beyond the left image: still textured
    return left[y][xs];
  endfunction

  int ii = 0, mi = 0;
  always @(posedge clk) begin
    automatic int nxt = ii, nm = mi;
    if (rst_n && cam_valid && cam_ready) nxt = ii + 1;
    if (rst_n && map_valid && map_ready) nm = mi + 1;
    ii <= nxt; mi <= nm;
    if (rst_n && cam_valid && !cam_ready) cnt[0]++;
    if (!rst_n) begin cam_valid <= 0; map_valid <= 0; end
    else begin
      if (nxt < FR * N) begin
        cam_valid <= 1'b1;
        cam_l <= left[(nxt / W) % H][nxt % W];
        cam_r <= right_px((nxt / W) % H, nxt % W);
      end else cam_valid <= 1'b0;
      if (nm < FR * N) begin
        map_valid <= 1'b1;
        map <= '{dxl: '0, dyl: '0, dxr: (nm >= N) ? 11'sd32 : 11'sd0, dyr: '0};
      end else map_valid <= 1'b0;
    end
  end

  int oi = 0, good [FR], clean [FR], valid_n [FR];
  always @(posedge clk) disp_ready <= rst_n && ($urandom_range(0, 7) != 0);
  always @(posedge clk) if (rst_n) begin
    if (disp_valid && !disp_ready) cnt[1]++;
    if (ev_uniq_fail) cnt[2]++;
    if (ev_tex_fail)  cnt[3]++;
    if (ev_cons_fail) cnt[4]++;
    if (ev_subpix)    cnt[5]++;
    if (ev_speckle)   cnt[6]++;
    if (ev_gap_fill)  cnt[7]++;
    if (ev_smooth)    cnt[8]++;
    if (ev_pixel)     cnt[9]++;
  end
  always @(posedge clk) if (rst_n && disp_valid && disp_ready) begin
    automatic int f = oi / N, y = (oi / W) % H, x = oi % W;
    automatic int expd = (f == 0) ? D0 : D0 + 2;
    if (oi % N == 0) begin good[f] = 0; clean[f] = 0; valid_n[f] = 0; end
    if (disp != DISP_INVALID) valid_n[f]++;
    // clean area: away from the occluded left border, the flat square, the
    // patches and the image border
    if (x >= D0 + 8 && x < W - 4 && y >= 3 && y < H - 3 && !flat(y, x) &&
        !(y > 0 && x > 0 && (patch[y][x] || patch[y-1][x] || patch[y][x-1] || patch[y-1][x-1]))) begin
      clean[f]++;
      if (disp != DISP_INVALID && int'(disp) >= expd * 16 - 16 && int'(disp) <= expd * 16 + 16) good[f]++;
    end
    oi <= oi + 1;
    if (oi == FR * N - 1) begin
      for (int k = 0; k < FR; k++) begin
        $display("frame %0d: %0d of %0d clean pixels within 1 px of %0d; %0d valid of %0d", k, good[k], clean[k],
                 (k == 0) ? D0 : D0 + 2, valid_n[k], N);
        checks++;
        if (good[k] * 10 < clean[k] * 8) failures++;
      end
      for (int i = 0; i < 10; i++) begin
        $display("%s: %0d", names[i], cnt[i]);
        checks++;
        if (cnt[i] == 0) failures++;
      end
      checks++;
      if (cnt[9] != FR * N) failures++;
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end
endmodule
