// Self-checking test of sgm_stereo at reduced size (P = 4, DMAX = 16).
// Random census codes for two 13 x 5 frames; a reference computes the matching
// costs and the four path recurrences (left, upper-left, top, upper-right)
// over the whole frame, and every output group is compared with it, along
// with its coordinates and iteration index. Frame 0 runs with random input
// gaps and output stalls; frame 1 runs without, and there the group rate
// must be one per cycle, i.e. n_iter cycles per pixel.
module tb_sgm_stereo;
  localparam int P = 4, DMAX = 16, MAXW = 16, W = 13, H = 5, FR = 2, N = W * H;
  localparam int NI = 3, OD = 2, NK = NI * P, P1 = 7, P2 = 40;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, in_tex, out_valid, out_ready, out_last, out_tex;
  logic [23:0] in_cl, in_cr;
  logic [P-1:0][11:0] out_cost;
  logic [3:0] out_iter;
  logic [10:0] out_x, out_y;
  int checks = 0, failures = 0;
  logic [23:0] cl [FR][H][W], cr [FR][H][W];
  int S [FR][H][W][NK];

  always #5 clk = ~clk;

  sgm_stereo #(.P(P), .DMAX(DMAX), .CBW(24), .CW(10), .SW(12), .MAXW(MAXW)) dut (
    .clk, .rst_n, .width(11'(W)), .height(11'(H)), .p1(8'(P1)), .p2(8'(P2)),
    .n_iter(4'(NI)), .disp_offset(8'(OD)),
    .in_valid, .in_ready, .in_cl, .in_cr, .in_tex,
    .out_valid, .out_ready, .out_cost, .out_iter, .out_last, .out_x, .out_y, .out_tex);

  task automatic build_ref(int f);
    int L [4][H][W][NK];
    int dxs [4], dys [4];
    dxs = '{-1, -1, 0, 1}; dys = '{0, -1, -1, -1};
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++)
        for (int k = 0; k < NK; k++) begin
          int d, c;
          d = OD + k;
          c = (x - d >= 0) ? $countones(cl[f][y][x] ^ cr[f][y][x - d]) : 24;
          S[f][y][x][k] = 0;
          for (int r = 0; r < 4; r++) begin
            int px, py, mn, m;
            px = x + dxs[r]; py = y + dys[r];
            if (px < 0 || px >= W || py < 0) L[r][y][x][k] = c;
            else begin
              mn = 1 << 20;
              for (int q = 0; q < NK; q++) if (L[r][py][px][q] < mn) mn = L[r][py][px][q];
              m = L[r][py][px][k];
              if (k > 0 && L[r][py][px][k-1] + P1 < m) m = L[r][py][px][k-1] + P1;
              if (k < NK - 1 && L[r][py][px][k+1] + P1 < m) m = L[r][py][px][k+1] + P1;
              if (mn + P2 < m) m = mn + P2;
              L[r][y][x][k] = c + m - mn;
            end
            S[f][y][x][k] += L[r][y][x][k];
          end
        end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int f = 0; f < FR; f++) begin
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          cl[f][y][x] = 24'($urandom);
          // right image: the left codes shifted by a disparity of 5, plus noise
          cr[f][y][x] = (x + 5 < W) ? 24'(0) : 24'($urandom);
        end
      for (int y = 0; y < H; y++)
        for (int x = 0; x + 5 < W; x++) cr[f][y][x] = cl[f][y][x + 5] ^ (24'b1 << $urandom_range(0, 23));
      build_ref(f);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
  end

  int ii = 0;
  always @(posedge clk) begin
    automatic int nxt = ii;
    if (rst_n && in_valid && in_ready) nxt = ii + 1;
    ii <= nxt;
    if (!rst_n) in_valid <= 1'b0;
    else if (nxt < FR * N && ((in_valid && !in_ready) || nxt >= N || $urandom_range(0, 3) != 0)) begin
      in_valid <= 1'b1;
      in_cl  <= cl[nxt / N][(nxt / W) % H][nxt % W];
      in_cr  <= cr[nxt / N][(nxt / W) % H][nxt % W];
      in_tex <= 1'(nxt & 1);
    end else in_valid <= 1'b0;
  end

  int oi = 0, it = 0, first_f1 = -1, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) out_ready <= rst_n && (oi >= N || $urandom_range(0, 3) != 0);
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    automatic int f = oi / N, y = (oi / W) % H, x = oi % W;
    automatic bit bad = 0;
    for (int j = 0; j < P; j++) if (int'(out_cost[j]) != S[f][y][x][it * P + j]) bad = 1;
    if (int'(out_x) != x || int'(out_y) != y || int'(out_iter) != it) bad = 1;
    if (out_last != (it == NI - 1) || out_tex != 1'(oi & 1)) bad = 1;
    checks++;
    if (bad) begin
      failures++;
      if (failures < 5) $display("f%0d (%0d,%0d) it %0d got %0d %0d %0d %0d exp %0d %0d %0d %0d", f, x, y, it,
        out_cost[0], out_cost[1], out_cost[2], out_cost[3],
        S[f][y][x][it*P], S[f][y][x][it*P+1], S[f][y][x][it*P+2], S[f][y][x][it*P+3]);
    end
    if (f == 1 && first_f1 < 0) first_f1 <= cyc;
    if (it == NI - 1) begin it <= 0; oi <= oi + 1; end else it <= it + 1;
    if (oi == FR * N - 1 && it == NI - 1) begin
      // frame 1: N*NI groups on consecutive cycles
      checks++;
      if (cyc - first_f1 != N * NI - 1) begin
        failures++;
        $display("rate: %0d cycles for %0d groups", cyc - first_f1 + 1, N * NI);
      end
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end
endmodule
