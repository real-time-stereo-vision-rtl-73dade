// Self-checking test of cost_volume_pp (and the consistency_check inside it)
// at reduced size (P = 4, DMAX = 16, 3 iterations, o_d = 2). Cost volumes of
// three 20-pixel rows are generated with a planted minimum per pixel, some
// ambiguous pixels (uniqueness fails), some untextured ones and some whose
// minimum disagrees with their neighbours (consistency fails). A reference
// computes winner-takes-all, the parabola offset, the uniqueness and
// texture tests and the right-image disparity for the consistency check.
// Every output disparity is compared; each mechanism must occur.
module tb_cost_volume_pp;
  localparam int P = 4, DMAX = 16, W = 20, H = 3, N = W * H;
  localparam int NI = 3, OD = 2, NK = NI * P, Q = 20, TC = 1, INF = 4095;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, in_last, in_tex, out_valid, out_ready;
  logic [P-1:0][11:0] in_cost;
  logic [3:0] in_iter;
  logic [10:0] in_x;
  logic [11:0] out_disp;
  logic ev_pixel, ev_uniq_fail, ev_tex_fail, ev_subpix, ev_cons_fail;
  int checks = 0, failures = 0;
  int S [H][W][NK];
  bit tex [H][W];
  int expd [H][W];
  int n_uf = 0, n_tf = 0, n_sp = 0, n_cf = 0;

  always #5 clk = ~clk;

  cost_volume_pp #(.P(P), .DMAX(DMAX), .SW(12)) dut (
    .clk, .rst_n, .width(11'(W)), .n_iter(4'(NI)), .disp_offset(8'(OD)),
    .uniq_q(8'(Q)), .cons_tc(8'(TC)),
    .in_valid, .in_ready, .in_cost, .in_iter, .in_last, .in_x, .in_tex,
    .out_valid, .out_ready, .out_disp,
    .ev_pixel, .ev_uniq_fail, .ev_tex_fail, .ev_subpix, .ev_cons_fail);

  task automatic build_ref();
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        int kb, cb, c2, cl, cr, num, den, q, off, ds;
        bit ok;
        kb = 0; cb = S[y][x][0];
        for (int k = 1; k < NK; k++) if (S[y][x][k] < cb) begin cb = S[y][x][k]; kb = k; end
        c2 = INF;
        for (int k = 0; k < NK; k++) if (k != kb && S[y][x][k] < c2) c2 = S[y][x][k];
        off = 0;
        if (kb > 0 && kb < NK - 1) begin
          cl = S[y][x][kb-1]; cr = S[y][x][kb+1];
          num = cl - cr; den = cl + cr - 2 * cb;
          if (den > 0) begin
            q = (((num < 0) ? -num : num) * 16 + den) / (2 * den);
            if (q > 8) q = 8;
            off = (num < 0) ? -q : q;
          end
        end
        ds = (OD + kb) * 16 + off;
        if (ds < 0) ds = 0;
        ok = (cb * Q < c2 * 16) && tex[y][x];
        if (ok) begin
          // right pixel x - dl: smallest S(xr + d, d) over its candidates
          int dl, xr, bc, bd;
          dl = OD + kb; xr = x - dl;
          if (xr < 0) ok = 0;
          else begin
            bc = INF + 1; bd = 0;
            for (int k = 0; k < NK; k++)
              if (xr + OD + k < W && S[y][xr + OD + k][k] < bc) begin bc = S[y][xr + OD + k][k]; bd = OD + k; end
            if (((dl > bd) ? dl - bd : bd - dl) > TC) ok = 0;
          end
        end
        expd[y][x] = ok ? ds : INF;
      end
  endtask

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        int kt, sel;
        sel = $urandom_range(0, 9);
        kt = (sel == 0) ? $urandom_range(0, NK - 1) : 4 + y;  // true disparity OD+4+y
        for (int k = 0; k < NK; k++) S[y][x][k] = 200 + $urandom_range(0, 300);
        S[y][x][kt] = 40 + $urandom_range(0, 10);
        if (kt > 0) S[y][x][kt-1] = 60 + $urandom_range(0, 40);
        if (kt < NK - 1) S[y][x][kt+1] = 60 + $urandom_range(0, 40);
        if (sel == 1) S[y][x][(kt + 6) % NK] = S[y][x][kt] + 2;   // ambiguous
        tex[y][x] = (sel != 2);
      end
    build_ref();
    repeat (3) @(posedge clk);
    rst_n = 1;
  end

  // group driver: group gi = pixel gi / NI, iteration gi % NI
  int gi = 0;
  always @(posedge clk) begin
    automatic int nxt = gi;
    if (rst_n && in_valid && in_ready) nxt = gi + 1;
    gi <= nxt;
    if (!rst_n) in_valid <= 1'b0;
    else if (nxt < N * NI && ((in_valid && !in_ready) || $urandom_range(0, 3) != 0)) begin
      automatic int pix = nxt / NI, it = nxt % NI, y = pix / W, x = pix % W;
      in_valid <= 1'b1;
      for (int j = 0; j < P; j++) in_cost[j] <= 12'(S[y][x][it * P + j]);
      in_iter <= 4'(it); in_last <= (it == NI - 1); in_x <= 11'(x); in_tex <= tex[y][x];
    end else in_valid <= 1'b0;
  end

  always @(posedge clk) if (rst_n) begin
    if (ev_uniq_fail) n_uf++;
    if (ev_tex_fail)  n_tf++;
    if (ev_subpix)    n_sp++;
    if (ev_cons_fail) n_cf++;
  end

  int oi = 0;
  always @(posedge clk) out_ready <= rst_n && ($urandom_range(0, 4) != 0);
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    automatic int y = oi / W, x = oi % W;
    checks++;
    if (int'(out_disp) != expd[y][x]) begin
      failures++;
      if (failures < 6) $display("(%0d,%0d) got %0d exp %0d", x, y, out_disp, expd[y][x]);
    end
    oi <= oi + 1;
    if (oi == N - 1) begin
      checks += 4;
      if (n_uf == 0) failures++;
      if (n_tf == 0) failures++;
      if (n_sp == 0) failures++;
      if (n_cf == 0) failures++;
      $display("uniq fails %0d, texture fails %0d, sub-pixel %0d, consistency fails %0d", n_uf, n_tf, n_sp, n_cf);
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end
endmodule
