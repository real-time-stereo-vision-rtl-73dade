// Cost-volume post-processing: disparity selection, sub-pixel refinement,
// uniqueness check, texture invalidation and consistency check.
//
// Input is the cost-group stream of sgm_stereo (P aggregated costs per
// cycle, n_iter groups per left pixel). While the groups of one pixel pass,
// the module tracks the smallest cost c*, its disparity index, the costs at
// the disparities left and right of it (the right one may arrive with the
// next group) and the smallest cost at any other disparity. With the last
// group it forms the left result:
//   disparity = o_d + k*   (integer, winner-takes-all, ties to smaller d)
//             + subpixel_fit offset, as 8.4 fixed point (1/16 pixel);
//   invalid if uniq_check fails or the texture flag of the pixel is clear.
// The result and every cost group go on to consistency_check, whose output
// is the output of this module: one disparity per pixel in raster order.
// The order subpixel -> uniqueness -> consistency follows the paper; the
// texture flag is applied here, at the point where the disparity is formed,
// which is this design's choice (the paper lists the texture filter among
// the disparity-map filters).
module cost_volume_pp #(
  parameter int P    = 32,
  parameter int DMAX = 256,
  parameter int SW   = 12
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [ss_pkg::COORD_W-1:0]  width,
  input  logic [3:0]                  n_iter,
  input  logic [7:0]                  disp_offset,
  input  logic [7:0]                  uniq_q,
  input  logic [7:0]                  cons_tc,
  input  logic                        in_valid,
  output logic                        in_ready,
  input  logic [P-1:0][SW-1:0]        in_cost,
  input  logic [3:0]                  in_iter,
  input  logic                        in_last,
  input  logic [ss_pkg::COORD_W-1:0]  in_x,
  input  logic                        in_tex,
  output logic                        out_valid,
  input  logic                        out_ready,
  output logic [ss_pkg::DISP_W-1:0]   out_disp,
  // per-pixel events, valid with the pixel's last group (for monitoring)
  output logic                        ev_pixel,
  output logic                        ev_uniq_fail,
  output logic                        ev_tex_fail,
  output logic                        ev_subpix,
  output logic                        ev_cons_fail
);
  import ss_pkg::*;
  localparam logic [SW-1:0] INF = '1;
  localparam int KW = $clog2(DMAX);

  // running state of the pixel
  logic [SW-1:0] best, second, cl, cr, prev_last;
  logic [KW-1:0] bestk;
  logic          pend;

  // ---- analysis of the incoming group ----
  logic [SW-1:0] m1, m2;
  int            j1;
  always_comb begin
    m1 = INF; j1 = 0; m2 = INF;
    for (int j = 0; j < P; j++)
      if (in_cost[j] < m1) begin m1 = in_cost[j]; j1 = j; end
    for (int j = 0; j < P; j++)
      if (j != j1 && in_cost[j] < m2) m2 = in_cost[j];
  end

  // state after this group
  logic [SW-1:0] n_best, n_second, n_cl, n_cr, n_prev;
  logic [KW-1:0] n_bestk;
  logic          n_pend;
  always_comb begin
    automatic logic [SW-1:0] lft = (j1 > 0) ? in_cost[j1-1] : ((in_iter == 0) ? INF : prev_last);
    automatic logic [SW-1:0] rgt = (j1 < P - 1) ? in_cost[j1+1] : INF;
    n_prev = in_cost[P-1];
    if (in_iter == 0 || m1 < best) begin
      n_best   = m1;
      n_bestk  = KW'(int'(in_iter) * P + j1);
      n_second = (in_iter == 0) ? m2 : ((best < m2) ? best : m2);
      n_cl     = lft;
      n_cr     = rgt;
      n_pend   = (j1 == P - 1);
    end else begin
      n_best   = best;
      n_bestk  = bestk;
      n_second = (m1 < second) ? m1 : second;
      n_cl     = cl;
      n_cr     = pend ? in_cost[0] : cr;
      n_pend   = 1'b0;
    end
  end

  // ---- left result, from the state after the last group ----
  logic signed [5:0] sub_ofs;
  logic              edge_k, uniq_ok;
  logic [DISP_W-1:0] disp_l;
  logic [7:0]        dint;
  assign edge_k = (n_bestk == 0) || (int'(n_bestk) == int'(n_iter) * P - 1);

  subpixel_fit #(.SW(SW), .FRAC(DISP_FRAC)) u_sub (
    .cl(n_cl), .c0(n_best), .cr(n_cr), .edge_flag(edge_k), .offset(sub_ofs));
  uniq_check #(.SW(SW), .QW(8), .QF(4)) u_uniq (
    .c_best(n_best), .c_second(n_second), .q(uniq_q), .unique_ok(uniq_ok));

  always_comb begin
    automatic int di = int'(disp_offset) + int'(n_bestk);
    automatic int ds = di * (1 << DISP_FRAC) + int'(sub_ofs);
    if (ds < 0) ds = 0;
    dint   = 8'(di);
    disp_l = (uniq_ok && in_tex) ? DISP_W'(ds) : DISP_INVALID;
  end

  logic cc_ready, fire, ev_cons_fail_r;
  assign in_ready = cc_ready;
  assign fire     = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      best <= INF; second <= INF; cl <= INF; cr <= INF; prev_last <= INF;
      bestk <= '0; pend <= 1'b0;
    end else if (fire) begin
      best <= n_best; second <= n_second; cl <= n_cl; cr <= n_cr;
      prev_last <= n_prev; bestk <= n_bestk; pend <= n_pend;
    end
  end

  consistency_check #(.P(P), .DMAX(DMAX), .SW(SW)) u_cons (
    .clk, .rst_n, .width, .cons_tc,
    .in_valid, .in_ready(cc_ready), .in_cost,
    .in_base(9'(int'(disp_offset) + int'(in_iter) * P)),
    .in_last, .in_x, .in_disp(disp_l), .in_dint(dint),
    .out_valid, .out_ready, .out_disp, .out_fail(ev_cons_fail_r));

  assign ev_pixel     = fire && in_last;
  assign ev_uniq_fail = ev_pixel && !uniq_ok;
  assign ev_tex_fail  = ev_pixel && !in_tex;
  assign ev_subpix    = ev_pixel && (sub_ofs != 0);
  assign ev_cons_fail = out_valid && out_ready && ev_cons_fail_r;
endmodule
