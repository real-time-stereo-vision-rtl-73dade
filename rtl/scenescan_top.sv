// Stereo vision pipeline: rectification, census pre-processing, SGM stereo
// matching, cost-volume post-processing and disparity-map filtering.
//
// Data flow (all stages streaming, valid/ready, raster order):
//   camera pixel pair + rectification map -> rectify -> preproc (census,
//   texture flag) -> sgm_stereo (P disparities per cycle, n_iter cycles per
//   pixel) -> cost_volume_pp (sub-pixel, uniqueness, texture, consistency)
//   -> speckle_filter -> gap_interp -> noise_reduce -> disparity output.
// The order of the stages is the paper's. The camera interfaces, the memory
// holding the rectification map and the ethernet output are outside this
// module: their streams are its ports. Disparities are 8.4 fixed point,
// 12'hFFF marking an invalid pixel. The configuration record is read
// continuously and must be stable during a frame.
// Throughput is set by SGM: n_iter cycles per pixel plus, per row, DMAX
// cycles to flush the consistency check (and small padding overheads).
// Lint note: Verilator reports rst_n as used both asynchronously and
// synchronously; the synchronous uses are only assertions' 'disable iff
// (!rst_n)' in the submodules, which create no hardware.
module scenescan_top #(
  parameter int MAXW    = ss_pkg::MAX_W,
  parameter int P       = 32,
  parameter int DMAX    = 256,
  parameter int RECT_WIN = 79,
  parameter int CENSUS_K = 5,
  parameter int WS_MAX  = 9,
  parameter int LMAX    = 8
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  ss_pkg::cfg_t               cfg,
  input  logic                       cam_valid,
  output logic                       cam_ready,
  input  logic [ss_pkg::PIX_W-1:0]   cam_l,
  input  logic [ss_pkg::PIX_W-1:0]   cam_r,
  input  logic                       map_valid,
  output logic                       map_ready,
  input  ss_pkg::rect_map_t          map,
  output logic                       disp_valid,
  input  logic                       disp_ready,
  output logic [ss_pkg::DISP_W-1:0]  disp,
  // per-pixel events of the post-processing stages, for monitoring
  output logic                       ev_pixel,
  output logic                       ev_uniq_fail,
  output logic                       ev_tex_fail,
  output logic                       ev_subpix,
  output logic                       ev_cons_fail,
  output logic                       ev_speckle,
  output logic                       ev_gap_fill,
  output logic                       ev_smooth
);
  import ss_pkg::*;
  localparam int CBW = CENSUS_K * CENSUS_K - 1;
  localparam int SW  = 12;

  // rectify -> preproc
  logic rv, rr;
  logic [PIX_W-1:0] rl, rrp;
  rectify #(.WIN(RECT_WIN), .MAXW(MAXW)) u_rect (
    .clk, .rst_n, .width(cfg.width), .height(cfg.height),
    .in_valid(cam_valid), .in_ready(cam_ready), .in_l(cam_l), .in_r(cam_r),
    .map_valid, .map_ready, .map,
    .out_valid(rv), .out_ready(rr), .out_l(rl), .out_r(rrp));

  // preproc -> sgm
  logic pv, pr, ptex;
  logic [CBW-1:0] pcl, pcr;
  preproc #(.K(CENSUS_K), .MAXW(MAXW)) u_pre (
    .clk, .rst_n, .width(cfg.width), .height(cfg.height), .tex_thresh(cfg.tex_thresh),
    .in_valid(rv), .in_ready(rr), .in_l(rl), .in_r(rrp),
    .out_valid(pv), .out_ready(pr), .census_l(pcl), .census_r(pcr), .textured(ptex));

  // sgm -> cost volume post-processing
  logic sv, sr, slast, stex;
  logic [P-1:0][SW-1:0] scost;
  logic [3:0] siter;
  logic [COORD_W-1:0] sx, sy;
  sgm_stereo #(.P(P), .DMAX(DMAX), .CBW(CBW), .SW(SW), .MAXW(MAXW)) u_sgm (
    .clk, .rst_n, .width(cfg.width), .height(cfg.height), .p1(cfg.p1), .p2(cfg.p2),
    .n_iter(cfg.n_iter), .disp_offset(cfg.disp_offset),
    .in_valid(pv), .in_ready(pr), .in_cl(pcl), .in_cr(pcr), .in_tex(ptex),
    .out_valid(sv), .out_ready(sr), .out_cost(scost), .out_iter(siter),
    .out_last(slast), .out_x(sx), .out_y(sy), .out_tex(stex));

  // cost volume post-processing -> speckle filter
  logic cv, cr;
  logic [DISP_W-1:0] cd;
  cost_volume_pp #(.P(P), .DMAX(DMAX), .SW(SW)) u_cvpp (
    .clk, .rst_n, .width(cfg.width), .n_iter(cfg.n_iter), .disp_offset(cfg.disp_offset),
    .uniq_q(cfg.uniq_q), .cons_tc(cfg.cons_tc),
    .in_valid(sv), .in_ready(sr), .in_cost(scost), .in_iter(siter), .in_last(slast),
    .in_x(sx), .in_tex(stex),
    .out_valid(cv), .out_ready(cr), .out_disp(cd),
    .ev_pixel, .ev_uniq_fail, .ev_tex_fail, .ev_subpix, .ev_cons_fail);

  // speckle filter -> gap interpolation
  logic spv, spr, sp_rm;
  logic [DISP_W-1:0] spd;
  speckle_filter #(.WS_MAX(WS_MAX), .MAXW(MAXW)) u_spk (
    .clk, .rst_n, .width(cfg.width), .height(cfg.height),
    .ws(cfg.speckle_ws), .sim(cfg.speckle_sim),
    .in_valid(cv), .in_ready(cr), .in_disp(cd),
    .out_valid(spv), .out_ready(spr), .out_disp(spd), .out_removed(sp_rm));

  // gap interpolation -> noise reduction
  logic gv, gr, g_fill;
  logic [DISP_W-1:0] gd;
  gap_interp #(.LMAX(LMAX), .MAXW(MAXW)) u_gap (
    .clk, .rst_n, .width(cfg.width), .height(cfg.height),
    .l_max(cfg.gap_lmax), .sim(cfg.gap_sim),
    .in_valid(spv), .in_ready(spr), .in_disp(spd),
    .out_valid(gv), .out_ready(gr), .out_disp(gd), .out_filled(g_fill));

  logic n_chg;
  noise_reduce #(.K(3), .MAXW(MAXW)) u_nr (
    .clk, .rst_n, .width(cfg.width), .height(cfg.height), .thresh(cfg.nr_thresh),
    .in_valid(gv), .in_ready(gr), .in_disp(gd),
    .out_valid(disp_valid), .out_ready(disp_ready), .out_disp(disp), .out_changed(n_chg));

  assign ev_speckle  = spv && spr && sp_rm;
  assign ev_gap_fill = gv && gr && g_fill;
  assign ev_smooth   = disp_valid && disp_ready && n_chg;
endmodule
