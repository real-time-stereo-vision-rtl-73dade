// Shared constants and the run-time configuration record of the stereo
// pipeline. Image size limit (1856 x 1856), the 1/16 pixel disparity
// resolution and the 256 pixel disparity range follow the paper; pixel width,
// field widths of the configuration record and the invalid-disparity code are
// this design's own choices.
package ss_pkg;
  localparam int PIX_W     = 8;     // camera pixel width (8-bit mono)
  localparam int MAX_W     = 1856;  // largest image width
  localparam int MAX_H     = 1856;  // largest image height
  localparam int COORD_W   = 11;    // enough for 0..2047
  localparam int DISP_FRAC = 4;     // fractional disparity bits (1/16 pixel)
  localparam int DISP_W    = 12;    // 8 integer + 4 fractional bits
  localparam logic [DISP_W-1:0] DISP_INVALID = '1;

  // Rectification offsets: signed fixed point, 4 fractional bits.
  localparam int RECT_FRAC = 4;
  localparam int RECT_OFS_W = 11;

  typedef struct packed {
    logic signed [RECT_OFS_W-1:0] dxl;
    logic signed [RECT_OFS_W-1:0] dyl;
    logic signed [RECT_OFS_W-1:0] dxr;
    logic signed [RECT_OFS_W-1:0] dyr;
  } rect_map_t;

  // Run-time configuration. Held stable while a frame is processed.
  typedef struct packed {
    logic [COORD_W-1:0] width;        // image width in pixels
    logic [COORD_W-1:0] height;       // image height in pixels
    logic [7:0]  p1;                  // SGM penalty for a disparity step of 1
    logic [7:0]  p2;                  // SGM penalty for larger steps
    logic [3:0]  n_iter;              // iterations per left pixel (n_i)
    logic [7:0]  disp_offset;         // smallest disparity considered (o_d)
    logic [7:0]  uniq_q;              // uniqueness factor q, 4 fractional bits
    logic [7:0]  cons_tc;             // consistency threshold t_c (pixels)
    logic [15:0] tex_thresh;          // texture threshold t_t
    logic [3:0]  speckle_ws;          // speckle window size w_s (odd)
    logic [7:0]  speckle_sim;         // joining step of a speckle, 1/16 px
    logic [3:0]  gap_lmax;            // largest gap l_max that is filled
    logic [7:0]  gap_sim;             // largest edge difference, 1/16 px
    logic [7:0]  nr_thresh;           // noise filter discontinuity, 1/16 px
  } cfg_t;
endpackage
