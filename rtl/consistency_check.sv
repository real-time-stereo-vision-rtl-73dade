// Left-right consistency check from the left-to-right cost volume.
//
// The right image's disparity map is not matched a second time (as in the
// paper): every aggregated cost S(x, d) of left pixel x is also a candidate
// for right pixel x - d, and the right pixel's disparity d_r is the
// disparity of its smallest candidate. A left match d_l passes when
// |d_l - d_r| <= t_c; otherwise it receives the invalid label.
//
// How it works: rm[i] holds the running minimum (cost, disparity) of right
// pixel X - i, X being the left pixel now being processed; every incoming
// cost group updates P entries at once. Right pixel X - i has seen all its
// candidates once i >= d_max, so left results wait DLEN = DMAX pixels in a
// delay line ld[] before they are checked against rm[DLEN + d_l]. At the end
// of every row the delay line is flushed with DLEN empty steps (input held
// off), so each row costs DLEN extra cycles. Ties between right candidates go
// to the smaller disparity.
//
// Interface: in_* is the cost-group stream of sgm_stereo, extended by the
// left result in_disp / in_dint, which is read with the last group of a
// pixel. Output: one registered disparity per left pixel, in raster order.
module consistency_check #(
  parameter int P    = 32,
  parameter int DMAX = 256,
  parameter int SW   = 12
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [ss_pkg::COORD_W-1:0]  width,
  input  logic [7:0]                  cons_tc,
  input  logic                        in_valid,
  output logic                        in_ready,
  input  logic [P-1:0][SW-1:0]        in_cost,
  input  logic [8:0]                  in_base,   // disparity of in_cost[0]
  input  logic                        in_last,
  input  logic [ss_pkg::COORD_W-1:0]  in_x,
  input  logic [ss_pkg::DISP_W-1:0]   in_disp,   // left disparity or invalid
  input  logic [7:0]                  in_dint,   // its integer part
  output logic                        out_valid,
  input  logic                        out_ready,
  output logic [ss_pkg::DISP_W-1:0]   out_disp,
  output logic                        out_fail   // rejected by this check
);
  import ss_pkg::*;
  localparam int DLEN = DMAX;
  localparam int NRM  = 2 * DMAX;
  localparam logic [SW-1:0] INF = '1;

  logic [SW-1:0]      rm_c [NRM];
  logic [7:0]         rm_d [NRM];
  logic               ld_v [DLEN];
  logic [DISP_W-1:0]  ld_disp [DLEN];
  logic [7:0]         ld_dint [DLEN];
  logic [COORD_W-1:0] ld_x [DLEN];

  logic               flushing;
  logic [$clog2(DLEN+1)-1:0] fcnt;
  logic               space, fire, shift;

  assign space    = !out_valid || out_ready;
  assign in_ready = !flushing && space;
  assign fire     = in_valid && in_ready;
  assign shift    = (fire && in_last) || (flushing && space);

  // rm with this cycle's group merged in
  logic [SW-1:0] um_c [NRM];
  logic [7:0]    um_d [NRM];
  always_comb begin
    for (int i = 0; i < NRM; i++) begin
      um_c[i] = rm_c[i];
      um_d[i] = rm_d[i];
    end
    if (fire)
      for (int j = 0; j < P; j++) begin
        automatic int d = int'(in_base) + j;
        if (d < DMAX && in_cost[j] < rm_c[d]) begin
          um_c[d] = in_cost[j];
          um_d[d] = 8'(d);
        end
      end
  end

  // check of the pixel leaving the delay line
  logic              chk_fail;
  logic [DISP_W-1:0] chk_disp;
  always_comb begin
    automatic int dl = int'(ld_dint[DLEN-1]);
    automatic int idx = DLEN + dl;
    automatic int dr, diff;
    automatic logic ok;
    dr   = int'(um_d[idx]);
    diff = (dl > dr) ? dl - dr : dr - dl;
    ok   = (int'(ld_x[DLEN-1]) >= dl) && (um_c[idx] != INF) && (diff <= int'(cons_tc));
    chk_fail = (ld_disp[DLEN-1] != DISP_INVALID) && !ok;
    chk_disp = chk_fail ? DISP_INVALID : ld_disp[DLEN-1];
  end

  // running minima of the right pixels; cleared at reset so that the first
  // right pixel after reset starts from "no candidate"
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NRM; i++) begin
        rm_c[i] <= INF;
        rm_d[i] <= '0;
      end
    end else if (shift) begin
      for (int i = NRM - 1; i > 0; i--) begin
        rm_c[i] <= um_c[i-1];
        rm_d[i] <= um_d[i-1];
      end
      rm_c[0] <= INF;
      rm_d[0] <= '0;
    end else if (fire) begin
      for (int i = 0; i < NRM; i++) begin
        rm_c[i] <= um_c[i];
        rm_d[i] <= um_d[i];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (shift) begin
      for (int i = DLEN - 1; i > 0; i--) begin
        ld_disp[i] <= ld_disp[i-1];
        ld_dint[i] <= ld_dint[i-1];
        ld_x[i]    <= ld_x[i-1];
      end
      ld_disp[0] <= in_disp;
      ld_dint[0] <= in_dint;
      ld_x[0]    <= in_x;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DLEN; i++) ld_v[i] <= 1'b0;
      flushing  <= 1'b0;
      fcnt      <= '0;
      out_valid <= 1'b0;
      out_disp  <= '0;
      out_fail  <= 1'b0;
    end else begin
      if (shift) begin
        for (int i = DLEN - 1; i > 0; i--) ld_v[i] <= ld_v[i-1];
        ld_v[0] <= fire && in_last;
        if (ld_v[DLEN-1]) begin
          out_valid <= 1'b1;
          out_disp  <= chk_disp;
          out_fail  <= chk_fail;
        end else if (out_ready) begin
          out_valid <= 1'b0;
        end
        if (fire && in_last && in_x == width - 1'b1) begin
          flushing <= 1'b1;
          fcnt     <= ($clog2(DLEN+1))'(DLEN);
        end else if (flushing) begin
          fcnt     <= fcnt - 1'b1;
          flushing <= (fcnt != 1);
        end
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end
endmodule
