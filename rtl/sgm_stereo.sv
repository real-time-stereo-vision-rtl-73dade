// Semi-global matching over census codes, P disparities per cycle.
//
// Each left pixel is processed in n_iter iterations (cycles); iteration i
// compares the left census code with the right census codes of disparities
// d = o_d + i*P + j, j = 0..P-1 (P = 32 parallel comparisons, as in the
// paper), so the largest disparity is d_max = o_d + n_iter*P - 1. The
// matching cost is the Hamming distance of the two census codes (right pixel
// outside the image: the largest cost). Costs are aggregated along four
// paths that reach a pixel from the left, upper-left, top and upper-right
// neighbours, with the usual SGM recurrence
//   L(p,d) = C(p,d) + min(L(q,d), L(q,d-1)+P1, L(q,d+1)+P1, min_k L(q,k)+P2)
//            - min_k L(q,k)
// and the four path costs are summed into the aggregated cost S(p,d).
// P1 and P2 are run-time inputs, as in the paper. The recurrence is the
// published SGM algorithm; the paper calls its version "a variation" without
// giving the change, so the choice of four single-pass paths, the path-cost
// width and the census cost are this design's.
//
// Storage: the last DMAX right census codes in a shift register; the path
// costs of the previous row for the top, upper-left and upper-right paths in
// three row memories (one word of DMAX costs plus their minimum per column);
// the left path's previous vector in registers.
//
// Interface: one input record per pixel (census codes and texture flag) in
// raster order; it is accepted in the cycle the previous pixel's last
// iteration completes, so a pixel takes exactly n_iter cycles without
// backpressure. Output: one registered record per iteration carrying the P
// aggregated costs of that disparity group (valid/ready).
// Condition: o_d + n_iter*P <= DMAX.
// Lint note: Verilator reports rst_n as used both asynchronously (reset of
// the flip-flops) and synchronously; the synchronous use is only the
// assertion's 'disable iff (!rst_n)', which creates no hardware.
module sgm_stereo #(
  parameter int P    = 32,
  parameter int DMAX = 256,
  parameter int CBW  = 24,                 // census code width
  parameter int CW   = 10,                 // path cost width
  parameter int SW   = 12,                 // aggregated cost width
  parameter int MAXW = ss_pkg::MAX_W
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [ss_pkg::COORD_W-1:0]  width,
  input  logic [ss_pkg::COORD_W-1:0]  height,
  input  logic [7:0]                  p1,
  input  logic [7:0]                  p2,
  input  logic [3:0]                  n_iter,
  input  logic [7:0]                  disp_offset,
  input  logic                        in_valid,
  output logic                        in_ready,
  input  logic [CBW-1:0]              in_cl,
  input  logic [CBW-1:0]              in_cr,
  input  logic                        in_tex,
  output logic                        out_valid,
  input  logic                        out_ready,
  output logic [P-1:0][SW-1:0]        out_cost,
  output logic [3:0]                  out_iter,
  output logic                        out_last,   // last iteration of a pixel
  output logic [ss_pkg::COORD_W-1:0]  out_x,
  output logic [ss_pkg::COORD_W-1:0]  out_y,
  output logic                        out_tex
);
  import ss_pkg::*;
  localparam int NI = DMAX / P;
  localparam logic [CW-1:0] INF = '1;
  typedef logic [NI-1:0][P-1:0][CW-1:0] lvec_t;
  typedef struct packed { logic [CW-1:0] mn; lvec_t v; } lword_t;

  // row memories: top, upper-left, upper-right paths
  lword_t mem_t  [MAXW];
  lword_t mem_tl [MAXW];
  lword_t mem_tr [MAXW];

  logic [DMAX-1:0][CBW-1:0] rh;            // rh[d]: right census at x-d
  logic [DMAX-1:0]          rh_v;
  logic [CBW-1:0]           cl;
  logic                     tex;
  logic                     busy;
  logic [3:0]               iter;
  logic [COORD_W-1:0]       x, y, nx, ny;

  // previous vectors: 0 = left, 1 = upper-left, 2 = top, 3 = upper-right
  lword_t                   pv [4];
  logic [3:0]               has;
  lword_t                   old_tl;        // mem_tl[x] of the previous row
  lvec_t                    nv [4];        // vectors being built
  logic [CW-1:0]            nmin [4];

  logic fire, last, accept;
  assign fire     = busy && (!out_valid || out_ready);
  assign last     = (iter == n_iter - 1'b1);
  assign in_ready = !busy || (fire && last);
  assign accept   = in_valid && in_ready;

  // ---- cost and path recurrence for the current disparity group ----
  logic [P-1:0][CW-1:0] lch [4];
  logic [CW-1:0]        chmin [4];
  logic [P-1:0][SW-1:0] sch;

  function automatic logic [CW-1:0] sat_add(input logic [CW-1:0] a, input int b);
    int s;
    s = int'(a) + b;
    return (a == INF || s > int'(INF)) ? INF : CW'(s);
  endfunction

  always_comb begin
    int nk;
    nk = int'(n_iter) * P;
    for (int j = 0; j < P; j++) begin
      automatic int k = int'(iter) * P + j;
      automatic int d = int'(disp_offset) + k;
      automatic int c;
      if (d < DMAX && rh_v[d]) c = $countones(cl ^ rh[d]);
      else                     c = CBW;
      for (int r = 0; r < 4; r++) begin
        automatic logic [CW-1:0] a, bm, bp, e, m;
        a  = pv[r].v[iter][j];
        bm = (k > 0)      ? sat_add((j > 0) ? pv[r].v[iter][j-1] : pv[r].v[iter-1][P-1], int'(p1)) : INF;
        bp = (k < nk - 1) ? sat_add((j < P - 1) ? pv[r].v[iter][j+1] : pv[r].v[iter+1][0], int'(p1)) : INF;
        e  = sat_add(pv[r].mn, int'(p2));
        m  = a;
        if (bm < m) m = bm;
        if (bp < m) m = bp;
        if (e < m)  m = e;
        lch[r][j] = has[r] ? CW'(c + int'(m) - int'(pv[r].mn)) : CW'(c);
      end
      sch[j] = SW'(int'(lch[0][j]) + int'(lch[1][j]) + int'(lch[2][j]) + int'(lch[3][j]));
    end
    for (int r = 0; r < 4; r++) begin
      chmin[r] = nmin[r];
      for (int j = 0; j < P; j++) if (lch[r][j] < chmin[r]) chmin[r] = lch[r][j];
    end
  end

  // vectors with the current group merged in (written at the last iteration)
  lvec_t fv [4];
  always_comb
    for (int r = 0; r < 4; r++) begin
      fv[r] = nv[r];
      fv[r][iter] = lch[r];
    end

  // ---- row memories ----
  always_ff @(posedge clk) begin
    if (fire && last) begin
      mem_tl[x] <= '{mn: chmin[1], v: fv[1]};
      mem_t[x]  <= '{mn: chmin[2], v: fv[2]};
      mem_tr[x] <= '{mn: chmin[3], v: fv[3]};
    end
  end

  // ---- control and registers ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; iter <= '0; x <= '0; y <= '0; nx <= '0; ny <= '0;
      out_valid <= 1'b0; rh_v <= '0; has <= '0;
    end else begin
      if (fire) begin
        out_valid <= 1'b1;
        out_cost  <= sch;
        out_iter  <= iter;
        out_last  <= last;
        out_x     <= x;
        out_y     <= y;
        out_tex   <= tex;
        for (int r = 0; r < 4; r++) begin
          nv[r][iter] <= lch[r];
          nmin[r]     <= chmin[r];
        end
        iter <= iter + 1'b1;
        if (last) begin
          busy <= 1'b0;
          pv[0] <= '{mn: chmin[0], v: fv[0]};
        end
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end

      if (accept) begin
        busy <= 1'b1;
        iter <= '0;
        x    <= nx;
        y    <= ny;
        cl   <= in_cl;
        tex  <= in_tex;
        if (nx == 0) begin
          rh   <= '0;
          rh_v <= '0;
        end else begin
          rh   <= rh << CBW;
          rh_v <= rh_v << 1;
        end
        rh[0]   <= in_cr;
        rh_v[0] <= 1'b1;
        for (int r = 0; r < 4; r++) nmin[r] <= INF;
        has[0] <= (nx != 0);
        has[1] <= (nx != 0) && (ny != 0);
        has[2] <= (ny != 0);
        has[3] <= (ny != 0) && (nx != width - 1'b1);
        pv[1]  <= old_tl;
        old_tl <= mem_tl[nx];
        pv[2]  <= mem_t[nx];
        pv[3]  <= mem_tr[(nx == width - 1'b1) ? nx : nx + 1'b1];
        if (nx == width - 1'b1) begin
          nx <= '0;
          ny <= (ny == height - 1'b1) ? '0 : ny + 1'b1;
        end else begin
          nx <= nx + 1'b1;
        end
      end
    end
  end

  a_offset_range: assert property (@(posedge clk) disable iff (!rst_n)
    accept |-> (int'(disp_offset) + int'(n_iter) * P <= DMAX) && (n_iter != 0));
endmodule
