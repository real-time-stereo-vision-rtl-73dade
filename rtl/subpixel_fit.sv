// Sub-pixel refinement of a cost minimum (combinational).
//
// A parabola is fitted through the aggregated costs left of the minimum (cl),
// at the minimum (c0) and right of it (cr). Its vertex lies at
//   offset = (cl - cr) / (2 * (cl + cr - 2*c0))
// pixels from the integer minimum, |offset| <= 1/2. The offset is returned in
// units of 1/16 pixel (FRAC = 4 fractional bits, as in the paper), rounded to
// nearest, as a signed number in -8..+8. At the ends of the disparity range
// (edge = 1) or for a flat curve the offset is 0. The paper says only that "a
// curve is fitted"; the parabola is this design's choice.
module subpixel_fit #(
  parameter int SW   = 12,
  parameter int FRAC = 4
) (
  input  logic [SW-1:0]      cl,
  input  logic [SW-1:0]      c0,
  input  logic [SW-1:0]      cr,
  input  logic               edge_flag,
  output logic signed [FRAC+1:0] offset
);
  always_comb begin
    int num, den, q, an;
    num = int'(cl) - int'(cr);
    den = int'(cl) + int'(cr) - 2 * int'(c0);
    offset = '0;
    an = 0;
    q  = 0;
    if (!edge_flag && den > 0) begin
      // round(num * 2^FRAC / (2*den)) with the sign taken apart
      an = (num < 0) ? -num : num;
      q  = (an * (1 << FRAC) + den) / (2 * den);
      if (q > (1 << (FRAC - 1))) q = 1 << (FRAC - 1);
      offset = (num < 0) ? -(FRAC+2)'(q) : (FRAC+2)'(q);
    end
  end
endmodule
