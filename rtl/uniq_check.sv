// Uniqueness test of a stereo match (combinational).
//
// A match is unique when c* * q < c2, c* being the smallest aggregated cost
// of the pixel and c2 the smallest cost at any other disparity (the paper's
// min{C \ {c_min}}). q >= 1 is a run-time factor with QF = 4 fractional bits,
// so the test is c* * q_raw < c2 * 2^QF, done exactly in integers. Reading
// "C \ {c_min}" as "all other disparities" (so that a tie is not unique) and
// the fixed-point format of q are this design's choices.
module uniq_check #(
  parameter int SW = 12,
  parameter int QW = 8,
  parameter int QF = 4
) (
  input  logic [SW-1:0] c_best,
  input  logic [SW-1:0] c_second,
  input  logic [QW-1:0] q,
  output logic          unique_ok
);
  logic [SW+QW-1:0] lhs, rhs;
  assign lhs = (SW+QW)'(c_best) * (SW+QW)'(q);
  assign rhs = (SW+QW)'(c_second) << QF;
  assign unique_ok = lhs < rhs;
endmodule
