// tanh_pwl -- seven-piece linear approximation of tanh for gradient-boosted
// forests.
//
// The summed tree score s is binned by its magnitude with breakpoints at
// 16, 32 and 64 (times 2**SHIFT), i.e. at powers of two, so the segment is
// found from |s| >> (4+SHIFT) with no comparator against arbitrary constants.
// Together with the odd symmetry this gives seven pieces:
// (-inf,-64] [-64,-32] [-32,-16] [-16,16] [16,32] [32,64] [64,inf).
// Each piece is a straight line between knots; since every segment width is a
// power of two, the interpolation needs one constant multiply and a shift.
// Knots (this design's choice, the source plots the curve without values):
//   |s| = 0 -> 0, 16 -> tanh(0.5), 32 -> tanh(1), >= 64 -> 1,
// i.e. y ~ tanh(s / (32 * 2**SHIFT)), scaled so that 1.0 = 2**Q - 1.
// The breakpoints and the saturation at 64 follow the source plot.
//
// Purely combinational. Parameters: IN_W input/output width (signed), Q output
// magnitude bits (Q < IN_W), SHIFT scale of the breakpoints.
module tanh_pwl
  import bdt_pkg::*;
#(
  parameter int unsigned IN_W  = 12,
  parameter int unsigned Q     = 7,
  parameter int unsigned SHIFT = 0
) (
  input  logic signed [IN_W-1:0] s,
  output logic signed [IN_W-1:0] y
);

  localparam int unsigned FS = (1 << Q) - 1;
  localparam int unsigned Y1 = tanh_knot(1, FS);
  localparam int unsigned Y2 = tanh_knot(2, FS);
  localparam int unsigned Y3 = tanh_knot(3, FS);
  localparam int unsigned PW = IN_W + Q + 2;

  logic [IN_W:0]   mag;     // |s|, one bit wider for the most negative value
  logic [IN_W:0]   seg;     // |s| >> (4+SHIFT): 0, 1, 2..3, >= 4
  logic [PW-1:0]   prod;
  logic [Q:0]      m;       // |y|

  always_comb begin
    mag  = s[IN_W-1] ? (IN_W+1)'(-s) : (IN_W+1)'(s);
    seg  = mag >> (4 + SHIFT);
    prod = '0;
    if (seg >= 4) begin
      m = (Q+1)'(Y3);
    end else if (seg >= 2) begin
      prod = PW'(mag - (IN_W+1)'(32 << SHIFT)) * PW'(Y3 - Y2);
      m    = (Q+1)'(PW'(Y2) + (prod >> (5 + SHIFT)));
    end else if (seg == 1) begin
      prod = PW'(mag - (IN_W+1)'(16 << SHIFT)) * PW'(Y2 - Y1);
      m    = (Q+1)'(PW'(Y1) + (prod >> (4 + SHIFT)));
    end else begin
      prod = PW'(mag) * PW'(Y1);
      m    = (Q+1)'(prod >> (4 + SHIFT));
    end
    y = s[IN_W-1] ? -IN_W'(m) : IN_W'(m);
  end

endmodule
