// pwl_eval: one continuous piecewise-linear evaluation of a 16-bit input.
//
// Finds the segment i with knot[i] <= x < knot[i+1] by a priority search
// from the top knot down (the hardware form of the published software
// segment search), then returns value[i] + ((x - knot[i]) * slope[i]) >>> frac,
// saturated to 16 bits. The published method interpolates
// (1-d)*v(x[i-1]) + d*v(x[i]) with d the fractional distance into the
// segment; storing a per-segment slope gives the same line without a
// divider, which is this design's choice. Inputs below knot[0] extrapolate
// segment 0. Knots must ascend; unused entries should repeat the last
// knot's slope or hold 16'h7fff. Combinational.
module pwl_eval
  import npe_pkg::*;
#(
  parameter int NSEG = PWL_SEG
) (
  input  logic signed [15:0]             x,
  input  logic signed [NSEG-1:0][15:0]   knot,
  input  logic signed [NSEG-1:0][15:0]   value,
  input  logic signed [NSEG-1:0][15:0]   slope,
  input  logic [5:0]                     frac,
  output logic signed [15:0]             y
);
  logic [$clog2(NSEG)-1:0] seg;
  logic signed [16:0]      dx;
  logic signed [33:0]      prod;
  logic signed [34:0]      sum;

  always_comb begin
    seg = '0;
    for (int i = 1; i < NSEG; i++)
      if (x >= $signed(knot[i])) seg = $clog2(NSEG)'(i);
    dx   = 17'(x) - 17'($signed(knot[seg]));
    prod = (34'(dx) * 34'($signed(slope[seg]))) >>> frac;
    sum  = 35'($signed(value[seg])) + 35'(prod);
    if (sum > 35'sd32767)       y = 16'sh7fff;
    else if (sum < -35'sd32768) y = -16'sh8000;
    else                        y = sum[15:0];
  end
endmodule
