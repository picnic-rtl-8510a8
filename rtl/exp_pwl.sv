// exp_pwl: exponent unit of the softmax compute unit.
//
// Approximates e^x with eight linear segments, as the paper specifies. The
// input is a signed Q4.12 fixed-point score; the segments are the unit
// intervals [-4,-3) ... [3,4), each the chord between e^k and e^(k+1), and
// inputs outside [-4,4) are clamped to the end points. The output is unsigned
// Q8.16 (22 significant bits). Segment bounds and number formats are this
// design's choices. The nine knot values are e^k * 2^16 rounded to an
// integer, for k = -4..4. Purely combinational.
module exp_pwl #(
  parameter int unsigned IN_W  = 16,
  parameter int unsigned OUT_W = 24
) (
  input  logic [IN_W-1:0]  x,     // signed Q4.12
  output logic [OUT_W-1:0] y      // unsigned Q8.16
);
  localparam int unsigned FRAC = 12;
  localparam logic [OUT_W-1:0] KNOT [9] = '{
    OUT_W'(1200), OUT_W'(3263), OUT_W'(8869), OUT_W'(24109), OUT_W'(65536),
    OUT_W'(178145), OUT_W'(484249), OUT_W'(1316326), OUT_W'(3578144)
  };

  logic signed [IN_W-1:0]  xs;
  logic signed [IN_W-1:0]  xi;        // floor(x)
  logic [FRAC-1:0]         frac;
  logic [3:0]              seg;
  logic [OUT_W+FRAC-1:0]   interp;

  always_comb begin
    xs     = $signed(x);
    xi     = xs >>> FRAC;
    frac   = x[FRAC-1:0];
    seg    = 4'(xi + 4);
    interp = '0;
    if (xi < -4) begin
      y = KNOT[0];
    end else if (xi >= 4) begin
      y = KNOT[8];
    end else begin
      interp = (OUT_W+FRAC)'(KNOT[seg+1] - KNOT[seg]) * (OUT_W+FRAC)'(frac);
      y      = KNOT[seg] + OUT_W'(interp >> FRAC);
    end
  end
endmodule
