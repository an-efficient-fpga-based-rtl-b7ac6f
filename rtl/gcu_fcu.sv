// gcu_fcu: polynomial unit of the GELU unit (FCU).
//
// Computes the base-2 exponent used by the GELU approximation
//   s(x) = -2 log2(e) sqrt(2/pi) (x + 0.044715 x^3)
// with both constants replaced by short binary fractions: 0.044715 ~ 0.000011b
// (x^3 >>> 5 plus x^3 >>> 6) and -2 log2(e) sqrt(2/pi) ~ -10.0101b
// (-(2h + h >>> 2 + h >>> 4)). Only x^3 needs multipliers (two of them).
// The constants and the shift-add structure are the paper's; the
// intermediate widths and the saturation of s to OUT_W bits are this design's.
//
// Interface: x signed Q.10, s signed Q.10 of OUT_W bits. Timing: combinational.
module gcu_fcu
  import swin_pkg::*;
#(
  parameter int OUT_W = 24
) (
  input  fix_t                    x,
  output logic signed [OUT_W-1:0] s
);

  logic signed [ACC_W-1:0] xw, x2, x3, c, h, sv;
  localparam logic signed [ACC_W-1:0] SMAX = (ACC_W'(1) <<< (OUT_W-1)) - 1;
  localparam logic signed [ACC_W-1:0] SMIN = -(ACC_W'(1) <<< (OUT_W-1));

  always_comb begin
    xw = ACC_W'(x);
    x2 = (xw * xw) >>> FRAC_W;
    x3 = (x2 * xw) >>> FRAC_W;
    c  = (x3 >>> 5) + (x3 >>> 6);              // 0.000011b * x^3
    h  = xw + c;
    sv = -((h <<< 1) + (h >>> 2) + (h >>> 4)); // -10.0101b * h
    if (sv > SMAX)      s = OUT_W'(SMAX);
    else if (sv < SMIN) s = OUT_W'(SMIN);
    else                s = OUT_W'(sv);
  end

endmodule
