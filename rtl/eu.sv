// eu: Exponential Unit (EU) of the softmax and GELU units.
//
// Computes y = 2^v where v = log2(e) * f (ctrl = 1, base-e exponential) or
// v = f (ctrl = 0, base-2). log2(e) is approximated as 1.0111b, so
// log2(e)*f = f + (f >>> 1) - (f >>> 4): two shifts and two add/subtract
// operations, no multiplier. v is split into an integer part (floor) and a
// fraction in [0,1). 2^frac is a piecewise-linear approximation over eight
// segments selected by fraction bits 9..7: 2^frac ~ k_i * frac + b_i. The
// result is shifted right by -int (or left by int, with saturation, when the
// exponent is positive, as happens on the GELU path).
//
// The structure (shift-add log2(e), MUX on ctrl, int/frac split, 3-bit LUT of
// k_i/b_i, multiply-add, final shifter) is the paper's. The LUT values are
// this design's: the chord of 2^f on each segment,
//   k_i = 8 * (2^((i+1)/8) - 2^(i/8)),   b_i = 2^(i/8) - k_i * i / 8,
// stored with 14 fraction bits. The positive-exponent left shift and the
// saturation are also this design's.
//
// Interface: f is signed Q.10 (IN_W bits), y is unsigned Q.10 (OUT_W bits).
// Timing: purely combinational; the enclosing unit registers the result.
module eu #(
  parameter int IN_W   = 24,
  parameter int OUT_W  = 32,
  parameter int FRAC_W = 10
) (
  input  logic signed [IN_W-1:0] f,
  input  logic                   ctrl,
  output logic [OUT_W-1:0]       y
);

  localparam int KB_FRAC = 14;   // fraction bits of k_i and b_i
  localparam int VW      = IN_W + 2;

  // LUT: index = frac bits [FRAC_W-1 -: 3]
  localparam logic [15:0] K_LUT [8] = '{16'd11863, 16'd12937, 16'd14108, 16'd15384,
                                        16'd16777, 16'd18295, 16'd19951, 16'd21757};
  localparam logic [15:0] B_LUT [8] = '{16'd16384, 16'd16250, 16'd15957, 16'd15478,
                                        16'd14782, 16'd13833, 16'd12591, 16'd11011};

  logic signed [VW-1:0]       fx, v, v_int;
  logic        [FRAC_W-1:0]   v_frac;
  logic        [2:0]          idx;
  logic        [31:0]         kf;
  logic        [16:0]         mant;     // Q3.14, in [1,2)
  logic        [63:0]         wide;

  always_comb begin
    fx = VW'(f);
    // log2(e) ~ 1 + 0.1b - 0.0001b
    v = ctrl ? (fx + (fx >>> 1) - (fx >>> 4)) : fx;
    v_int  = v >>> FRAC_W;
    v_frac = v[FRAC_W-1:0];
    idx    = v_frac[FRAC_W-1 -: 3];
    kf     = 32'(K_LUT[idx]) * 32'(v_frac);
    mant   = 17'(kf >> FRAC_W) + 17'(B_LUT[idx]);
    wide   = '0;
    y      = '0;
    if (v_int >= 0) begin
      if (v_int > VW'(OUT_W + KB_FRAC - FRAC_W - 17)) begin
        y = '1;                                   // saturate
      end else begin
        wide = (64'(mant) << v_int[5:0]) >> (KB_FRAC - FRAC_W);
        y    = OUT_W'(wide);
      end
    end else begin
      if (-v_int > VW'(17 - (KB_FRAC - FRAC_W))) begin
        y = '0;                                   // underflow
      end else begin
        wide = 64'(mant) >> (6'(KB_FRAC - FRAC_W) + 6'(-v_int));
        y    = OUT_W'(wide);
      end
    end
  end

endmodule
