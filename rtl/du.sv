// du: Division Exponent Calculation Unit (DU).
//
// Turns a division into an exponent: f1 / f2 ~ 2^e with
//   e = log2(f1) - log2(f2),   log2(F) ~ w + (m - 1)   for F = m * 2^w, m in [1,2).
// A leading-one detector (LOD) gives w from the position of the highest set
// bit; shifting F so that its leading one drops off gives the FRAC_W bits of
// m - 1. When add_one is set, 1.0 is added to the divisor first (the GELU
// denominator 1 + 2^s); the SCU leaves it clear.
//
// Two LODs, the shifters, the 1/0 MUX in front of the divisor LOD and the
// final combination follow the paper. The mantissa is truncated to FRAC_W
// bits, and a zero dividend returns the most negative exponent so that the
// following exponential unit outputs 0; both are this design's choices.
//
// Interface: f1, f2 unsigned Q.10 (IN_W bits); e signed Q.10 (OUT_W bits).
// Timing: combinational.
module du #(
  parameter int IN_W   = 32,
  parameter int OUT_W  = 24,
  parameter int FRAC_W = 10
) (
  input  logic [IN_W-1:0]         f1,
  input  logic [IN_W-1:0]         f2,
  input  logic                    add_one,
  output logic signed [OUT_W-1:0] e
);

  localparam int PW = $clog2(IN_W + 1);

  // leading-one position; returns 0 for 0 (callers check zero separately)
  function automatic logic [PW-1:0] lod(input logic [IN_W:0] x);
    lod = '0;
    for (int i = 0; i <= IN_W; i++)
      if (x[i]) lod = PW'(i);
  endfunction

  // log2 approximation in signed Q.FRAC_W: (pos - FRAC_W) + mantissa fraction
  function automatic logic signed [OUT_W-1:0] log2_approx(input logic [IN_W:0] x);
    logic [PW-1:0]     p;
    logic [IN_W+FRAC_W:0] sh;
    logic [FRAC_W-1:0] m;
    p  = lod(x);
    sh = (IN_W+FRAC_W+1)'(x) << FRAC_W;       // make room below the leading one
    sh = sh >> p;                             // leading one now at bit FRAC_W
    m  = sh[FRAC_W-1:0];                      // m - 1
    return (OUT_W'(signed'({1'b0, p})) - OUT_W'(FRAC_W)) * (OUT_W'(1) <<< FRAC_W)
           + OUT_W'({1'b0, m});
  endfunction

  logic [IN_W:0] num, den;
  logic signed [OUT_W-1:0] l1, l2;

  always_comb begin
    num = {1'b0, f1};
    den = {1'b0, f2} + (add_one ? ((IN_W+1)'(1) << FRAC_W) : '0);
    l1  = log2_approx(num);
    l2  = log2_approx(den);
    if (num == '0)
      e = {1'b1, {(OUT_W-1){1'b0}}};          // "minus infinity"
    else if (den == '0)
      e = {1'b0, {(OUT_W-1){1'b1}}};          // divide by zero: largest
    else
      e = l1 - l2;
  end

endmodule
