// mmu_pe: one Processing Element of the matrix multiplication unit.
//
// Multiplies an M2 x CI tile of the A matrix by a CI-element column of the B
// matrix: M2 x CI parallel 16x16-bit multipliers, and for each of the M2 rows
// an adder tree over the CI products. With the default CI = 1 (32 PEs of 49
// multipliers = 1568 DSPs) each row has a single product and the tree is a
// wire. The product is registered once.
//
// Interface: en qualifies a and b; p holds the M2 dot products (full
// precision, Q.20) one cycle after en.
module mmu_pe
  import swin_pkg::*;
#(
  parameter  int M2_P = M2,
  parameter  int CI_P = CI,
  localparam int PW   = 2*DATA_W + $clog2(CI_P+1)
) (
  input  logic                 clk,
  input  logic                 en,
  input  fix_t                 a [CI_P][M2_P],
  input  fix_t                 b [CI_P],
  output logic signed [PW-1:0] p [M2_P]
);

  logic signed [PW-1:0] dot [M2_P];

  always_comb begin
    for (int r = 0; r < M2_P; r++) begin
      dot[r] = '0;
      for (int c = 0; c < CI_P; c++)
        dot[r] += PW'(a[c][r]) * PW'(b[c]);
    end
  end

  always_ff @(posedge clk)
    if (en) p <= dot;

endmodule
