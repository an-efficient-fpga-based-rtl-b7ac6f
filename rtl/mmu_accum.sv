// mmu_accum: Accumulation module of the matrix multiplication unit.
//
// Holds an M2 x CO tile of accumulators. Each accumulate cycle adds the PE
// outputs (one column of products per PE); acc_first replaces instead of
// adding, starting a new tile. After the C_I/c_i accumulate cycles of a tile
// the tile is finalised one column per cycle: column fin_col gets the bias
// value of that column and, optionally, the matching shortcut (residual)
// column, then is rounded from Q.20 to Q.10 and saturated to 16 bits.
//
// Accumulation, the bias adder and the optional shortcut adder are the
// paper's. Finalising column by column, the rounding (half up) and the
// saturation are this design's choices.
//
// Interface: acc_en/acc_first/p; fin_en/fin_col/bias/bias_en/sc/sc_en in,
// out_valid/out_col/col out one cycle after fin_en.
module mmu_accum
  import swin_pkg::*;
#(
  parameter  int M2_P = M2,
  parameter  int CO_P = CO,
  parameter  int PW   = 2*DATA_W + 1,
  localparam int CW   = $clog2(CO_P)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 acc_en,
  input  logic                 acc_first,
  input  logic signed [PW-1:0] p [CO_P][M2_P],
  input  logic                 fin_en,
  input  logic [CW-1:0]        fin_col,
  input  fix_t                 bias,
  input  logic                 bias_en,
  input  fix_t                 sc [M2_P],
  input  logic                 sc_en,
  output logic                 out_valid,
  output logic [CW-1:0]        out_col,
  output fix_t                 col [M2_P]
);

  logic signed [ACC_W-1:0] acc [CO_P][M2_P];

  always_ff @(posedge clk) begin
    if (acc_en)
      for (int j = 0; j < CO_P; j++)
        for (int r = 0; r < M2_P; r++)
          acc[j][r] <= (acc_first ? '0 : acc[j][r]) + ACC_W'(p[j][r]);
    if (fin_en) begin
      out_col <= fin_col;
      for (int r = 0; r < M2_P; r++)
        col[r] <= round_sat(acc[fin_col][r]
                            + (bias_en ? (ACC_W'(bias) <<< FRAC_W) : '0)
                            + (sc_en   ? (ACC_W'(sc[r]) <<< FRAC_W) : '0));
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= fin_en;

endmodule
