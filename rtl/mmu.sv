// mmu: Matrix Multiplication Unit.
//
// The single compute engine for every linear layer (patch embedding, patch
// merging, QKV, Q.K^T, attention x V, projection and both FFN layers). Each
// cycle it takes an M2 x c_i tile of A and a c_i x c_o tile of B into its
// A-buf and B-buf registers, the N_PE = c_o = 32 PEs multiply the A tile by
// one B column each, and the Accumulation module adds the M2 x c_o result to
// its tile. After C_I/c_i cycles the tile is finalised with bias and
// shortcut, one column per cycle, through the fin_* port.
//
// Block structure (A-buf, B-buf, 32 PEs of 49 multipliers, adder tree,
// Accumulation with bias and shortcut) is the paper's. Pipeline: A/B-buf
// register, PE register, accumulate, so an input reaches the accumulators
// 3 cycles after it is presented; busy stays high until then.
//
// Interface: in_valid/first/a/b; busy; fin_en/fin_col/bias/bias_en/sc/sc_en
// and out_valid/out_col/col (see mmu_accum).
module mmu
  import swin_pkg::*;
#(
  parameter  int M2_P = M2,
  parameter  int CI_P = CI,
  parameter  int N_PE = CO,
  localparam int PW   = 2*DATA_W + $clog2(CI_P+1),
  localparam int CW   = $clog2(N_PE)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic          first,
  input  fix_t          a [CI_P][M2_P],
  input  fix_t          b [CI_P][N_PE],
  output logic          busy,
  input  logic          fin_en,
  input  logic [CW-1:0] fin_col,
  input  fix_t          bias,
  input  logic          bias_en,
  input  fix_t          sc [M2_P],
  input  logic          sc_en,
  output logic          out_valid,
  output logic [CW-1:0] out_col,
  output fix_t          col [M2_P]
);

  // A-buf / B-buf
  fix_t a_buf [CI_P][M2_P];
  fix_t b_buf [CI_P][N_PE];
  fix_t b_col [N_PE][CI_P];
  logic v1, v2, f1, f2;

  always_ff @(posedge clk) begin
    if (in_valid) begin
      a_buf <= a;
      b_buf <= b;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; f1 <= 1'b0; f2 <= 1'b0;
    end else begin
      v1 <= in_valid; f1 <= first;
      v2 <= v1;       f2 <= f1;
    end
  end

  logic signed [PW-1:0] p [N_PE][M2_P];

  for (genvar j = 0; j < N_PE; j++) begin : g_pe
    for (genvar c = 0; c < CI_P; c++) begin : g_b
      assign b_col[j][c] = b_buf[c][j];
    end
    mmu_pe #(.M2_P(M2_P), .CI_P(CI_P)) u_pe (
      .clk, .en(v1), .a(a_buf), .b(b_col[j]), .p(p[j])
    );
  end

  mmu_accum #(.M2_P(M2_P), .CO_P(N_PE), .PW(PW)) u_acc (
    .clk, .rst_n, .acc_en(v2), .acc_first(f2), .p,
    .fin_en, .fin_col, .bias, .bias_en, .sc, .sc_en,
    .out_valid, .out_col, .col
  );

  assign busy = in_valid | v1 | v2;

endmodule
