// gcu: GELU Compute Unit.
//
// GELU(x) = 0.5 x (1 + tanh(h(x))) is rewritten as x / (1 + 2^s(x)) with
// s(x) = -2 log2(e) h(x). Per lane, in four stages: the polynomial unit
// (gcu_fcu) gives s; the EU (base-2 mode) gives p = 2^s; the DU gives the
// exponent log2|x| - log2(1 + p) (its 1/0 MUX set to add 1 to the divisor);
// the same EU gives |x| / (1 + p), and the sign of x is restored. One EU per
// lane serves stages 2 and 4, so a vector takes four cycles in the unit.
//
// The four-stage dataflow and the shared EU are the paper's. Working on |x|
// with the sign restored at the end, LANES = 49 (one MMU output column at a
// time) and the handshake are this design's choices.
//
// Interface: in_valid/in_ready on x; out_valid is a one-cycle pulse with y.
// Timing: out_valid rises 4 clock edges after the accepting edge; the next vector
// is accepted on the cycle after out_valid.
module gcu
  import swin_pkg::*;
#(
  parameter int LANES = 49
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  fix_t x [LANES],
  output logic out_valid,
  output fix_t y [LANES]
);

  typedef enum logic [2:0] {S_IDLE, S_POLY, S_EXP1, S_DIV, S_EXP2, S_OUT} state_e;
  state_e st;

  fix_t                    xr   [LANES];
  logic signed [LOG_W-1:0] s_r  [LANES];
  logic        [EXP_W-1:0] p_r  [LANES];
  logic signed [LOG_W-1:0] d_r  [LANES];

  logic signed [LOG_W-1:0] s_c  [LANES];
  logic signed [LOG_W-1:0] eu_in  [LANES];
  logic        [EXP_W-1:0] eu_out [LANES];
  logic        [EXP_W-1:0] ax     [LANES];
  logic signed [LOG_W-1:0] du_out [LANES];

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    gcu_fcu #(.OUT_W(LOG_W)) u_fcu (.x(xr[i]), .s(s_c[i]));
    assign eu_in[i] = (st == S_EXP1) ? s_r[i] : d_r[i];
    eu #(.IN_W(LOG_W), .OUT_W(EXP_W), .FRAC_W(FRAC_W)) u_eu (
      .f(eu_in[i]), .ctrl(1'b0), .y(eu_out[i])
    );
    assign ax[i] = xr[i][DATA_W-1] ? EXP_W'(-ACC_W'(xr[i])) : EXP_W'(xr[i]);
    du #(.IN_W(EXP_W), .OUT_W(LOG_W), .FRAC_W(FRAC_W)) u_du (
      .f1(ax[i]), .f2(p_r[i]), .add_one(1'b1), .e(du_out[i])
    );
  end

  assign in_ready  = (st == S_IDLE);
  assign out_valid = (st == S_OUT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) st <= S_IDLE;
    else begin
      unique case (st)
        S_IDLE: if (in_valid) st <= S_POLY;
        S_POLY: st <= S_EXP1;
        S_EXP1: st <= S_DIV;
        S_DIV:  st <= S_EXP2;
        S_EXP2: st <= S_OUT;
        S_OUT:  st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (st == S_IDLE && in_valid) xr <= x;
    if (st == S_POLY) s_r <= s_c;
    if (st == S_EXP1) p_r <= eu_out;
    if (st == S_DIV)  d_r <= du_out;
    if (st == S_EXP2)
      for (int i = 0; i < LANES; i++)
        y[i] <= xr[i][DATA_W-1] ? sat_fix(-ACC_W'({1'b0, eu_out[i]}))
                                : sat_fix(ACC_W'({1'b0, eu_out[i]}));
  end

endmodule
