// scu: Softmax Compute Unit.
//
// Computes softmax over one row of N = 49 attention scores:
//   y_i = 2^(log2(e)(x_i - x_max)) / sum_j 2^(log2(e)(x_j - x_max)).
// Stage 1: the FMU finds x_max (6 cycles). Stage 2: every lane subtracts
// x_max and its EU computes the base-e exponential. Stage 3: an adder tree
// sums the 49 exponentials and each lane's DU turns exponential/sum into a
// base-2 exponent. Stage 4: the same EU, now in base-2 mode, turns that
// exponent into the softmax value. One EU and one DU per lane, as in the
// paper; because the EU is shared by stages 2 and 4, one row is processed at
// a time.
//
// For shifted-window attention the mask row is added (saturating) to the
// scores on entry when mask_en is set; the paper says a mask is applied but
// not where, so this placement is this design's. The DU's dividend is the
// stage-2 exponential of the lane.
//
// Interface: in_valid/in_ready handshake on x/mask/mask_en; out_valid is a
// one-cycle pulse with y (unsigned values in Q.10 held in fix_t). Timing:
// out_valid rises LATENCY = 11 clock edges after the edge that accepts the row; the
// next row is accepted on the cycle after out_valid.
module scu
  import swin_pkg::*;
#(
  parameter  int N       = 49,
  localparam int LATENCY = 11
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  fix_t x    [N],
  input  fix_t mask [N],
  input  logic mask_en,
  output logic out_valid,
  output fix_t y    [N]
);

  typedef enum logic [2:0] {S_IDLE, S_FMU, S_EXP1, S_SUM, S_DIV, S_EXP2, S_OUT} state_e;
  state_e st;

  fix_t                     xr    [N];
  fix_t                     xmax_r;
  logic        [EXP_W-1:0]  e_r   [N];
  logic        [EXP_W-1:0]  sum_r;
  logic signed [LOG_W-1:0]  d_r   [N];

  // FMU
  logic fmu_start, fmu_vld;
  logic fmu_busy;   // FMU already started for this row
  fix_t fmu_max;
  fmu #(.W(DATA_W)) u_fmu (
    .clk, .rst_n, .in_valid(fmu_start), .x(xr), .out_valid(fmu_vld), .xmax(fmu_max)
  );

  // per-lane EU (shared between stage 2 and stage 4) and DU
  logic signed [LOG_W-1:0] eu_in  [N];
  logic                    eu_ctl;
  logic        [EXP_W-1:0] eu_out [N];
  logic signed [LOG_W-1:0] du_out [N];

  assign eu_ctl = (st == S_EXP1);

  for (genvar i = 0; i < N; i++) begin : g_lane
    always_comb begin
      if (st == S_EXP1) eu_in[i] = LOG_W'(xr[i]) - LOG_W'(xmax_r);
      else              eu_in[i] = d_r[i];
    end
    eu #(.IN_W(LOG_W), .OUT_W(EXP_W), .FRAC_W(FRAC_W)) u_eu (
      .f(eu_in[i]), .ctrl(eu_ctl), .y(eu_out[i])
    );
    du #(.IN_W(EXP_W), .OUT_W(LOG_W), .FRAC_W(FRAC_W)) u_du (
      .f1(e_r[i]), .f2(sum_r), .add_one(1'b0), .e(du_out[i])
    );
  end

  // adder tree over the stage-2 exponentials
  logic [EXP_W+5:0] tree_sum;
  always_comb begin
    tree_sum = '0;
    for (int i = 0; i < N; i++) tree_sum += (EXP_W+6)'(e_r[i]);
  end

  assign in_ready  = (st == S_IDLE);
  assign out_valid = (st == S_OUT);
  assign fmu_start = (st == S_FMU) && !fmu_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= S_IDLE;
      fmu_busy <= 1'b0;
    end else begin
      unique case (st)
        S_IDLE: if (in_valid) st <= S_FMU;
        S_FMU: begin
          fmu_busy <= 1'b1;
          if (fmu_vld) begin
            st       <= S_EXP1;
            fmu_busy <= 1'b0;
          end
        end
        S_EXP1: st <= S_SUM;
        S_SUM:  st <= S_DIV;
        S_DIV:  st <= S_EXP2;
        S_EXP2: st <= S_OUT;
        S_OUT:  st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (st == S_IDLE && in_valid)
      for (int i = 0; i < N; i++)
        xr[i] <= mask_en ? sat_fix(ACC_W'(x[i]) + ACC_W'(mask[i])) : x[i];
    if (st == S_FMU && fmu_vld) xmax_r <= fmu_max;
    if (st == S_EXP1) for (int i = 0; i < N; i++) e_r[i] <= eu_out[i];
    if (st == S_SUM)  sum_r <= (tree_sum > (EXP_W+6)'({EXP_W{1'b1}})) ? '1 : EXP_W'(tree_sum);
    if (st == S_DIV)  for (int i = 0; i < N; i++) d_r[i] <= du_out[i];
    if (st == S_EXP2)
      for (int i = 0; i < N; i++)
        y[i] <= sat_fix(ACC_W'({1'b0, eu_out[i]}));
  end

endmodule
