// dsu: Data Selection Unit.
//
// Feeds the MMU for one output tile. On start it walks k = 0 .. k_len-1
// (k_len = C_I / c_i), reading word a_base + k of the selected A source (FIB,
// an ILB bank or the attention-weight bank) and word b_base + k of the
// selected B source, and one cycle later (buffer read latency) presents the
// A column and the B row to the MMU with first set on k = 0.
//
// B comes either from the weight buffer (32 lanes as stored) or from an ILB
// bank holding a matrix whose transpose is needed, such as K for Q.K^T. In
// the second case B row k of tile t is lanes 32t .. 32t+31 of ILB word k and
// lanes beyond the 49 tokens are zero: the zero-padded expansion of K^T that
// the paper describes. Address generation inside the DSU and the timing are
// this design's; it is written for c_i = 1.
//
// Interface: start/a_base/b_base/k_len/b_src/b_tile in; a_re/a_addr and
// b_re/b_addr to the buffers; a_word/wgt_word/ilb_b_word back; mmu_valid/
// mmu_first/mmu_a/mmu_b out; busy while a tile is being fed.
module dsu
  import swin_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] a_base,
  input  logic [ADDR_W-1:0] b_base,
  input  logic [ADDR_W-1:0] k_len,
  input  b_src_e            b_src,
  input  logic [0:0]        b_tile,     // 32-lane group of a transposed B word
  output logic              a_re,
  output logic [ADDR_W-1:0] a_addr,
  output logic              b_re,
  output logic [ADDR_W-1:0] b_addr,
  input  fix_t              a_word     [M2],
  input  fix_t              wgt_word   [CO],
  input  fix_t              ilb_b_word [M2],
  output logic              mmu_valid,
  output logic              mmu_first,
  output fix_t              mmu_a      [CI][M2],
  output fix_t              mmu_b      [CI][CO],
  output logic              busy
);

  if (CI != 1) begin : g_ci_check
    $error("dsu is written for c_i = 1");
  end

  logic              run;
  logic [ADDR_W-1:0] k;
  logic              v_d, first_d;
  b_src_e            src_d;
  logic [0:0]        tile_d;

  assign a_re   = run;
  assign b_re   = run;
  assign a_addr = a_base + k;
  assign b_addr = b_base + k;
  assign busy   = run | v_d;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; k <= '0; v_d <= 1'b0; first_d <= 1'b0;
      src_d <= B_WGT; tile_d <= '0;
    end else begin
      v_d     <= run;
      first_d <= run && (k == '0);
      src_d   <= b_src;
      tile_d  <= b_tile;
      if (start && !run) begin
        run <= (k_len != '0);
        k   <= '0;
      end else if (run) begin
        if (k == k_len - 1) run <= 1'b0;
        k <= k + 1'b1;
      end
    end
  end

  always_comb begin
    mmu_valid   = v_d;
    mmu_first   = first_d;
    mmu_a[0]    = a_word;
    for (int j = 0; j < CO; j++) begin
      if (src_d == B_WGT) mmu_b[0][j] = wgt_word[j];
      else if (int'(tile_d) * CO + j < M2) mmu_b[0][j] = ilb_b_word[int'(tile_d) * CO + j];
      else mmu_b[0][j] = '0;   // zero padding of the expanded K^T
    end
  end

  // the MMU takes a new element every cycle while a tile is fed
  assert property (@(posedge clk) disable iff (!rst_n) v_d |-> $past(run));

endmodule
