// attn_buffer: attention-weight bank of the intermediate layer buffer.
//
// An N x N register array (N = 49) that the softmax unit writes one row of
// attention weights P[i][*] at a time and the data selection unit reads one
// column P[*][k] at a time, which is the M2 x 1 A operand the MMU needs for
// P x V. The paper lists the ILB as a collection of buffers but does not say
// how attention weights are re-ordered; this transposing bank is this
// design's choice.
//
// Interface: we/wrow/wdata row write; re/rcol column read, rdata valid the
// cycle after re (same timing as buf_ram).
module attn_buffer
  import swin_pkg::*;
#(
  parameter  int N  = 49,
  localparam int AW = $clog2(N)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] wrow,
  input  fix_t          wdata [N],
  input  logic          re,
  input  logic [AW-1:0] rcol,
  output fix_t          rdata [N]
);

  fix_t m [N][N];

  always_ff @(posedge clk) begin
    if (we) m[wrow] <= wdata;
    if (re)
      for (int i = 0; i < N; i++) rdata[i] <= m[i][rcol];
  end

endmodule
