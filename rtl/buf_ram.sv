// buf_ram: on-chip buffer memory (BRAM) used for the FIB, weight buffer, bias
// buffer, attention-mask buffer and the ILB banks.
//
// A simple dual-port memory of DEPTH words, each LANES x 16-bit elements, with
// a per-lane write mask (so a 32-lane row of a transposed tile can be written
// into part of a 49-lane word) and a registered read (one cycle latency).
// The paper names these buffers and places them in BRAM; word organisation,
// lane mask and latency are this design's.
//
// Interface: we/waddr/wdata/wmask write port; re/raddr read port, rdata valid
// the cycle after re. Contents are not reset.
module buf_ram
  import swin_pkg::*;
#(
  parameter  int LANES = 49,
  parameter  int DEPTH = 1024,
  localparam int AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  fix_t          wdata [LANES],
  input  logic [LANES-1:0] wmask,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output fix_t          rdata [LANES]
);

  fix_t mem [DEPTH][LANES];

  always_ff @(posedge clk) begin
    if (we)
      for (int l = 0; l < LANES; l++)
        if (wmask[l]) mem[waddr][l] <= wdata[l];
    if (re) rdata <= mem[raddr];
  end

endmodule
