// output_buffer: holds one finished M2 x CO output tile of the MMU.
//
// Columns arrive from the Accumulation module one per cycle. The tile can be
// read back either as 49-element columns (normal layout: one word per output
// channel) or as 32-element rows (transposed layout: one word per token),
// which is how Q.K^T scores become softmax rows and how V becomes rows of the
// B operand. The paper names the output buffer; the register organisation and
// the two read views are this design's.
//
// Interface: wr_en/wr_col/wr_data; combinational reads rd_col -> col_data and
// rd_row -> row_data.
module output_buffer
  import swin_pkg::*;
#(
  parameter  int M2_P = M2,
  parameter  int CO_P = CO,
  localparam int CW   = $clog2(CO_P),
  localparam int RW   = $clog2(M2_P)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [CW-1:0] wr_col,
  input  fix_t          wr_data  [M2_P],
  input  logic [CW-1:0] rd_col,
  output fix_t          col_data [M2_P],
  input  logic [RW-1:0] rd_row,
  output fix_t          row_data [CO_P]
);

  fix_t t [CO_P][M2_P];

  always_ff @(posedge clk)
    if (wr_en) t[wr_col] <= wr_data;

  assign col_data = t[rd_col];
  always_comb
    for (int j = 0; j < CO_P; j++) row_data[j] = t[j][rd_row];

endmodule
