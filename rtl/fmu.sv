// fmu: Find Max Unit of the softmax unit.
//
// Finds the maximum of N = 2^LOG_G1 + 2^LOG_G2 + 1 signed inputs (49 for the
// 7x7 window: x0..x31, x32..x47, x48). Each power-of-two group is reduced by
// a pipelined binary comparator tree that halves the candidates every cycle.
// Because the second group finishes earlier, its maximum is compared with the
// single element x48 as soon as it is ready, and that result meets the first
// group's maximum in the last comparison. Latency is LOG_G1 + 1 cycles
// (6 for 49 inputs) and a new vector can enter every cycle.
//
// The grouping, the early comparison with x48 and the 6-cycle figure are the
// paper's; one register per tree level is this design's reading of "within a
// single clock cycle, comparisons are performed for each pair".
//
// Interface: in_valid/x in, out_valid/xmax LOG_G1+1 cycles later. Requires
// LOG_G1 > LOG_G2.
module fmu #(
  parameter  int W      = 16,
  parameter  int LOG_G1 = 5,
  parameter  int LOG_G2 = 4,
  localparam int G1     = 1 << LOG_G1,
  localparam int G2     = 1 << LOG_G2,
  localparam int N      = G1 + G2 + 1,
  localparam int LAT    = LOG_G1 + 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic signed [W-1:0] x [N],
  output logic                out_valid,
  output logic signed [W-1:0] xmax
);

  function automatic logic signed [W-1:0] smax(input logic signed [W-1:0] a,
                                               input logic signed [W-1:0] b);
    return (a >= b) ? a : b;
  endfunction

  // group trees: level 0 is combinational input, level l is registered
  logic signed [W-1:0] t1 [LOG_G1+1][G1];
  logic signed [W-1:0] t2 [LOG_G2+1][G2];
  // x48 delayed to meet group 2's result, and the group2/x48 result delayed
  // to meet group 1's result
  localparam int D = LOG_G1 - LOG_G2 - 1;
  logic signed [W-1:0] xs_d [LOG_G2];
  logic signed [W-1:0] c_d  [D+1];
  logic [LAT-1:0] vld;

  always_comb begin
    for (int i = 0; i < G1; i++) t1[0][i] = x[i];
    for (int i = 0; i < G2; i++) t2[0][i] = x[G1 + i];
  end

  always_ff @(posedge clk) begin
    for (int l = 1; l <= LOG_G1; l++)
      for (int i = 0; i < G1; i++)
        t1[l][i] <= (i < (G1 >> l)) ? smax(t1[l-1][2*i], t1[l-1][2*i+1]) : '0;
    for (int l = 1; l <= LOG_G2; l++)
      for (int i = 0; i < G2; i++)
        t2[l][i] <= (i < (G2 >> l)) ? smax(t2[l-1][2*i], t2[l-1][2*i+1]) : '0;
    xs_d[0] <= x[N-1];
    for (int l = 1; l < LOG_G2; l++) xs_d[l] <= xs_d[l-1];
    // stage LOG_G2+1: group 2 max against x48
    c_d[0] <= smax(t2[LOG_G2][0], xs_d[LOG_G2-1]);
    for (int l = 1; l <= D; l++) c_d[l] <= c_d[l-1];
    // final stage LOG_G1+1
    xmax <= smax(t1[LOG_G1][0], c_d[D]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[LAT-2:0], in_valid};
  end
  assign out_valid = vld[LAT-1];

endmodule
