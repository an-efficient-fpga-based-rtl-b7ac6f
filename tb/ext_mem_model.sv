// ext_mem_model: behavioural model of the external memory seen through the
// accelerator's memory interface (16-bit elements). Read requests are
// accepted when ready (randomly withheld to create stalls) and answered in
// order LAT cycles later; writes are accepted when ready (also randomly
// withheld). Counts stalls so testbenches can see that back-pressure
// happened. Not synthesizable; testbench only.
module ext_mem_model #(
  parameter int AW  = 18,
  parameter int LAT = 3
) (
  input  logic          clk,
  input  logic          rd_req_valid,
  output logic          rd_req_ready,
  input  logic [31:0]   rd_addr,
  output logic          rd_resp_valid,
  output logic [15:0]   rd_resp_data,
  input  logic          wr_valid,
  output logic          wr_ready,
  input  logic [31:0]   wr_addr,
  input  logic [15:0]   wr_data
);
  logic [15:0] mem [1 << AW];
  logic        pv [LAT];
  logic [15:0] pd [LAT];
  int rd_stalls = 0, wr_stalls = 0;

  initial begin
    for (int i = 0; i < LAT; i++) begin pv[i] = 0; pd[i] = 0; end
    rd_req_ready = 1; wr_ready = 1;
  end

  assign rd_resp_valid = pv[LAT-1];
  assign rd_resp_data  = pd[LAT-1];

  always @(posedge clk) begin
    if (rd_req_valid && !rd_req_ready) rd_stalls++;
    if (wr_valid && !wr_ready) wr_stalls++;
    for (int i = LAT - 1; i > 0; i--) begin pv[i] <= pv[i-1]; pd[i] <= pd[i-1]; end
    pv[0] <= rd_req_valid && rd_req_ready;
    pd[0] <= mem[rd_addr[AW-1:0]];
    if (wr_valid && wr_ready) mem[wr_addr[AW-1:0]] <= wr_data;
    rd_req_ready <= ($urandom % 8) != 0;
    wr_ready     <= ($urandom % 8) != 0;
  end
endmodule
