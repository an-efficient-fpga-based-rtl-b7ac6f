// mwu: Memory Write Unit.
//
// Copies n_words words of an ILB bank, starting at buf_addr, to external
// memory: lanes elements per word, word-major, starting at element address
// ext_addr (element l of word w goes to ext_addr + w * lanes + l). Each word
// is read (one cycle latency), then its elements are written one per
// accepted cycle.
//
// The paper gives the MWU's job (write results to external memory); the bus
// and the element order are this design's and match the MRU.
//
// Interface: start/ext_addr/buf_addr/n_words/lanes; re/raddr/rdata to the
// ILB; memory write valid/ready/addr/data; done pulses after the last write.
module mwu
  import swin_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [EXT_AW-1:0] ext_addr,
  input  logic [ADDR_W-1:0] buf_addr,
  input  logic [ADDR_W-1:0] n_words,
  input  logic [5:0]        lanes,
  output logic              busy,
  output logic              done,
  output logic              re,
  output logic [ADDR_W-1:0] raddr,
  input  fix_t              rdata [M2],
  output logic              mem_wr_valid,
  input  logic              mem_wr_ready,
  output logic [EXT_AW-1:0] mem_wr_addr,
  output fix_t              mem_wr_data
);

  typedef enum logic [1:0] {W_IDLE, W_READ, W_WAIT, W_WRITE} state_e;
  state_e st;

  logic [ADDR_W-1:0] word, nw_r, baddr_r;
  logic [5:0]        lane, lanes_r;
  logic [EXT_AW-1:0] eaddr;
  fix_t              hold [M2];

  assign busy         = (st != W_IDLE);
  assign re           = (st == W_READ);
  assign raddr        = baddr_r + word;
  assign mem_wr_valid = (st == W_WRITE);
  assign mem_wr_addr  = eaddr;
  assign mem_wr_data  = hold[lane];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= W_IDLE; done <= 1'b0; word <= '0; nw_r <= '0; baddr_r <= '0;
      lane <= '0; lanes_r <= 6'd1; eaddr <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        W_IDLE: if (start) begin
          if (n_words == '0 || lanes == '0) done <= 1'b1;
          else st <= W_READ;
          word <= '0; nw_r <= n_words; baddr_r <= buf_addr;
          lanes_r <= lanes; eaddr <= ext_addr; lane <= '0;
        end
        W_READ:  st <= W_WAIT;
        W_WAIT:  begin hold <= rdata; st <= W_WRITE; end
        W_WRITE: if (mem_wr_ready) begin
          eaddr <= eaddr + 1'b1;
          if (lane == lanes_r - 1) begin
            lane <= '0;
            word <= word + 1'b1;
            if (word == nw_r - 1) begin st <= W_IDLE; done <= 1'b1; end
            else st <= W_READ;
          end else lane <= lane + 1'b1;
        end
        default: st <= W_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
    mem_wr_valid && !mem_wr_ready |=> mem_wr_valid && $stable(mem_wr_addr) && $stable(mem_wr_data));

endmodule
