// mru: Memory Read Unit.
//
// Copies n_words x lanes 16-bit elements from external memory, starting at
// element address ext_addr, into consecutive words of one on-chip buffer
// (FIB, weight, bias, mask or an ILB bank) starting at buf_addr. Elements are
// stored word-major in external memory: element l of word w is at
// ext_addr + w * lanes + l. Requests are issued back to back as long as the
// memory accepts them; responses return in order and are packed into a word,
// which is written with a lane mask covering lanes 0 .. lanes-1.
//
// The paper gives the MRU's job (read feature maps and weights from external
// memory into the buffers); the bus, the element order and the packing are
// this design's.
//
// Interface: start/ext_addr/buf_sel/buf_addr/n_words/lanes; memory read
// request (valid/ready/addr) and in-order response (valid/data); buffer write
// wr_en/wr_sel/wr_addr/wr_data/wr_mask; done pulses with the last write.
module mru
  import swin_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [EXT_AW-1:0] ext_addr,
  input  buf_sel_e          buf_sel,
  input  logic [ADDR_W-1:0] buf_addr,
  input  logic [ADDR_W-1:0] n_words,
  input  logic [5:0]        lanes,
  output logic              busy,
  output logic              done,
  output logic              mem_rd_req_valid,
  input  logic              mem_rd_req_ready,
  output logic [EXT_AW-1:0] mem_rd_addr,
  input  logic              mem_rd_resp_valid,
  input  fix_t              mem_rd_resp_data,
  output logic              wr_en,
  output buf_sel_e          wr_sel,
  output logic [ADDR_W-1:0] wr_addr,
  output fix_t              wr_data [M2],
  output logic [M2-1:0]     wr_mask
);

  logic [EXT_AW-1:0] total, issued, base;
  logic [ADDR_W-1:0] word, nw_r;
  logic [5:0]        lane, lanes_r;
  logic [ADDR_W-1:0] baddr_r;
  fix_t              pack [M2];

  assign mem_rd_req_valid = busy && (issued != total);
  assign mem_rd_addr      = base + issued;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; issued <= '0; total <= '0; base <= '0;
      word <= '0; lane <= '0; lanes_r <= 6'd1; nw_r <= '0; baddr_r <= '0;
      wr_en <= 1'b0; wr_sel <= BUF_FIB; wr_addr <= '0; wr_mask <= '0;
    end else begin
      done  <= 1'b0;
      wr_en <= 1'b0;
      if (start && !busy) begin
        busy    <= (n_words != '0) && (lanes != '0);
        done    <= (n_words == '0) || (lanes == '0);
        total   <= EXT_AW'(n_words) * EXT_AW'(lanes);
        issued  <= '0;
        base    <= ext_addr;
        word    <= '0;
        lane    <= '0;
        lanes_r <= lanes;
        nw_r    <= n_words;
        baddr_r <= buf_addr;
        wr_sel  <= buf_sel;
      end else if (busy) begin
        if (mem_rd_req_valid && mem_rd_req_ready) issued <= issued + 1'b1;
        if (mem_rd_resp_valid) begin
          if (lane == lanes_r - 1) begin
            lane    <= '0;
            wr_en   <= 1'b1;
            wr_addr <= baddr_r + word;
            for (int l = 0; l < M2; l++) wr_mask[l] <= (l < int'(lanes_r));
            word    <= word + 1'b1;
            if (word == nw_r - 1) begin
              busy <= 1'b0;
              done <= 1'b1;
            end
          end else begin
            lane <= lane + 1'b1;
          end
        end
      end
    end
  end

  always_ff @(posedge clk)
    if (busy && mem_rd_resp_valid) pack[lane] <= mem_rd_resp_data;

  assign wr_data = pack;

  // request address and valid hold while the memory stalls
  assert property (@(posedge clk) disable iff (!rst_n)
    mem_rd_req_valid && !mem_rd_req_ready |=> mem_rd_req_valid && $stable(mem_rd_addr));

endmodule
