// swin_acc_top: Swin Transformer accelerator, top level.
//
// Wires the units as in the accelerator's block diagram: the MRU fills the
// feature map input buffer (FIB), weight, bias and attention-mask buffers and
// ILB banks from external memory; the DSU selects A (FIB, ILB bank or
// attention-weight bank) and B (weight buffer or an ILB bank read as K^T)
// for the MMU; the MMU's Accumulation module adds the bias and the shortcut
// (from the FIB for attention, from the ILB for the FFN); the output buffer
// is drained into the ILB directly or through the GCU; the SCU turns ILB
// score rows (plus mask) into attention weights; the MWU writes ILB banks
// back to external memory. The control unit sequences all of it from
// instructions (swin_pkg::instr_t).
//
// The external memory interface (a DRAM controller) is outside the design;
// its request/response signals are ports. Buffer depths are this design's
// choices (the paper gives none): FIB 1024 channel columns, weight buffer
// 4096 rows of one 32-column tile, bias 128 tiles, mask 256 rows, 4 ILB banks
// of 4096 words.
module swin_acc_top
  import swin_pkg::*;
#(
  parameter int FIB_DEPTH  = 1024,
  parameter int WGT_DEPTH  = 4096,
  parameter int BIAS_DEPTH = 128,
  parameter int MASK_DEPTH = 256,
  parameter int ILB_DEPTH  = 4096
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  instr_t            cmd,
  output logic              busy,
  output logic              mem_rd_req_valid,
  input  logic              mem_rd_req_ready,
  output logic [EXT_AW-1:0] mem_rd_addr,
  input  logic              mem_rd_resp_valid,
  input  fix_t              mem_rd_resp_data,
  output logic              mem_wr_valid,
  input  logic              mem_wr_ready,
  output logic [EXT_AW-1:0] mem_wr_addr,
  output fix_t              mem_wr_data
);

  localparam int FIB_AW  = $clog2(FIB_DEPTH);
  localparam int WGT_AW  = $clog2(WGT_DEPTH);
  localparam int BIAS_AW = $clog2(BIAS_DEPTH);
  localparam int MASK_AW = $clog2(MASK_DEPTH);
  localparam int ILB_AW  = $clog2(ILB_DEPTH);

  instr_t cur;

  // ---------------- control unit ----------------
  logic mru_start, mru_done, mru_busy, mwu_start, mwu_done, mwu_busy;
  logic dsu_start, dsu_busy, mmu_busy;
  logic [ADDR_W-1:0] dsu_b_base;
  logic [0:0] dsu_b_tile;
  logic bias_re, sc_re, fin_en, mmu_out_valid;
  logic [ADDR_W-1:0] bias_raddr, sc_raddr;
  logic [4:0] fin_col, mmu_out_col, obuf_rd_col;
  logic [5:0] obuf_rd_row, att_wrow;
  fix_t obuf_col [M2];
  fix_t obuf_row [CO];
  logic gcu_in_valid, gcu_in_ready, gcu_out_valid;
  fix_t gcu_y [M2];
  logic ctl_ilb_we;
  logic [1:0] ctl_ilb_wbank;
  logic [ADDR_W-1:0] ctl_ilb_waddr;
  fix_t ctl_ilb_wdata [M2];
  logic [M2-1:0] ctl_ilb_wmask;
  logic sm_re, mask_re, scu_in_valid, scu_in_ready, scu_out_valid, att_we;
  logic [ADDR_W-1:0] sm_raddr, mask_raddr;

  control_unit u_ctrl (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .busy, .cur,
    .mru_start, .mru_done, .mwu_start, .mwu_done,
    .dsu_start, .dsu_b_base, .dsu_b_tile, .dsu_busy, .mmu_busy,
    .bias_re, .bias_raddr, .sc_re, .sc_raddr, .fin_en, .fin_col, .mmu_out_valid,
    .obuf_rd_col, .obuf_rd_row, .obuf_col, .obuf_row,
    .gcu_in_valid, .gcu_in_ready, .gcu_out_valid, .gcu_y,
    .ilb_we(ctl_ilb_we), .ilb_wbank(ctl_ilb_wbank), .ilb_waddr(ctl_ilb_waddr),
    .ilb_wdata(ctl_ilb_wdata), .ilb_wmask(ctl_ilb_wmask),
    .sm_re, .sm_raddr, .mask_re, .mask_raddr,
    .scu_in_valid, .scu_in_ready, .scu_out_valid, .att_we, .att_wrow
  );

  // ---------------- MRU / MWU ----------------
  logic mru_wr_en;
  buf_sel_e mru_wr_sel;
  logic [ADDR_W-1:0] mru_wr_addr;
  fix_t mru_wr_data [M2];
  logic [M2-1:0] mru_wr_mask;

  mru u_mru (
    .clk, .rst_n, .start(mru_start), .ext_addr(cur.ext_addr), .buf_sel(cur.buf_sel),
    .buf_addr(cur.buf_addr), .n_words(cur.n_words), .lanes(cur.lanes),
    .busy(mru_busy), .done(mru_done),
    .mem_rd_req_valid, .mem_rd_req_ready, .mem_rd_addr, .mem_rd_resp_valid, .mem_rd_resp_data,
    .wr_en(mru_wr_en), .wr_sel(mru_wr_sel), .wr_addr(mru_wr_addr), .wr_data(mru_wr_data),
    .wr_mask(mru_wr_mask)
  );

  logic mwu_re;
  logic [ADDR_W-1:0] mwu_raddr;
  fix_t mwu_rdata [M2];

  mwu u_mwu (
    .clk, .rst_n, .start(mwu_start), .ext_addr(cur.ext_addr), .buf_addr(cur.buf_addr),
    .n_words(cur.n_words), .lanes(cur.lanes), .busy(mwu_busy), .done(mwu_done),
    .re(mwu_re), .raddr(mwu_raddr), .rdata(mwu_rdata),
    .mem_wr_valid, .mem_wr_ready, .mem_wr_addr, .mem_wr_data
  );

  // ---------------- DSU ----------------
  logic dsu_a_re, dsu_b_re, mmu_valid, mmu_first;
  logic [ADDR_W-1:0] dsu_a_addr, dsu_b_addr;
  fix_t a_word [M2];
  fix_t wgt_rdata [CO];
  fix_t ilb_b_word [M2];
  fix_t mmu_a [CI][M2];
  fix_t mmu_b [CI][CO];

  dsu u_dsu (
    .clk, .rst_n, .start(dsu_start), .a_base(cur.a_base), .b_base(dsu_b_base),
    .k_len(cur.k_len), .b_src(cur.b_src), .b_tile(dsu_b_tile),
    .a_re(dsu_a_re), .a_addr(dsu_a_addr), .b_re(dsu_b_re), .b_addr(dsu_b_addr),
    .a_word, .wgt_word(wgt_rdata), .ilb_b_word,
    .mmu_valid, .mmu_first, .mmu_a, .mmu_b, .busy(dsu_busy)
  );

  // ---------------- buffers ----------------
  fix_t fib_rdata [M2];
  fix_t bias_rdata [CO];
  fix_t mask_rdata [M2];
  fix_t att_rdata [M2];
  fix_t scu_y [M2];
  fix_t ilb_rdata [ILB_BANKS][M2];
  fix_t mru_wr_data32 [CO];

  always_comb
    for (int l = 0; l < CO; l++) mru_wr_data32[l] = mru_wr_data[l];

  logic fib_re;
  logic [ADDR_W-1:0] fib_raddr;
  assign fib_re    = (dsu_a_re && cur.a_src == A_FIB) || (sc_re && cur.sc_src == SC_FIB);
  assign fib_raddr = dsu_a_re ? dsu_a_addr : sc_raddr;

  buf_ram #(.LANES(M2), .DEPTH(FIB_DEPTH)) u_fib (
    .clk, .we(mru_wr_en && mru_wr_sel == BUF_FIB), .waddr(FIB_AW'(mru_wr_addr)),
    .wdata(mru_wr_data), .wmask(mru_wr_mask),
    .re(fib_re), .raddr(FIB_AW'(fib_raddr)), .rdata(fib_rdata)
  );

  buf_ram #(.LANES(CO), .DEPTH(WGT_DEPTH)) u_wgt (
    .clk, .we(mru_wr_en && mru_wr_sel == BUF_WGT), .waddr(WGT_AW'(mru_wr_addr)),
    .wdata(mru_wr_data32), .wmask(mru_wr_mask[CO-1:0]),
    .re(dsu_b_re && cur.b_src == B_WGT), .raddr(WGT_AW'(dsu_b_addr)), .rdata(wgt_rdata)
  );

  buf_ram #(.LANES(CO), .DEPTH(BIAS_DEPTH)) u_bias (
    .clk, .we(mru_wr_en && mru_wr_sel == BUF_BIAS), .waddr(BIAS_AW'(mru_wr_addr)),
    .wdata(mru_wr_data32), .wmask(mru_wr_mask[CO-1:0]),
    .re(bias_re), .raddr(BIAS_AW'(bias_raddr)), .rdata(bias_rdata)
  );

  buf_ram #(.LANES(M2), .DEPTH(MASK_DEPTH)) u_mask (
    .clk, .we(mru_wr_en && mru_wr_sel == BUF_MASK), .waddr(MASK_AW'(mru_wr_addr)),
    .wdata(mru_wr_data), .wmask(mru_wr_mask),
    .re(mask_re), .raddr(MASK_AW'(mask_raddr)), .rdata(mask_rdata)
  );

  // ILB banks: one write port shared by MRU loads and drained results, one
  // read port per bank shared by the DSU, shortcut, softmax and MWU readers
  logic              mru_ilb_we;
  assign mru_ilb_we = mru_wr_en && mru_wr_sel == BUF_ILB;

  for (genvar b = 0; b < ILB_BANKS; b++) begin : g_ilb
    logic              we, re;
    logic [ADDR_W-1:0] waddr, raddr;
    fix_t              wdata [M2];
    logic [M2-1:0]     wmask;
    always_comb begin
      if (mru_ilb_we) begin
        we = (cur.dst_bank == 2'(b)); waddr = mru_wr_addr; wdata = mru_wr_data; wmask = mru_wr_mask;
      end else begin
        we = ctl_ilb_we && (ctl_ilb_wbank == 2'(b)); waddr = ctl_ilb_waddr;
        wdata = ctl_ilb_wdata; wmask = ctl_ilb_wmask;
      end
      re = 1'b0; raddr = '0;
      if (dsu_a_re && cur.a_src == A_ILB && cur.a_bank == 2'(b)) begin
        re = 1'b1; raddr = dsu_a_addr;
      end else if (dsu_b_re && cur.b_src == B_ILB_T && cur.b_bank == 2'(b)) begin
        re = 1'b1; raddr = dsu_b_addr;
      end else if (sc_re && cur.sc_src == SC_ILB && cur.sc_bank == 2'(b)) begin
        re = 1'b1; raddr = sc_raddr;
      end else if (sm_re && cur.a_bank == 2'(b)) begin
        re = 1'b1; raddr = sm_raddr;
      end else if (mwu_re && cur.dst_bank == 2'(b)) begin
        re = 1'b1; raddr = mwu_raddr;
      end
    end
    buf_ram #(.LANES(M2), .DEPTH(ILB_DEPTH)) u_bank (
      .clk, .we, .waddr(ILB_AW'(waddr)), .wdata, .wmask,
      .re, .raddr(ILB_AW'(raddr)), .rdata(ilb_rdata[b])
    );
  end

  attn_buffer #(.N(M2)) u_att (
    .clk, .we(att_we), .wrow(att_wrow), .wdata(scu_y),
    .re(dsu_a_re && cur.a_src == A_ATT), .rcol(6'(dsu_a_addr)), .rdata(att_rdata)
  );

  // operand selection for the DSU, shortcut, softmax and MWU
  always_comb begin
    unique case (cur.a_src)
      A_ILB:   a_word = ilb_rdata[cur.a_bank];
      A_ATT:   a_word = att_rdata;
      default: a_word = fib_rdata;
    endcase
  end
  assign ilb_b_word = ilb_rdata[cur.b_bank];
  assign mwu_rdata  = ilb_rdata[cur.dst_bank];

  fix_t sc_col [M2];
  assign sc_col = (cur.sc_src == SC_ILB) ? ilb_rdata[cur.sc_bank] : fib_rdata;

  // ---------------- MMU, output buffer, GCU, SCU ----------------
  fix_t mmu_col [M2];
  mmu u_mmu (
    .clk, .rst_n, .in_valid(mmu_valid), .first(mmu_first), .a(mmu_a), .b(mmu_b),
    .busy(mmu_busy), .fin_en, .fin_col, .bias(bias_rdata[fin_col]), .bias_en(cur.bias_en),
    .sc(sc_col), .sc_en(cur.sc_en), .out_valid(mmu_out_valid), .out_col(mmu_out_col),
    .col(mmu_col)
  );

  output_buffer u_obuf (
    .clk, .wr_en(mmu_out_valid), .wr_col(mmu_out_col), .wr_data(mmu_col),
    .rd_col(obuf_rd_col), .col_data(obuf_col), .rd_row(obuf_rd_row), .row_data(obuf_row)
  );

  gcu #(.LANES(M2)) u_gcu (
    .clk, .rst_n, .in_valid(gcu_in_valid), .in_ready(gcu_in_ready), .x(obuf_col),
    .out_valid(gcu_out_valid), .y(gcu_y)
  );

  scu #(.N(M2)) u_scu (
    .clk, .rst_n, .in_valid(scu_in_valid), .in_ready(scu_in_ready),
    .x(ilb_rdata[cur.a_bank]), .mask(mask_rdata), .mask_en(cur.mask_en),
    .out_valid(scu_out_valid), .y(scu_y)
  );

endmodule
