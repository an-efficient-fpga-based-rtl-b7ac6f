// control_unit: instruction sequencer of the accelerator.
//
// Executes one instruction (swin_pkg::instr_t) at a time:
//   LOAD    start the MRU and wait for it.
//   STORE   start the MWU and wait for it.
//   MATMUL  for each output tile t < n_tiles: start the DSU (C_I/c_i feed
//           cycles), wait for the MMU pipeline to empty, finalise the 32
//           accumulator columns with the tile's bias word and, if sc_en, the
//           shortcut columns sc_base + 32t + j (from the FIB for the
//           attention shortcut or an ILB bank for the FFN shortcut), then
//           drain the output buffer into ILB bank dst_bank: as columns to
//           words dst_base + 32t + j (optionally through the GCU), or, in
//           row mode, as rows into lanes 32t.. of words dst_base + i.
//   SOFTMAX for each row i < n_words: read ILB word a_base + i and mask word
//           mask_base + i, run the SCU and write the result to row i of the
//           attention-weight bank.
// A Swin Transformer block, patch embedding or patch merging is a sequence of
// these instructions. The paper shows a control unit that steers the MRU,
// DSU, accumulation, output buffer and mask; the instruction set and this
// schedule are this design's.
//
// Interface: cmd_valid/cmd_ready/cmd; busy; start/done and busy signals of
// the units; buffer read requests for bias, shortcut, softmax source and
// mask; ILB write port for drained results; attention-bank write port.
module control_unit
  import swin_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // instruction input
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  instr_t            cmd,
  output logic              busy,
  output instr_t            cur,
  // MRU / MWU
  output logic              mru_start,
  input  logic              mru_done,
  output logic              mwu_start,
  input  logic              mwu_done,
  // DSU / MMU
  output logic              dsu_start,
  output logic [ADDR_W-1:0] dsu_b_base,
  output logic [0:0]        dsu_b_tile,
  input  logic              dsu_busy,
  input  logic              mmu_busy,
  output logic              bias_re,
  output logic [ADDR_W-1:0] bias_raddr,
  output logic              sc_re,
  output logic [ADDR_W-1:0] sc_raddr,
  output logic              fin_en,
  output logic [4:0]        fin_col,
  input  logic              mmu_out_valid,
  // output buffer and GCU
  output logic [4:0]        obuf_rd_col,
  output logic [5:0]        obuf_rd_row,
  input  fix_t              obuf_col [M2],
  input  fix_t              obuf_row [CO],
  output logic              gcu_in_valid,
  input  logic              gcu_in_ready,
  input  logic              gcu_out_valid,
  input  fix_t              gcu_y    [M2],
  // ILB write (results)
  output logic              ilb_we,
  output logic [1:0]        ilb_wbank,
  output logic [ADDR_W-1:0] ilb_waddr,
  output fix_t              ilb_wdata [M2],
  output logic [M2-1:0]     ilb_wmask,
  // softmax
  output logic              sm_re,
  output logic [ADDR_W-1:0] sm_raddr,
  output logic              mask_re,
  output logic [ADDR_W-1:0] mask_raddr,
  output logic              scu_in_valid,
  input  logic              scu_in_ready,
  input  logic              scu_out_valid,
  output logic              att_we,
  output logic [5:0]        att_wrow
);

  typedef enum logic [3:0] {
    C_IDLE, C_LOAD, C_STORE,
    M_START, M_WAIT, M_FIN, M_FINW, M_DRAIN, M_GSEND, M_GWAIT, M_NEXT,
    S_RD, S_SEND, S_WAIT
  } state_e;
  state_e st;

  logic [7:0]        tile;
  logic [5:0]        j;          // column / row counter
  logic              fin_pend;
  logic [4:0]        fin_col_d;
  logic [ADDR_W-1:0] row_cnt;
  logic [1:0]        fin_tail;

  assign cmd_ready = (st == C_IDLE);
  assign busy      = (st != C_IDLE);

  assign mru_start  = (st == C_LOAD)  && (j == 6'd0);
  assign mwu_start  = (st == C_STORE) && (j == 6'd0);
  assign dsu_start  = (st == M_START);
  assign dsu_b_base = (cur.b_src == B_WGT) ? ADDR_W'(cur.b_base + ADDR_W'(tile) * cur.k_len)
                                           : cur.b_base;
  assign dsu_b_tile = tile[0];
  assign bias_re    = (st == M_START);
  assign bias_raddr = ADDR_W'(cur.bias_base + ADDR_W'(tile));
  assign sc_re      = (st == M_FIN);
  assign sc_raddr   = ADDR_W'(cur.sc_base + ADDR_W'(tile) * ADDR_W'(CO) + ADDR_W'(j));
  assign fin_en     = fin_pend;
  assign fin_col    = fin_col_d;

  assign obuf_rd_col = j[4:0];
  assign obuf_rd_row = j;
  assign gcu_in_valid = (st == M_GSEND);

  assign sm_re        = (st == S_RD);
  assign sm_raddr     = ADDR_W'(cur.a_base + row_cnt);
  assign mask_re      = (st == S_RD);
  assign mask_raddr   = ADDR_W'(cur.mask_base + row_cnt);
  assign scu_in_valid = (st == S_SEND);
  assign att_we       = (st == S_WAIT) && scu_out_valid;
  assign att_wrow     = 6'(row_cnt);

  // ILB write of drained results
  always_comb begin
    ilb_we    = 1'b0;
    ilb_wbank = cur.dst_bank;
    ilb_waddr = '0;
    ilb_wmask = '0;
    for (int l = 0; l < M2; l++) ilb_wdata[l] = '0;
    if (st == M_DRAIN) begin
      ilb_we = 1'b1;
      if (cur.row_mode) begin
        ilb_waddr = ADDR_W'(cur.dst_base + ADDR_W'(j));
        for (int l = 0; l < M2; l++)
          if (l >= int'(tile[0]) * CO && l < int'(tile[0]) * CO + CO) begin
            ilb_wdata[l] = obuf_row[l - int'(tile[0]) * CO];
            ilb_wmask[l] = 1'b1;
          end
      end else begin
        ilb_waddr = ADDR_W'(cur.dst_base + ADDR_W'(tile) * ADDR_W'(CO) + ADDR_W'(j));
        ilb_wdata = obuf_col;
        ilb_wmask = '1;
      end
    end else if (st == M_GWAIT && gcu_out_valid) begin
      ilb_we    = 1'b1;
      ilb_waddr = ADDR_W'(cur.dst_base + ADDR_W'(tile) * ADDR_W'(CO) + ADDR_W'(j));
      ilb_wdata = gcu_y;
      ilb_wmask = '1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE; cur <= '0; tile <= '0; j <= '0; fin_pend <= 1'b0;
      fin_col_d <= '0; row_cnt <= '0; fin_tail <= '0;
    end else begin
      fin_pend  <= (st == M_FIN);
      fin_col_d <= j[4:0];
      unique case (st)
        C_IDLE: if (cmd_valid) begin
          cur <= cmd; tile <= '0; j <= '0; row_cnt <= '0;
          unique case (cmd.op)
            OP_LOAD:    st <= C_LOAD;
            OP_STORE:   st <= C_STORE;
            OP_MATMUL:  st <= (cmd.n_tiles == '0) ? C_IDLE : M_START;
            OP_SOFTMAX: st <= (cmd.n_words == '0) ? C_IDLE : S_RD;
            default:    st <= C_IDLE;
          endcase
        end
        C_LOAD:  begin j <= 6'd1; if (mru_done) st <= C_IDLE; end
        C_STORE: begin j <= 6'd1; if (mwu_done) st <= C_IDLE; end
        M_START: st <= M_WAIT;
        M_WAIT:  if (!dsu_busy && !mmu_busy) begin st <= M_FIN; j <= '0; end
        M_FIN: begin
          if (j == 6'(CO - 1)) begin st <= M_FINW; fin_tail <= 2'd0; end
          else j <= j + 1'b1;
        end
        M_FINW: begin
          // last fin_en issues this cycle, its column lands one cycle later
          fin_tail <= fin_tail + 1'b1;
          if (fin_tail == 2'd1) begin
            j  <= '0;
            st <= cur.gelu_en ? M_GSEND : M_DRAIN;
          end
        end
        M_DRAIN: begin
          if (j == (cur.row_mode ? 6'(M2 - 1) : 6'(CO - 1))) st <= M_NEXT;
          else j <= j + 1'b1;
        end
        M_GSEND: if (gcu_in_ready) st <= M_GWAIT;
        M_GWAIT: if (gcu_out_valid) begin
          if (j == 6'(CO - 1)) st <= M_NEXT;
          else begin j <= j + 1'b1; st <= M_GSEND; end
        end
        M_NEXT: begin
          if (tile == cur.n_tiles - 1) st <= C_IDLE;
          else begin tile <= tile + 1'b1; st <= M_START; end
        end
        S_RD:   st <= S_SEND;
        S_SEND: if (scu_in_ready) st <= S_WAIT;
        S_WAIT: if (scu_out_valid) begin
          if (row_cnt == cur.n_words - 1) st <= C_IDLE;
          else begin row_cnt <= row_cnt + 1'b1; st <= S_RD; end
        end
        default: st <= C_IDLE;
      endcase
    end
  end

  // the last finalised column reaches the output buffer before draining
  assert property (@(posedge clk) disable iff (!rst_n)
    (st == M_FINW && fin_tail == 2'd1) |-> mmu_out_valid);
  // GELU is applied to columns only; the two B operands must use different
  // ILB banks (one read port per bank)
  assert property (@(posedge clk) disable iff (!rst_n)
    (st == M_START) |-> !(cur.gelu_en && cur.row_mode));
  assert property (@(posedge clk) disable iff (!rst_n)
    (st == M_START && cur.a_src == A_ILB && cur.b_src == B_ILB_T) |-> (cur.a_bank != cur.b_bank));

endmodule
