// tb_swin_acc_top: end-to-end test of the accelerator (one head, C = 32).
//
// Runs one 7x7 window through a complete Swin Transformer block with
// BN folded into the linear layers (C = 32*NH channels, NH heads of 32,
// FFN hidden width 4C):
//   Q = X Wq + bq, K = X Wk + bk (column layout), V_h = X Wv_h + bv_h (row
//   layout, one instruction per head), per head S = Q_h K_h^T (K^T zero
//   padded to 64, row layout), P = softmax(S + mask), O_h = P V_h;
//   Y = O Wo + bo + X (shortcut from the FIB); H = GELU(Y W1 + b1);
//   Z = H W2 + b2 + Y (shortcut from the ILB).
// Inputs are generated here; the expected Z (and S of the last head) is
// computed with the integer reference models and compared with what the
// MWU writes to the external-memory model. Each mechanism (bias, both
// shortcut sources, K^T padding, row-layout drain, GELU, masked softmax,
// memory read and write stalls) is counted and must occur.
module tb_swin_acc_top;
  import swin_pkg::*;
  import ref_pkg::*;

  localparam int NH  = 1;
  localparam int C   = 32 * NH;
  localparam int HID = 4 * C;
  // weight buffer word bases (one word = one input channel of a 32-col tile)
  localparam int WQ = 0, WK = WQ + C * NH, WV = WK + C * NH, WO = WV + C * NH;
  localparam int W1 = WO + C * NH, W2 = W1 + C * (HID / 32);
  localparam int NWGT = W2 + HID * NH;
  // bias buffer tiles
  localparam int BQ = 0, BK = NH, BV = 2 * NH, BO = 3 * NH, B1 = 4 * NH, B2 = 4 * NH + HID / 32;
  localparam int NBIAS = B2 + NH;
  // external memory element addresses
  localparam int E_X = 0, E_W = E_X + 49 * C, E_B = E_W + NWGT * 32, E_M = E_B + NBIAS * 32;
  localparam int E_Z = E_M + 49 * 49, E_S = E_Z + 49 * C;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, busy;
  instr_t cmd;
  logic mem_rd_req_valid, mem_rd_req_ready, mem_rd_resp_valid, mem_wr_valid, mem_wr_ready;
  logic [31:0] mem_rd_addr, mem_wr_addr;
  fix_t mem_rd_resp_data, mem_wr_data;

  swin_acc_top dut (.clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .busy,
    .mem_rd_req_valid, .mem_rd_req_ready, .mem_rd_addr, .mem_rd_resp_valid, .mem_rd_resp_data,
    .mem_wr_valid, .mem_wr_ready, .mem_wr_addr, .mem_wr_data);

  ext_mem_model mem (.clk, .rd_req_valid(mem_rd_req_valid), .rd_req_ready(mem_rd_req_ready),
    .rd_addr(mem_rd_addr), .rd_resp_valid(mem_rd_resp_valid), .rd_resp_data(mem_rd_resp_data),
    .wr_valid(mem_wr_valid), .wr_ready(mem_wr_ready), .wr_addr(mem_wr_addr), .wr_data(mem_wr_data));

  always #5 clk = ~clk;

  // ---------------- data and reference ----------------
  longint X [49][C], Wq [C][C], Wk [C][C], Wv [C][C], Wo [C][C], Wf1 [C][HID], Wf2 [HID][C];
  longint bq [C], bk [C], bv [C], bo [C], bf1 [HID], bf2 [C], M [49][49];
  longint Q [49][C], K [49][C], V [49][C], S [49][49], P [49][49], O [49][C];
  longint Y [49][C], H [49][HID], Z [49][C];

  function automatic longint rnd(int range_);
    return longint'(int'($urandom % (2 * range_ + 1)) - range_);
  endfunction

  task automatic gen_and_model();
    longint acc;
    for (int r = 0; r < 49; r++) for (int c = 0; c < C; c++) X[r][c] = rnd(2048);
    for (int k = 0; k < C; k++) for (int c = 0; c < C; c++) begin
      Wq[k][c] = rnd(160); Wk[k][c] = rnd(160); Wv[k][c] = rnd(160); Wo[k][c] = rnd(160);
    end
    for (int k = 0; k < C; k++) for (int c = 0; c < HID; c++) Wf1[k][c] = rnd(160);
    for (int k = 0; k < HID; k++) for (int c = 0; c < C; c++) Wf2[k][c] = rnd(80);
    for (int c = 0; c < C; c++) begin bq[c] = rnd(512); bk[c] = rnd(512); bv[c] = rnd(512); bo[c] = rnd(512); bf2[c] = rnd(512); end
    for (int c = 0; c < HID; c++) bf1[c] = rnd(512);
    // shifted-window style mask: two regions, -8.0 between them
    for (int i = 0; i < 49; i++) for (int j = 0; j < 49; j++)
      M[i][j] = ((i % 7 < 4) == (j % 7 < 4)) ? 0 : -8192;
    for (int r = 0; r < 49; r++) for (int c = 0; c < C; c++) begin
      longint aq, ak, av;
      aq = 0; ak = 0; av = 0;
      for (int k = 0; k < C; k++) begin aq += X[r][k] * Wq[k][c]; ak += X[r][k] * Wk[k][c]; av += X[r][k] * Wv[k][c]; end
      Q[r][c] = ref_round(aq + bq[c] * 1024); K[r][c] = ref_round(ak + bk[c] * 1024); V[r][c] = ref_round(av + bv[c] * 1024);
    end
    for (int h = 0; h < NH; h++) begin
      for (int i = 0; i < 49; i++) begin
        longint srow [49], mrow [49], prow [49];
        for (int j = 0; j < 49; j++) begin
          acc = 0;
          for (int c = 0; c < 32; c++) acc += Q[i][32*h+c] * K[j][32*h+c];
          S[i][j] = ref_round(acc); srow[j] = S[i][j]; mrow[j] = M[i][j];
        end
        ref_softmax(srow, mrow, 1'b1, prow);
        for (int j = 0; j < 49; j++) P[i][j] = prow[j];
      end
      for (int r = 0; r < 49; r++) for (int c = 0; c < 32; c++) begin
        acc = 0;
        for (int k = 0; k < 49; k++) acc += P[r][k] * V[k][32*h+c];
        O[r][32*h+c] = ref_round(acc);
      end
    end
    for (int r = 0; r < 49; r++) for (int c = 0; c < C; c++) begin
      acc = 0;
      for (int k = 0; k < C; k++) acc += O[r][k] * Wo[k][c];
      Y[r][c] = ref_round(acc + bo[c] * 1024 + X[r][c] * 1024);
    end
    for (int r = 0; r < 49; r++) for (int c = 0; c < HID; c++) begin
      acc = 0;
      for (int k = 0; k < C; k++) acc += Y[r][k] * Wf1[k][c];
      H[r][c] = ref_gelu(ref_round(acc + bf1[c] * 1024));
    end
    for (int r = 0; r < 49; r++) for (int c = 0; c < C; c++) begin
      acc = 0;
      for (int k = 0; k < HID; k++) acc += H[r][k] * Wf2[k][c];
      Z[r][c] = ref_round(acc + bf2[c] * 1024 + Y[r][c] * 1024);
    end
  endtask

  // external memory image: FIB words are channels (49 tokens each); weight
  // words are input channels of a 32-column output tile; bias words are tiles
  task automatic fill_memory();

    for (int c = 0; c < C; c++) for (int r = 0; r < 49; r++) mem.mem[E_X + c * 49 + r] = 16'(X[r][c]);
    for (int t = 0; t < C / 32; t++) for (int k = 0; k < C; k++) for (int j = 0; j < 32; j++) begin
      mem.mem[E_W + ((WQ + t * C + k) * 32) + j] = 16'(Wq[k][32*t+j]);
      mem.mem[E_W + ((WK + t * C + k) * 32) + j] = 16'(Wk[k][32*t+j]);
      mem.mem[E_W + ((WV + t * C + k) * 32) + j] = 16'(Wv[k][32*t+j]);
      mem.mem[E_W + ((WO + t * C + k) * 32) + j] = 16'(Wo[k][32*t+j]);
    end
    for (int t = 0; t < HID / 32; t++) for (int k = 0; k < C; k++) for (int j = 0; j < 32; j++)
      mem.mem[E_W + ((W1 + t * C + k) * 32) + j] = 16'(Wf1[k][32*t+j]);
    for (int t = 0; t < C / 32; t++) for (int k = 0; k < HID; k++) for (int j = 0; j < 32; j++)
      mem.mem[E_W + ((W2 + t * HID + k) * 32) + j] = 16'(Wf2[k][32*t+j]);
    for (int t = 0; t < NH; t++) for (int j = 0; j < 32; j++) begin
      mem.mem[E_B + (BQ + t) * 32 + j] = 16'(bq[32*t+j]);
      mem.mem[E_B + (BK + t) * 32 + j] = 16'(bk[32*t+j]);
      mem.mem[E_B + (BV + t) * 32 + j] = 16'(bv[32*t+j]);
      mem.mem[E_B + (BO + t) * 32 + j] = 16'(bo[32*t+j]);
      mem.mem[E_B + (B2 + t) * 32 + j] = 16'(bf2[32*t+j]);
    end
    for (int t = 0; t < HID / 32; t++) for (int j = 0; j < 32; j++)
      mem.mem[E_B + (B1 + t) * 32 + j] = 16'(bf1[32*t+j]);
    for (int i = 0; i < 49; i++) for (int j = 0; j < 49; j++) mem.mem[E_M + i * 49 + j] = 16'(M[i][j]);

  endtask

  // ---------------- instruction issue ----------------
  task automatic issue(instr_t i);
    @(negedge clk);
    cmd = i; cmd_valid = 1;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    @(negedge clk) cmd_valid = 0;
    @(posedge clk);
    while (busy) @(posedge clk);
  endtask

  function automatic instr_t ld(buf_sel_e s, int ext, int baddr, int nw, int lanes, int bank = 0);
    instr_t i = '0;
    i.op = OP_LOAD; i.buf_sel = s; i.ext_addr = 32'(ext); i.buf_addr = 16'(baddr);
    i.n_words = 16'(nw); i.lanes = 6'(lanes); i.dst_bank = 2'(bank);
    return i;
  endfunction

  function automatic instr_t st(int bank, int baddr, int nw, int lanes, int ext);
    instr_t i = '0;
    i.op = OP_STORE; i.dst_bank = 2'(bank); i.buf_addr = 16'(baddr); i.n_words = 16'(nw);
    i.lanes = 6'(lanes); i.ext_addr = 32'(ext);
    return i;
  endfunction

  function automatic instr_t mm(a_src_e as, int ab, int abase, int klen, b_src_e bs, int bb, int bbase,
                                int tiles, bit ben, int bbias, bit sce, sc_src_e scs, int scb, int scbase,
                                bit gelu, bit row, int db, int dbase);
    instr_t i = '0;
    i.op = OP_MATMUL; i.a_src = as; i.a_bank = 2'(ab); i.a_base = 16'(abase); i.k_len = 16'(klen);
    i.b_src = bs; i.b_bank = 2'(bb); i.b_base = 16'(bbase); i.n_tiles = 8'(tiles);
    i.bias_en = ben; i.bias_base = 16'(bbias); i.sc_en = sce; i.sc_src = scs; i.sc_bank = 2'(scb);
    i.sc_base = 16'(scbase); i.gelu_en = gelu; i.row_mode = row; i.dst_bank = 2'(db); i.dst_base = 16'(dbase);
    return i;
  endfunction

  function automatic instr_t sm(int bank, int base, int rows, bit men, int mbase);
    instr_t i = '0;
    i.op = OP_SOFTMAX; i.a_bank = 2'(bank); i.a_base = 16'(base); i.n_words = 16'(rows);
    i.mask_en = men; i.mask_base = 16'(mbase);
    return i;
  endfunction

  // ---------------- mechanism counters ----------------
  int n_bias = 0, n_sc_fib = 0, n_sc_ilb = 0, n_pad = 0, n_row = 0, n_gelu = 0, n_mask = 0, n_cyc = 0;
  always @(posedge clk) if (rst_n) begin
    n_cyc++;
    if (dut.fin_en && dut.cur.bias_en) n_bias++;
    if (dut.fin_en && dut.cur.sc_en && dut.cur.sc_src == SC_FIB) n_sc_fib++;
    if (dut.fin_en && dut.cur.sc_en && dut.cur.sc_src == SC_ILB) n_sc_ilb++;
    if (dut.mmu_valid && dut.u_dsu.src_d == B_ILB_T && dut.u_dsu.tile_d == 1'b1) n_pad++;
    if (dut.ctl_ilb_we && dut.cur.row_mode) n_row++;
    if (dut.gcu_out_valid) n_gelu++;
    if (dut.scu_out_valid && dut.cur.mask_en) n_mask++;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t_compute;
    cmd = '0;
    gen_and_model();
    fill_memory();
    repeat (3) @(posedge clk);
    rst_n = 1;
    // loads
    issue(ld(BUF_FIB, E_X, 0, C, 49));
    issue(ld(BUF_WGT, E_W, 0, NWGT, 32));
    issue(ld(BUF_BIAS, E_B, 0, NBIAS, 32));
    issue(ld(BUF_MASK, E_M, 0, 49, 49));
    t_compute = n_cyc;
    // Q -> bank0 words 0..C-1, K -> bank1 words 0..C-1 (columns)
    issue(mm(A_FIB, 0, 0, C, B_WGT, 0, WQ, C / 32, 1, BQ, 0, SC_FIB, 0, 0, 0, 0, 0, 0));
    issue(mm(A_FIB, 0, 0, C, B_WGT, 0, WK, C / 32, 1, BK, 0, SC_FIB, 0, 0, 0, 0, 1, 0));
    for (int h = 0; h < NH; h++) begin
      // V_h -> bank2 words 64h .. 64h+48, lanes 0..31 (rows)
      issue(mm(A_FIB, 0, 0, C, B_WGT, 0, WV + h * C, 1, 1, BV + h, 0, SC_FIB, 0, 0, 0, 1, 2, 64 * h));
      // S = Q_h K_h^T -> bank3 words 0..48 (rows), K^T padded to 64 columns
      issue(mm(A_ILB, 0, 32 * h, 32, B_ILB_T, 1, 32 * h, 2, 0, 0, 0, SC_FIB, 0, 0, 0, 1, 3, 0));
      issue(sm(3, 0, 49, 1, 0));
      // O_h = P V_h -> bank0 words C + 32h + c
      issue(mm(A_ATT, 0, 0, 49, B_ILB_T, 2, 64 * h, 1, 0, 0, 0, SC_FIB, 0, 0, 0, 0, 0, C + 32 * h));
    end
    if (NH == 1) issue(st(3, 0, 49, 49, E_S));
    // Y = O Wo + bo + X -> bank1 words C ..
    issue(mm(A_ILB, 0, C, C, B_WGT, 0, WO, C / 32, 1, BO, 1, SC_FIB, 0, 0, 0, 0, 1, C));
    // H = GELU(Y W1 + b1) -> bank2 words 256 ..
    issue(mm(A_ILB, 1, C, C, B_WGT, 0, W1, HID / 32, 1, B1, 0, SC_FIB, 0, 0, 1, 0, 2, 256));
    // Z = H W2 + b2 + Y -> bank3 words 64 ..
    issue(mm(A_ILB, 2, 256, HID, B_WGT, 0, W2, C / 32, 1, B2, 1, SC_ILB, 1, C, 0, 0, 3, 64));
    $display("compute instructions took %0d cycles", n_cyc - t_compute);
    issue(st(3, 64, C, 49, E_Z));
    // compare
    for (int c = 0; c < C; c++) for (int r = 0; r < 49; r++) begin
      checks++;
      if (longint'(fix_t'(mem.mem[E_Z + c * 49 + r])) != Z[r][c]) begin
        failures++;
        if (failures < 10) $display("FAIL Z[%0d][%0d] got %0d exp %0d", r, c, fix_t'(mem.mem[E_Z + c * 49 + r]), Z[r][c]);
      end
    end
    if (NH == 1)
      for (int i = 0; i < 49; i++) for (int j = 0; j < 49; j++) begin
        checks++;
        if (longint'(fix_t'(mem.mem[E_S + i * 49 + j])) != S[i][j]) begin
          failures++;
          if (failures < 10) $display("FAIL S[%0d][%0d] got %0d exp %0d", i, j, fix_t'(mem.mem[E_S + i * 49 + j]), S[i][j]);
        end
      end
    $display("mechanisms: bias=%0d sc_fib=%0d sc_ilb=%0d kt_pad=%0d row_drain=%0d gelu=%0d masked_softmax=%0d rd_stall=%0d wr_stall=%0d",
             n_bias, n_sc_fib, n_sc_ilb, n_pad, n_row, n_gelu, n_mask, mem.rd_stalls, mem.wr_stalls);
    checks += 9;
    if (n_bias == 0)  begin failures++; $display("FAIL no bias add"); end
    if (n_sc_fib == 0) begin failures++; $display("FAIL no FIB shortcut"); end
    if (n_sc_ilb == 0) begin failures++; $display("FAIL no ILB shortcut"); end
    if (n_pad == 0)   begin failures++; $display("FAIL no K^T padding tile"); end
    if (n_row == 0)   begin failures++; $display("FAIL no row drain"); end
    if (n_gelu == 0)  begin failures++; $display("FAIL no GELU"); end
    if (n_mask == 0)  begin failures++; $display("FAIL no masked softmax"); end
    if (mem.rd_stalls == 0) begin failures++; $display("FAIL no read stall"); end
    if (mem.wr_stalls == 0) begin failures++; $display("FAIL no write stall"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
