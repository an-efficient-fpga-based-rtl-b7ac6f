// tb_mmu: computes whole 49 x K by K x 32 tiles on the MMU, one k per cycle
// with no gaps (the C_I/c_i rate), checks that busy falls 3 cycles after the
// last input, then finalises all 32 columns with bias and shortcut and
// compares with an integer model of A*B + bias + shortcut.
module tb_mmu;
  import swin_pkg::*;
  import ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, first = 0, busy, fin_en = 0, bias_en = 0, sc_en = 0, out_valid;
  fix_t a [1][49];
  fix_t b [1][32];
  logic [4:0] fin_col, out_col;
  fix_t bias, sc [49], col [49];

  mmu dut (.clk, .rst_n, .in_valid, .first, .a, .b, .busy, .fin_en, .fin_col, .bias, .bias_en,
           .sc, .sc_en, .out_valid, .out_col, .col);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int tile = 0; tile < 4; tile++) begin
      int k_len, lat;
      longint acc [32][49];
      k_len = (tile == 0) ? 1 : 16 * tile + 3;
      foreach (acc[j, r]) acc[j][r] = 0;
      for (int k = 0; k < k_len; k++) begin
        @(negedge clk);
        in_valid = 1; first = (k == 0);
        for (int r = 0; r < 49; r++) a[0][r] = fix_t'(int'($urandom % 4096) - 2048);
        for (int j = 0; j < 32; j++) b[0][j] = fix_t'(int'($urandom % 4096) - 2048);
        for (int j = 0; j < 32; j++)
          for (int r = 0; r < 49; r++) acc[j][r] += longint'(a[0][r]) * b[0][j];
      end
      @(negedge clk);
      in_valid = 0; first = 0;
      lat = 1;
      while (busy) begin @(negedge clk); lat++; end
      checks++;
      if (lat != 3) begin failures++; $display("FAIL busy latency %0d", lat); end
      for (int j = 0; j < 32; j++) begin
        longint bv, sv [49];
        fin_en = 1; fin_col = 5'(j); bias = fix_t'(int'($urandom % 2048) - 1024);
        bias_en = (tile != 1); sc_en = (tile >= 2);
        bv = bias;
        for (int r = 0; r < 49; r++) begin sc[r] = fix_t'(int'($urandom % 2048) - 1024); sv[r] = sc[r]; end
        @(negedge clk);
        fin_en = 0;
        for (int r = 0; r < 49; r++) begin
          longint e;
          e = ref_round(acc[j][r] + (bias_en ? bv * 1024 : 0) + (sc_en ? sv[r] * 1024 : 0));
          checks++;
          if (!out_valid || longint'(col[r]) != e) begin
            failures++;
            $display("FAIL tile %0d col %0d row %0d got %0d exp %0d", tile, j, r, col[r], e);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
