// tb_mmu_accum: accumulates random products over several cycles (with a
// restart via acc_first), then finalises every column with and without bias
// and shortcut and compares the rounded, saturated results with a model.
module tb_mmu_accum;
  import swin_pkg::*;
  import ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic acc_en = 0, acc_first = 0, fin_en = 0, bias_en = 0, sc_en = 0, out_valid;
  logic signed [32:0] p [32][49];
  logic [4:0] fin_col, out_col;
  fix_t bias, sc [49], col [49];
  longint model [32][49];

  mmu_accum dut (.clk, .rst_n, .acc_en, .acc_first, .p, .fin_en, .fin_col, .bias, .bias_en,
                 .sc, .sc_en, .out_valid, .out_col, .col);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int tile = 0; tile < 6; tile++) begin
      int k;
      k = 1 + tile * 7;
      for (int c = 0; c < k; c++) begin
        @(negedge clk);
        acc_en = 1; acc_first = (c == 0);
        for (int j = 0; j < 32; j++)
          for (int r = 0; r < 49; r++) begin
            p[j][r] = (tile == 5) ? 33'sd4294967295 : 33'(signed'(int'($urandom) >>> ($urandom % 16)));
            model[j][r] = (c == 0 ? 0 : model[j][r]) + longint'(p[j][r]);
          end
      end
      @(negedge clk) acc_en = 0;
      for (int j = 0; j < 32; j++) begin
        longint bv, sv [49];
        @(negedge clk);
        fin_en = 1; fin_col = 5'(j); bias = fix_t'($urandom); bias_en = 1'($urandom); sc_en = 1'($urandom);
        bv = bias;
        for (int r = 0; r < 49; r++) begin sc[r] = fix_t'($urandom); sv[r] = sc[r]; end
        @(negedge clk);
        fin_en = 0;
        checks += 2;
        if (!out_valid || out_col != 5'(j)) begin failures++; $display("FAIL out_valid/col"); end
        for (int r = 0; r < 49; r++) begin
          longint e;
          e = ref_round(model[j][r] + (bias_en ? bv * 1024 : 0) + (sc_en ? sv[r] * 1024 : 0));
          checks++;
          if (longint'(col[r]) != e) begin
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
