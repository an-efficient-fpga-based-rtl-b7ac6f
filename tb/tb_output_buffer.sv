// tb_output_buffer: fills the 49 x 32 tile column by column and reads it
// back both as columns and as rows.
module tb_output_buffer;
  import swin_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, wr_en = 0;
  logic [4:0] wr_col, rd_col;
  logic [5:0] rd_row;
  fix_t wr_data [49], col_data [49], row_data [32];
  longint m [32][49];

  output_buffer dut (.clk, .wr_en, .wr_col, .wr_data, .rd_col, .col_data, .rd_row, .row_data);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int rep = 0; rep < 5; rep++) begin
      for (int j = 0; j < 32; j++) begin
        @(negedge clk);
        wr_en = 1; wr_col = 5'(j);
        for (int r = 0; r < 49; r++) begin wr_data[r] = fix_t'($urandom); m[j][r] = wr_data[r]; end
      end
      @(negedge clk) wr_en = 0;
      for (int j = 0; j < 32; j++) begin
        rd_col = 5'(j); #1;
        for (int r = 0; r < 49; r++) begin
          checks++;
          if (longint'(col_data[r]) != m[j][r]) begin failures++; $display("FAIL col %0d", j); end
        end
      end
      for (int r = 0; r < 49; r++) begin
        rd_row = 6'(r); #1;
        for (int j = 0; j < 32; j++) begin
          checks++;
          if (longint'(row_data[j]) != m[j][r]) begin failures++; $display("FAIL row %0d", r); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
