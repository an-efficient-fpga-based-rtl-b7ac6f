// tb_attn_buffer: writes random 49-element rows and reads columns back,
// checking the transpose and the one-cycle read latency.
module tb_attn_buffer;
  import swin_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, we = 0, re = 0;
  logic [5:0] wrow, rcol;
  fix_t wdata [49], rdata [49];
  longint m [49][49];

  attn_buffer dut (.clk, .we, .wrow, .wdata, .re, .rcol, .rdata);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 49; i++) begin
      @(negedge clk);
      we = 1; wrow = 6'(i);
      for (int k = 0; k < 49; k++) begin wdata[k] = fix_t'($urandom); m[i][k] = wdata[k]; end
    end
    for (int n = 0; n < 500; n++) begin
      int c;
      @(negedge clk);
      we = 1'($urandom); wrow = 6'($urandom % 49);
      for (int k = 0; k < 49; k++) wdata[k] = fix_t'($urandom);
      re = 1; c = int'($urandom % 49); rcol = 6'(c);
      @(posedge clk);
      #1;
      for (int i = 0; i < 49; i++) begin
        checks++;
        if (longint'(rdata[i]) != m[i][c]) begin failures++; $display("FAIL col %0d row %0d", c, i); end
      end
      if (we) for (int k = 0; k < 49; k++) m[wrow][k] = wdata[k];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
