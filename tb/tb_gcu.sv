// tb_gcu: sends random 49-lane vectors through the GELU unit and checks each
// lane bit-exactly against the reference model, against the real GELU within
// a tolerance, and the 4-edge latency from acceptance to out_valid.
module tb_gcu;
  import swin_pkg::*;
  import ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid;
  fix_t x [49], y [49];
  int cyc = 0;

  gcu dut (.clk, .rst_n, .in_valid, .in_ready, .x, .out_valid, .y);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (x[i]) x[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      int t0;
      @(negedge clk);
      for (int i = 0; i < 49; i++)
        x[i] = (n < 4) ? fix_t'((n * 49 + i - 98) * 64) : fix_t'(int'($urandom % 12288) - 6144);
      if (n == 5) begin x[0] = 16'sh7fff; x[1] = 16'sh8000; x[2] = 0; end
      in_valid = 1;
      while (!in_ready) @(negedge clk);
      t0 = cyc;
      @(negedge clk) in_valid = 0;
      while (!out_valid) @(negedge clk);
      checks++;
      if (cyc - t0 != 1 + 4) begin failures++; $display("FAIL latency %0d", cyc - t0); end
      for (int i = 0; i < 49; i++) begin
        real g, got;
        checks++;
        if (longint'(y[i]) != ref_gelu(x[i])) begin
          failures++;
          $display("FAIL gelu x=%0d y=%0d exp=%0d", x[i], y[i], ref_gelu(x[i]));
        end
        g   = gelu_real(x[i] / 1024.0);
        got = y[i] / 1024.0;
        checks++;
        if (got - g > 0.08 + 0.08 * (g < 0 ? -g : g) || g - got > 0.08 + 0.08 * (g < 0 ? -g : g)) begin
          failures++;
          $display("FAIL gelu accuracy x=%f y=%f true=%f", x[i] / 1024.0, got, g);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
