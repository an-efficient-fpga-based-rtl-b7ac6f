// tb_scu: feeds random score rows (with and without an attention mask) to
// the softmax unit and checks every output bit-exactly against the reference
// model, its closeness to the true softmax, and the 11-cycle latency after the
// accepting edge to out_valid.
module tb_scu;
  import swin_pkg::*;
  import ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, mask_en = 0, out_valid;
  fix_t x [49], mask [49], y [49];
  int cyc = 0;

  scu dut (.clk, .rst_n, .in_valid, .in_ready, .x, .mask, .mask_en, .out_valid, .y);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (x[i]) begin x[i] = 0; mask[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      longint xr [49], mr [49], yr [49];
      int t0, range_;
      real s, tv, err;
      range_ = (n % 4 == 0) ? 512 : (n % 4 == 1) ? 4096 : (n % 4 == 2) ? 8192 : 20000;
      @(negedge clk);
      for (int i = 0; i < 49; i++) begin
        x[i]    = fix_t'(int'($urandom % (2 * range_)) - range_);
        mask[i] = (($urandom % 3) == 0) ? fix_t'(-100 * 1024 / 4) : fix_t'(0);
        xr[i] = x[i]; mr[i] = mask[i];
      end
      mask_en  = n[0];
      in_valid = 1;
      while (!in_ready) @(negedge clk);
      t0 = cyc;
      @(negedge clk) in_valid = 0;
      while (!out_valid) @(negedge clk);
      checks++;
      // t0 is taken before the accepting edge: 1 + 11 edges
      if (cyc - t0 != 12) begin failures++; $display("FAIL latency %0d", cyc - t0); end
      ref_softmax(xr, mr, mask_en, yr);
      s = 0;
      for (int i = 0; i < 49; i++)
        if (!(mask_en && mr[i] != 0)) s += $exp(xr[i] / 1024.0);
      err = 0;
      for (int i = 0; i < 49; i++) begin
        checks++;
        if (longint'(y[i]) != yr[i]) begin
          failures++;
          $display("FAIL row %0d lane %0d y=%0d exp=%0d", n, i, y[i], yr[i]);
        end
        tv = (mask_en && mr[i] != 0) ? 0.0 : $exp(xr[i] / 1024.0) / s;
        if (y[i] / 1024.0 - tv > err) err = y[i] / 1024.0 - tv;
        if (tv - y[i] / 1024.0 > err) err = tv - y[i] / 1024.0;
      end
      // approximation error bound against the exact softmax (scores are
      // within +-8 so the log2(e) truncation stays small)
      if (range_ <= 8192) begin
        checks++;
        if (err > 0.1) begin failures++; $display("FAIL row %0d max abs err %f", n, err); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
