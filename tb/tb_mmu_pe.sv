// tb_mmu_pe: drives a PE built with c_i = 2 (so its adder tree is used) with
// random tiles and checks every row's dot product one cycle later; the
// default c_i = 1 instance is checked the same way.
module tb_mmu_pe;
  import swin_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, en = 0;
  fix_t a2 [2][49];
  fix_t b2 [2];
  logic signed [33:0] p2 [49];
  fix_t a1 [1][49];
  fix_t b1 [1];
  logic signed [32:0] p1 [49];

  mmu_pe #(.CI_P(2)) dut2 (.clk, .en, .a(a2), .b(b2), .p(p2));
  mmu_pe             dut1 (.clk, .en, .a(a1), .b(b1), .p(p1));

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 300; n++) begin
      longint e2 [49], e1 [49];
      @(negedge clk);
      en = 1;
      foreach (b2[c]) b2[c] = fix_t'($urandom);
      b1[0] = fix_t'($urandom);
      if (n == 0) begin b2[0] = 16'sh8000; b2[1] = 16'sh8000; end
      for (int r = 0; r < 49; r++) begin
        a2[0][r] = fix_t'($urandom); a2[1][r] = fix_t'($urandom); a1[0][r] = fix_t'($urandom);
        if (n == 0) begin a2[0][r] = 16'sh8000; a2[1][r] = 16'sh8000; end
        e2[r] = longint'(a2[0][r]) * b2[0] + longint'(a2[1][r]) * b2[1];
        e1[r] = longint'(a1[0][r]) * b1[0];
      end
      @(negedge clk);
      en = 0;
      for (int r = 0; r < 49; r++) begin
        checks += 2;
        if (longint'(p2[r]) != e2[r]) begin failures++; $display("FAIL ci2 row %0d %0d %0d", r, p2[r], e2[r]); end
        if (longint'(p1[r]) != e1[r]) begin failures++; $display("FAIL ci1 row %0d", r); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
