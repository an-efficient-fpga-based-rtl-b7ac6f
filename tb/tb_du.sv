// tb_du: checks the division exponent unit bit-exactly against the reference
// model and checks that 2^e approximates f1/f2 (or f1/(f2+1)) within the
// error of the log2(m) ~ m-1 approximation.
module tb_du;
  import ref_pkg::*;
  int checks = 0, failures = 0;
  logic [31:0] f1, f2;
  logic add_one;
  logic signed [23:0] e;

  du dut (.f1(f1), .f2(f2), .add_one(add_one), .e(e));

  task automatic check(longint a, longint b, bit ao);
    longint ex;
    real q, qt;
    f1 = 32'(a); f2 = 32'(b); add_one = ao;
    #1;
    ex = ref_du(a, b, ao);
    checks++;
    if (longint'(e) != ex) begin
      failures++;
      $display("FAIL du f1=%0d f2=%0d ao=%0b e=%0d exp=%0d", a, b, ao, e, ex);
    end
    if (a > 0 && (b + (ao ? 1024 : 0)) > 0) begin
      q  = $pow(2.0, e / 1024.0);
      qt = real'(a) / real'(b + (ao ? 1024 : 0));
      checks++;
      if (q / qt > 1.13 || qt / q > 1.13) begin
        failures++;
        $display("FAIL du accuracy f1=%0d f2=%0d q=%f true=%f", a, b, q, qt);
      end
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(0, 100, 0); check(100, 0, 0); check(1024, 1024, 0); check(1024, 0, 1);
    check(512, 49 * 1024, 0); check(32'hFFFF_FFFF, 1, 0); check(1, 32'hFFFF_FFFF, 1);
    for (int i = 0; i < 3000; i++) begin
      longint a, b;
      a = longint'($urandom) >> ($urandom % 31);
      b = longint'($urandom) >> ($urandom % 31);
      check(a, b, 1'($urandom));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
