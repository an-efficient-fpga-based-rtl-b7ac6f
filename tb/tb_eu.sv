// tb_eu: checks the exponential unit against the integer reference model
// (bit exact) and against the true exponential (within the approximation's
// error) for random and corner-case inputs in both modes.
module tb_eu;
  import ref_pkg::*;
  int checks = 0, failures = 0;
  logic signed [23:0] f;
  logic ctrl;
  logic [31:0] y;

  eu dut (.f(f), .ctrl(ctrl), .y(y));

  task automatic check(longint fv, bit c);
    longint exp_y;
    real want, got;
    f = 24'(fv); ctrl = c;
    #1;
    exp_y = ref_eu(fv, c);
    checks++;
    if (longint'(y) != exp_y) begin
      failures++;
      $display("FAIL eu f=%0d ctrl=%0b y=%0d exp=%0d", fv, c, y, exp_y);
    end
    // accuracy against the true function where the result is representable
    if (fv > -8000 && fv < 10000) begin
      // ctrl=1 uses log2(e) ~ 1.0111b = 1.4375 by design
      want = c ? $pow(2.0, 1.4375 * fv / 1024.0) : $pow(2.0, fv / 1024.0);
      got  = y / 1024.0;
      if (want > 0.05 && want < 1.0e6) begin
        checks++;
        if ((got - want) / want > 0.03 || (want - got) / want > 0.03 + 2.0 / 1024.0 / want) begin
          failures++;
          $display("FAIL eu accuracy f=%0d ctrl=%0b got=%f want=%f", fv, c, got, want);
        end
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
    check(0, 0); check(0, 1); check(1024, 0); check(-1024, 0); check(-1, 1);
    check(20000, 0); check(-20000, 1); check(8388607, 0); check(-8388608, 1);
    for (int i = 0; i < 3000; i++) begin
      longint v;
      v = longint'($signed($urandom)) % 16384;
      check(v, 1'($urandom));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
