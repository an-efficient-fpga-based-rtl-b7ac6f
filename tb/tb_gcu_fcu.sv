// tb_gcu_fcu: checks the GELU polynomial unit bit-exactly against the
// reference and against the real s(x) within the error of the two short
// binary constants, over the whole 16-bit input range.
module tb_gcu_fcu;
  import swin_pkg::*;
  import ref_pkg::*;
  int checks = 0, failures = 0;
  fix_t x;
  logic signed [23:0] s;

  gcu_fcu dut (.x(x), .s(s));

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = -32768; v < 32768; v += 7) begin
      real xr, st;
      x = fix_t'(v);
      #1;
      checks++;
      if (longint'(s) != ref_fcu(v)) begin
        failures++;
        $display("FAIL fcu x=%0d s=%0d exp=%0d", v, s, ref_fcu(v));
      end
      xr = v / 1024.0;
      st = -2.0 * 1.4426950409 * 0.7978845608 * (xr + 0.044715 * xr * xr * xr);
      if (st > -8000.0 && st < 8000.0) begin
        checks++;
        // constants are within 0.5% and 5% of the true ones
        if (s / 1024.0 - st > 0.006 * (2.31 * (xr < 0 ? -xr : xr)) + 0.06 * 2.31 * 0.045 * (xr < 0 ? -xr : xr) ** 3 + 0.01 ||
            st - s / 1024.0 > 0.006 * (2.31 * (xr < 0 ? -xr : xr)) + 0.06 * 2.31 * 0.045 * (xr < 0 ? -xr : xr) ** 3 + 0.01) begin
          failures++;
          $display("FAIL fcu accuracy x=%f s=%f true=%f", xr, s / 1024.0, st);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
