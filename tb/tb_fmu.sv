// tb_fmu: streams random 49-element vectors into the find-max unit, one per
// cycle, and checks each maximum and that it appears exactly 6 cycles later.
module tb_fmu;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, out_valid;
  logic signed [15:0] x [49];
  logic signed [15:0] xmax;
  longint exp_q [$];
  int     t_q   [$];
  int cyc = 0;

  fmu dut (.clk, .rst_n, .in_valid, .x, .out_valid, .xmax);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    longint e; int t0;
    checks += 2;
    if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected out"); end
    else begin
      e = exp_q.pop_front(); t0 = t_q.pop_front();
      if (longint'(xmax) != e) begin failures++; $display("FAIL max %0d exp %0d", xmax, e); end
      if (cyc - t0 != 6) begin failures++; $display("FAIL latency %0d", cyc - t0); end
    end
  end

  initial begin
    foreach (x[i]) x[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      longint m;
      @(negedge clk);
      in_valid = ($urandom % 4) != 0;
      m = -(longint'(1) << 20);
      for (int i = 0; i < 49; i++) begin
        x[i] = 16'($urandom);
        if (n % 7 == 0) x[i] = 16'(-30000 + int'($urandom % 100));
        if (n % 13 == 0 && i == n % 49) x[i] = 16'sd32767;
      end
      // place the max at a chosen lane sometimes (incl. x48 and group edges)
      if (n % 5 == 1) x[(n / 5) % 49] = 16'sd32000;
      foreach (x[i]) if (longint'(x[i]) > m) m = x[i];
      if (in_valid) begin exp_q.push_back(m); t_q.push_back(cyc); end
    end
    @(negedge clk) in_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL missing outputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
