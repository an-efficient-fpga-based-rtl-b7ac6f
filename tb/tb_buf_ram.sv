// tb_buf_ram: writes random words with random lane masks into a 49-lane
// buffer (FIB/ILB/mask organisation) and a 32-lane buffer (weight/bias
// organisation), and checks every read against a model, including the one
// cycle read latency and that masked lanes keep their old value.
module tb_buf_ram;
  import swin_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic we = 0, re = 0, we2 = 0, re2 = 0;
  logic [9:0] waddr, raddr;
  logic [6:0] waddr2, raddr2;
  fix_t wdata [49], rdata [49], wdata2 [32], rdata2 [32];
  logic [48:0] wmask;
  logic [31:0] wmask2;
  longint model [1024][49];
  longint model2 [128][32];

  buf_ram                               dut  (.clk, .we, .waddr, .wdata, .wmask, .re, .raddr, .rdata);
  buf_ram #(.LANES(32), .DEPTH(128))    dut2 (.clk, .we(we2), .waddr(waddr2), .wdata(wdata2), .wmask(wmask2),
                                              .re(re2), .raddr(raddr2), .rdata(rdata2));

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // initialise every word through the write port
    for (int w = 0; w < 1024; w++) begin
      @(negedge clk);
      we = 1; waddr = 10'(w); wmask = '1; we2 = (w < 128); waddr2 = 7'(w); wmask2 = '1;
      for (int l = 0; l < 49; l++) begin wdata[l] = fix_t'($urandom); model[w][l] = wdata[l]; end
      for (int l = 0; l < 32; l++) begin wdata2[l] = fix_t'($urandom); if (w < 128) model2[w][l] = wdata2[l]; end
    end
    for (int n = 0; n < 3000; n++) begin
      int ra, ra2;
      @(negedge clk);
      we = 1'($urandom); waddr = 10'($urandom); wmask = {17'($urandom), 32'($urandom)};
      we2 = 1'($urandom); waddr2 = 7'($urandom); wmask2 = 32'($urandom);
      for (int l = 0; l < 49; l++) wdata[l] = fix_t'($urandom);
      for (int l = 0; l < 32; l++) wdata2[l] = fix_t'($urandom);
      re = 1; ra = int'($urandom % 1024); raddr = 10'(ra);
      re2 = 1; ra2 = int'($urandom % 128); raddr2 = 7'(ra2);
      @(posedge clk);
      #1;
      // read returns the contents before a same-cycle write
      for (int l = 0; l < 49; l++) begin
        checks++;
        if (longint'(rdata[l]) != model[ra][l]) begin failures++; $display("FAIL ram49 w%0d l%0d", ra, l); end
      end
      for (int l = 0; l < 32; l++) begin
        checks++;
        if (longint'(rdata2[l]) != model2[ra2][l]) begin failures++; $display("FAIL ram32 w%0d l%0d", ra2, l); end
      end
      if (we) for (int l = 0; l < 49; l++) if (wmask[l]) model[waddr][l] = wdata[l];
      if (we2) for (int l = 0; l < 32; l++) if (wmask2[l]) model2[waddr2][l] = wdata2[l];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
