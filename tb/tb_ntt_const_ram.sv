// Testbench for ntt_const_ram: writes a psi^i table for N = 256,
// q = 7681 (psi = 4055) at a base address, reads it back and checks the
// values against powers computed in the testbench, plus the last word.
module tb_ntt_const_ram;
  import lwe_pkg::*;
  logic clk = 0, en, we;
  logic [CONST_AW-1:0] addr;
  logic [CW-1:0] wdata, rdata;
  int checks = 0, failures = 0;

  ntt_const_ram dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint p;
    en = 0; we = 0; addr = 0; wdata = 0;
    p = 1;
    for (int i = 0; i < 256; i++) begin
      @(negedge clk); en = 1; we = 1; addr = CONST_AW'(1000 + i); wdata = CW'(p);
      p = p * 4055 % 7681;
    end
    @(negedge clk); addr = CONST_AW'(CONST_WORDS - 1); wdata = 24'hABCDEF;
    p = 1;
    for (int i = 0; i < 256; i++) begin
      @(negedge clk); en = 1; we = 0; addr = CONST_AW'(1000 + i);
      @(negedge clk); en = 0;
      checks++;
      if (longint'(rdata) != p) begin failures++; $display("FAIL %0d", i); end
      p = p * 4055 % 7681;
    end
    checks++;
    if (p != 1 && p != 7680) begin failures++; $display("FAIL: psi^256 = %0d, not -1", p); end
    @(negedge clk); en = 1; we = 0; addr = CONST_AW'(CONST_WORDS - 1);
    @(negedge clk); en = 0;
    checks++;
    if (rdata !== 24'hABCDEF) begin failures++; $display("FAIL last word"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
