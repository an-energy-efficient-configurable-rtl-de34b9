// Testbench for instr_mem: writes all 256 words with random instructions
// and reads them back, checking the one-cycle read latency.
module tb_instr_mem;
  import lwe_pkg::*;
  logic clk = 0, en, we;
  logic [IMEM_AW-1:0] addr;
  logic [31:0] wdata, rdata;
  logic [31:0] model [256];
  int checks = 0, failures = 0;

  instr_mem dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; we = 0; addr = 0; wdata = 0;
    for (int i = 0; i < 256; i++) begin
      @(negedge clk); en = 1; we = 1; addr = 8'(i); wdata = $urandom; model[i] = wdata;
    end
    for (int i = 255; i >= 0; i--) begin
      @(negedge clk); en = 1; we = 0; addr = 8'(i);
      @(negedge clk); en = 0;
      checks++;
      if (rdata !== model[i]) begin failures++; $display("FAIL %0d", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
