// Testbench for sram_sp: writes random data to every word, reads it back in
// random order, and checks the one-cycle read latency and that rdata holds
// its value during writes and idle cycles.
module tb_sram_sp;
  logic clk = 0, en, we;
  logic [9:0] addr;
  logic [23:0] wdata, rdata;
  logic [23:0] model [1024];
  int checks = 0, failures = 0;

  sram_sp dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [23:0] held;
    en = 0; we = 0; addr = 0; wdata = 0;
    for (int i = 0; i < 1024; i++) begin
      @(negedge clk); en = 1; we = 1; addr = 10'(i); wdata = 24'($urandom); model[i] = wdata;
    end
    for (int i = 0; i < 3000; i++) begin
      int a;
      a = $urandom_range(1023, 0);
      @(negedge clk); en = 1; we = 0; addr = 10'(a);
      @(negedge clk); en = 0;
      checks++;
      if (rdata !== model[a]) begin failures++; $display("FAIL read %0d", a); end
      held = rdata;
      // a write must not disturb the read register
      en = 1; we = 1; addr = 10'($urandom); wdata = 24'($urandom); model[addr] = wdata;
      @(negedge clk); en = 0;
      checks++;
      if (rdata !== held) begin failures++; $display("FAIL rdata changed by write"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
