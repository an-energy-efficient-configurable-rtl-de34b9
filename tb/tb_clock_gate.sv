// Testbench for clock_gate: counts gated-clock edges for enable patterns
// that change in the low phase, and checks that an enable change while the
// clock is high does not cut or create a pulse (no glitch).
module tb_clock_gate;
  logic clk = 0, en = 0, gclk;
  int checks = 0, failures = 0;
  int ncnt = 0, gcnt = 0;

  clock_gate dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk)  ncnt++;
  always @(posedge gclk) gcnt++;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int g0;
    @(negedge clk);
    g0 = gcnt;
    repeat (10) @(negedge clk);
    chk(gcnt == g0, "no edges while disabled");
    en = 1; g0 = gcnt;
    repeat (10) @(negedge clk);
    chk(gcnt - g0 == 10, "10 edges while enabled");
    // enable drops in the high phase: the current pulse must stay whole
    @(posedge clk); #1 en = 0;
    #2 chk(gclk == 1, "pulse not cut when enable falls while clk high");
    @(negedge clk); g0 = gcnt;
    repeat (5) @(negedge clk);
    chk(gcnt == g0, "disabled again");
    // enable rises in the high phase: no pulse until the next cycle
    @(posedge clk); #1 en = 1;
    #2 chk(gclk == 0, "no pulse created when enable rises while clk high");
    @(negedge clk); g0 = gcnt;
    @(negedge clk);
    chk(gcnt - g0 == 1, "enabled from the next edge");
    // single-cycle enable gives a single pulse
    en = 0; repeat (2) @(negedge clk); g0 = gcnt;
    en = 1; @(negedge clk); en = 0; repeat (3) @(negedge clk);
    chk(gcnt - g0 == 1, "one-cycle enable gives one pulse");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
