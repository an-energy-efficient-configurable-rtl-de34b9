// Testbench for lwe_poly_cache: fills all eight banks at once (one write
// per bank per cycle), then reads all eight in parallel and checks that the
// banks are independent and that every word holds its own value.
module tb_lwe_poly_cache;
  import lwe_pkg::*;
  logic clk = 0;
  bank_req_t [7:0] req;
  logic [7:0][CW-1:0] rdata;
  int checks = 0, failures = 0;

  lwe_poly_cache dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [CW-1:0] pat(int b, int a);
    return CW'((b * 1103 + a * 7919 + 12345) % 16777213);
  endfunction

  initial begin
    req = '0;
    for (int a = 0; a < 1024; a++) begin
      @(negedge clk);
      for (int b = 0; b < 8; b++) begin
        req[b].en = 1; req[b].we = 1; req[b].addr = 10'(a); req[b].wdata = pat(b, a);
      end
    end
    for (int a = 0; a < 1024; a++) begin
      @(negedge clk);
      for (int b = 0; b < 8; b++) begin
        req[b].en = 1; req[b].we = 0; req[b].addr = 10'((a + 37 * b) % 1024);
      end
      @(negedge clk);
      req = '0;
      for (int b = 0; b < 8; b++) begin
        checks++;
        if (rdata[b] !== pat(b, (a + 37 * b) % 1024)) begin
          failures++;
          if (failures < 10) $display("FAIL bank %0d addr %0d", b, (a + 37 * b) % 1024);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
