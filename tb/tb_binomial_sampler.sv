// Testbench for binomial_sampler: random chunk pairs for k = 1..32, compared
// with (HW(a) - HW(b)) mod q counted bit by bit in the testbench.
module tb_binomial_sampler;
  import lwe_pkg::*;
  logic [31:0] a, b;
  logic [CW-1:0] q, sample;
  int checks = 0, failures = 0;

  binomial_sampler dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    q = CW'(12289);
    for (int k = 1; k <= 32; k++) begin
      for (int i = 0; i < 20; i++) begin
        logic [31:0] m;
        int ha, hb, d;
        m = (k == 32) ? '1 : ((32'd1 << k) - 1);
        a = $urandom & m; b = $urandom & m;
        if (i == 0) begin a = m; b = 0; end
        if (i == 1) begin a = 0; b = m; end
        ha = 0; hb = 0;
        for (int j = 0; j < 32; j++) begin ha += int'(a[j]); hb += int'(b[j]); end
        d = ha - hb; if (d < 0) d += 12289;
        #1;
        checks++;
        if (int'(sample) != d) begin failures++; $display("FAIL k=%0d a=%h b=%h got %0d exp %0d", k, a, b, sample, d); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
