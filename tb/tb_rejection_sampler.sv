// Testbench for rejection_sampler: for each modulus, candidates are masked
// to w = bitlen(q) + 2 bits and the bound is floor(2^w / q) * q. It checks
// acceptance (x < bound) and the reduced value x mod q on random and
// boundary candidates, for the moduli of the rejection-sampling energy
// comparison (12289, 40961, 65537, 133121) and for 7681 and 3329.
module tb_rejection_sampler;
  import lwe_pkg::*;
  logic [31:0] x;
  logic [MU_W-1:0] bound, mu;
  logic [CW-1:0] q, sample;
  logic [4:0] s;
  logic accept;
  int checks = 0, failures = 0;

  rejection_sampler dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int blen(longint v);
    int b = 0;
    while (v != 0) begin b++; v = v >> 1; end
    return b;
  endfunction

  longint qs[6] = '{7681, 12289, 3329, 40961, 65537, 133121};
  initial begin
    int acc;
    for (int t = 0; t < 6; t++) begin
      longint qq, bb, xx, top;
      qq = qs[t]; top = longint'(1) << (blen(qq) + 2); bb = (top / qq) * qq;
      q = CW'(qq); s = 5'(blen(qq)); mu = MU_W'((longint'(1) << (2*blen(qq))) / qq);
      bound = MU_W'(bb);
      acc = 0;
      for (int i = 0; i < 400; i++) begin
        xx = (i == 0) ? bb - 1 : (i == 1) ? bb : longint'($urandom_range(32'(top - 1), 0));
        x = 32'(xx); #1;
        checks++;
        if (accept != (xx < bb)) begin failures++; $display("FAIL accept x=%0d", xx); end
        if (xx < bb) begin
          acc++;
          checks++;
          if (longint'(sample) != xx % qq) begin failures++; $display("FAIL value x=%0d got %0d", xx, sample); end
        end
      end
      checks++;
      if (acc < 280) begin failures++; $display("FAIL acceptance rate %0d/400", acc); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
