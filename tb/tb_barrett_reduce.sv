// Testbench for barrett_reduce: random x below 4^s, for the moduli of the
// evaluated protocols and random 24-bit moduli, compared with x % q.
module tb_barrett_reduce;
  import lwe_pkg::*;
  logic [2*CW-1:0] x;
  logic [CW-1:0] q, r;
  logic [MU_W-1:0] mu;
  logic [4:0] s;
  int checks = 0, failures = 0;

  barrett_reduce dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int blen(longint v);
    int b = 0;
    while (v != 0) begin b++; v = v >> 1; end
    return b;
  endfunction

  longint qs[6] = '{7681, 12289, 40961, 133121, 3329, 8380417};
  initial begin
    for (int t = 0; t < 12; t++) begin
      longint qq, xx, lim;
      int sb;
      qq = (t < 6) ? qs[t] : (longint'($urandom_range(32'hFFFFFF, 32'h3)) | 1);
      sb = blen(qq);
      q = CW'(qq); s = 5'(sb); mu = MU_W'((longint'(1) << (2*sb)) / qq);
      lim = longint'(1) << (2*sb);
      for (int i = 0; i < 300; i++) begin
        if (i == 0)      xx = lim - 1;
        else if (i == 1) xx = (qq - 1) * (qq - 1);
        else             xx = {$urandom, $urandom} % lim;
        x = (2*CW)'(xx); #1;
        checks++;
        if (longint'(r) != xx % qq) begin
          failures++;
          if (failures < 10) $display("FAIL: q=%0d x=%0d r=%0d", qq, xx, r);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
