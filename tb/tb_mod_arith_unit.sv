// Testbench for mod_arith_unit: every operation (GS and CT butterflies,
// multiply, add, subtract) on random residues for several moduli, compared
// with results computed with 64-bit % in the testbench.
module tb_mod_arith_unit;
  import lwe_pkg::*;
  ma_op_e op;
  logic [CW-1:0] u, v, w, q, o0, o1;
  logic [MU_W-1:0] mu;
  logic [4:0] s;
  int checks = 0, failures = 0;

  mod_arith_unit dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int blen(longint x);
    int b = 0;
    while (x != 0) begin b++; x = x >> 1; end
    return b;
  endfunction

  task automatic chk(input longint got, exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d exp %0d (u=%0d v=%0d w=%0d q=%0d)", what, got, exp, u, v, w, q);
    end
  endtask

  longint qs[5] = '{7681, 12289, 40961, 133121, 16760833};
  initial begin
    for (int t = 0; t < 5; t++) begin
      longint qq, uu, vv, ww;
      qq = qs[t];
      q = CW'(qq); s = 5'(blen(qq)); mu = MU_W'((longint'(1) << (2*blen(qq))) / qq);
      for (int i = 0; i < 200; i++) begin
        uu = $urandom % qq; vv = $urandom % qq; ww = $urandom % qq;
        if (i == 0) begin uu = qq - 1; vv = qq - 1; ww = qq - 1; end
        if (i == 1) begin uu = 0; vv = qq - 1; ww = 1; end
        u = CW'(uu); v = CW'(vv); w = CW'(ww);
        op = MA_GS;  #1;
        chk(o0, (uu + vv) % qq, "GS o0");
        chk(o1, ((uu - vv + qq) % qq) * ww % qq, "GS o1");
        op = MA_CT;  #1;
        chk(o0, (uu + vv * ww) % qq, "CT o0");
        chk(o1, (uu + qq - (vv * ww) % qq) % qq, "CT o1");
        op = MA_MUL; #1; chk(o0, vv * ww % qq, "MUL");
        op = MA_ADD; #1; chk(o0, (uu + vv) % qq, "ADD");
        op = MA_SUB; #1; chk(o0, (uu - vv + qq) % qq, "SUB");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
