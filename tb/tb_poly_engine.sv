// Testbench for poly_engine, with the real polynomial cache and constants
// RAM around it. For (N, q) = (64, 7681), (128, 12289), (256, 7681),
// (512, 40961), (1024, 133121) and (2048, 12289), the largest N, it loads psi^i and N^-1 psi^-i tables,
// samples random a and b, and computes c = INTT(NTT(a) * NTT(b)) with the
// engine (NTT, NTT, PMUL, INTT), comparing c with a schoolbook
// negative-wrapped convolution done in the testbench. It also checks
// INTT(NTT(a)) = a, PADD and PSUB, the forward NTT cycle count
// N + log2(N) (N/2+1), which is 1288 for N = 256 as in the source, and
// the inverse's log2(N) (N/2+1) + N + 1.
module tb_poly_engine;
  import lwe_pkg::*;
  logic clk = 0, rst_n = 1;
  logic start, busy, done;
  pe_op_e op;
  logic [3:0] logn;
  logic side_a, side_c;
  logic [5:0] base_a, base_b, base_c;
  logic [CONST_AW-1:0] tbl_base;
  logic [CW-1:0] q;
  logic [MU_W-1:0] mu;
  logic [4:0] s;
  bank_req_t [7:0] breq, pe_breq, tb_breq;
  logic [7:0][CW-1:0] brdata;
  logic c_en, tb_c_en, tb_c_we;
  logic [CONST_AW-1:0] c_addr, tb_c_addr;
  logic [CW-1:0] c_rdata, tb_c_wdata;
  logic tb_own;
  int checks = 0, failures = 0;

  poly_engine dut (.clk, .rst_n, .start, .op, .logn, .side_a, .base_a, .base_b,
                   .side_c, .base_c, .tbl_base, .q, .mu, .s, .busy, .done,
                   .breq(pe_breq), .brdata, .c_en, .c_addr, .c_rdata);
  assign breq = tb_own ? tb_breq : pe_breq;
  lwe_poly_cache u_cache (.clk, .req(breq), .rdata(brdata));
  ntt_const_ram  u_const (.clk, .en(tb_own ? tb_c_en : c_en), .we(tb_own & tb_c_we),
                          .addr(tb_own ? tb_c_addr : c_addr), .wdata(tb_c_wdata), .rdata(c_rdata));

  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  function automatic longint mpow(longint b, longint e, longint m);
    longint r = 1;
    b = b % m;
    while (e > 0) begin
      if (e & 1) r = r * b % m;
      b = b * b % m; e = e >> 1;
    end
    return r;
  endfunction

  function automatic int blen(longint v);
    int r = 0;
    while (v != 0) begin r++; v = v >> 1; end
    return r;
  endfunction

  int n;
  longint qq;

  task automatic wr_coef(input bit sd, input int base, input int i, input longint val);
    @(negedge clk);
    tb_breq = '0;
    tb_breq[{sd, i >= n/2, i[0]}] = '{en: 1'b1, we: 1'b1, addr: 10'(base*16 + ((i % (n/2)) >> 1)), wdata: CW'(val)};
    @(negedge clk);
    tb_breq = '0;
  endtask

  task automatic rd_coef(input bit sd, input int base, input int i, output longint val);
    logic [2:0] b;
    b = {sd, i >= n/2, i[0]};
    @(negedge clk);
    tb_breq = '0;
    tb_breq[b] = '{en: 1'b1, we: 1'b0, addr: 10'(base*16 + ((i % (n/2)) >> 1)), wdata: '0};
    @(negedge clk);
    tb_breq = '0;
    val = longint'(brdata[b]);
  endtask

  task automatic wr_const(input int a, input longint val);
    @(negedge clk); tb_c_en = 1; tb_c_we = 1; tb_c_addr = CONST_AW'(a); tb_c_wdata = CW'(val);
    @(negedge clk); tb_c_en = 0; tb_c_we = 0;
  endtask

  task automatic run(input pe_op_e o, input bit sa, input int ba, input int bb,
                     input bit sc, input int bc, output int cycles);
    tb_own = 0;
    @(negedge clk);
    op = o; side_a = sa; base_a = 6'(ba); base_b = 6'(bb); side_c = sc; base_c = 6'(bc);
    start = 1;
    @(negedge clk); start = 0; cycles = 0;
    while (!done) begin @(negedge clk); cycles++; end
    tb_own = 1;
  endtask

  longint a[], b[], c[], ref_c[], tmp;
  int cyc, L, pa_side;

  task automatic test_conv(input int logN, input longint qv);
    longint g, psi, ninv, psinv;
    bit sA, sB, sC;
    int bb;
    n = 1 << logN;
    qq = qv; L = logN;
    bb = (n / 64 > 8) ? n / 64 : 8;   // base of b: past the end of a
    logn = 4'(logN); q = CW'(qv); s = 5'(blen(qv)); mu = MU_W'((longint'(1) << (2*blen(qv))) / qv);
    tbl_base = CONST_AW'(100);
    // psi: a primitive 2N-th root of unity
    psi = 0;
    for (g = 2; g < qv && psi == 0; g++) begin
      longint p;
      p = mpow(g, (qv - 1) / (2 * n), qv);
      if (mpow(p, n, qv) == qv - 1) psi = p;
    end
    ninv = mpow(n, qv - 2, qv); psinv = mpow(psi, qv - 2, qv);
    for (int i = 0; i < n; i++) begin
      wr_const(100 + i, mpow(psi, i, qv));
      wr_const(100 + n + i, ninv * mpow(psinv, i, qv) % qv);
    end
    a = new[n]; b = new[n]; c = new[n]; ref_c = new[n];
    for (int i = 0; i < n; i++) begin a[i] = $urandom % qv; b[i] = $urandom % qv; ref_c[i] = 0; end
    for (int i = 0; i < n; i++)
      for (int j = 0; j < n; j++) begin
        if (i + j < n) ref_c[i+j] = (ref_c[i+j] + a[i] * b[j]) % qv;
        else           ref_c[i+j-n] = (ref_c[i+j-n] + qv - a[i] * b[j] % qv) % qv;
      end
    // a on L base 0, b on R base 8
    for (int i = 0; i < n; i++) begin wr_coef(0, 0, i, a[i]); wr_coef(1, bb, i, b[i]); end
    // NTT(a): L0 <-> R0 ; NTT(b): R8 <-> L8
    run(PE_NTT, 0, 0, 0, 0, 0, cyc);
    chk(cyc == n + L * (n/2 + 1), $sformatf("N=%0d NTT cycles %0d", n, cyc));
    run(PE_NTT, 1, bb, bb, 0, 0, cyc);
    // L+1 passes: odd -> result moved to the other side
    sA = ((L + 1) % 2 == 1) ? 1'b1 : 1'b0;   // side of NTT(a)
    sB = !sA;                                // side of NTT(b)
    run(PE_PMUL, sA, 0, bb, sA, 0, cyc);      // c = A*B over A's place
    chk(cyc == n + 1, $sformatf("PMUL cycles %0d", cyc));
    run(PE_INTT, sA, 0, 0, 0, 0, cyc);
    chk(cyc == L * (n/2 + 1) + n + 1, $sformatf("N=%0d INTT cycles %0d", n, cyc));
    sC = ((L + 1) % 2 == 1) ? !sA : sA;
    for (int i = 0; i < n; i++) begin
      rd_coef(sC, 0, i, tmp);
      chk(tmp == ref_c[i], $sformatf("N=%0d q=%0d conv[%0d] = %0d exp %0d", n, qv, i, tmp, ref_c[i]));
    end
    // INTT(NTT(b)) = b
    run(PE_INTT, sB, bb, bb, 0, 0, cyc);
    for (int i = 0; i < n; i++) begin
      rd_coef(((L + 1) % 2 == 1) ? !sB : sB, bb, i, tmp);
      chk(tmp == b[i], $sformatf("N=%0d INTT(NTT(b))[%0d]", n, i));
    end
  endtask

  task automatic test_addsub();
    longint x[], y[];
    n = 64; qq = 12289; logn = 6; q = 24'(12289); s = 5'(blen(12289)); mu = MU_W'((longint'(1) << (2*blen(12289))) / 12289);
    x = new[n]; y = new[n];
    for (int i = 0; i < n; i++) begin
      x[i] = $urandom % qq; y[i] = $urandom % qq;
      wr_coef(0, 40, i, x[i]); wr_coef(1, 41, i, y[i]);
    end
    run(PE_PADD, 0, 40, 41, 0, 42, cyc);
    run(PE_PSUB, 0, 40, 41, 1, 43, cyc);
    for (int i = 0; i < n; i++) begin
      rd_coef(0, 42, i, tmp); chk(tmp == (x[i] + y[i]) % qq, "PADD");
      rd_coef(1, 43, i, tmp); chk(tmp == (x[i] - y[i] + qq) % qq, "PSUB");
    end
  endtask

  initial begin
    start = 0; op = PE_NTT; tb_own = 1; tb_breq = '0; tb_c_en = 0; tb_c_we = 0;
    tb_c_addr = 0; tb_c_wdata = 0; side_a = 0; side_c = 0; base_a = 0; base_b = 0; base_c = 0;
    logn = 6; q = 7681; s = 13; mu = 0; tbl_base = 0;
    rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    test_conv(6, 7681);
    test_conv(7, 12289);
    test_conv(8, 7681);
    test_conv(9, 40961);
    test_conv(10, 133121);
    test_conv(11, 12289);
    test_addsub();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
