// Workload testbench: Ring-LWE key generation b = a * s + e at the sizes of
// the Ring-LWE schemes the processor was benchmarked with, run through the
// pins of the full processor:
//   NewHope-1024  N = 1024, q = 12289  (SHAKE-256)
//   R.EMBLEM-512  N =  512, q = 40961  (SHAKE-128)
//   LIMA-1024     N = 1024, q = 133121 (SHAKE-128)
// the Module-LWE product t = A s + e at Kyber-768 size (3 x 3 polynomials,
// N = 256, q = 7681, binomial k = 4),
// and the binomial sampling benchmark (N = 512, q = 12289, k = 16, SHAKE-256),
// whose cycle count is printed. For each workload the host loads the psi
// tables, runs a sampling program (a uniform, s and e binomial with k = 16)
// and a convolution program (NTT, NTT, PMUL, INTT, PADD), reads a, s, e
// and b back and compares b with a schoolbook negative-wrapped product.
// The binomial widths of R.EMBLEM and LIMA are not those of the schemes;
// only N and q are taken from them.
module tb_workloads;
  import lwe_pkg::*;
  logic clk = 0, rst = 0;
  logic [15:0] addr;
  logic [31:0] wdata, rdata;
  logic wen, ren, int_o;
  int checks = 0, failures = 0;

  lattice_crypto_processor dut (.*);

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

  task automatic hw(input logic [15:0] a, input logic [31:0] d);
    @(negedge clk); addr = a; wdata = d; wen = 1; ren = 0;
    @(negedge clk); wen = 0;
  endtask
  task automatic hr(input logic [15:0] a, output logic [31:0] d);
    @(negedge clk); addr = a; ren = 1; wen = 0;
    @(negedge clk); ren = 0; d = rdata;
  endtask

  int n, L;
  longint q;

  function automatic logic [15:0] caddr(bit side, int base, int i);
    return {3'b000, side, i >= n/2, i[0] ? 1'b1 : 1'b0, 10'(base*16 + ((i % (n/2)) >> 1))};
  endfunction
  task automatic rd_poly(bit side, int base, ref longint p[]);
    logic [31:0] d;
    p = new[n];
    for (int i = 0; i < n; i++) begin hr(caddr(side, base, i), d); p[i] = longint'(d); end
  endtask

  function automatic logic [31:0] ins(opcode_e o, logic [26:0] imm);
    return {o, imm};
  endfunction
  task automatic run_prog(logic [31:0] p[$]);
    foreach (p[i]) hw(16'h4000 + 16'(i), p[i]);
    hw(16'h6000, 32'h1);
    while (!int_o) @(negedge clk);
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

  // binomial sampling cycles: sampler busy
  int samp_cycles = 0;
  bit count_samp = 0;
  always @(posedge clk) if (count_samp && dut.u_samp.busy) samp_cycles++;

  task automatic rlwe(input string name, input int logN, input longint qv, input int shake_mode);
    longint psi, ninv, psinv, g;
    longint a[], s[], e[], b[], ref_b[];
    int w, sb, ua, ub, ur;
    bit odd, a_side;
    int a_base, s_base;
    logic [31:0] prog[$];
    n = 1 << logN; L = logN; q = qv;
    sb = blen(qv); w = sb + 2;
    ua = n / 64;                     // one polynomial = n/4 words = n/64 base units
    // tables
    psi = 0;
    for (g = 2; psi == 0; g++) begin
      longint p;
      p = mpow(g, (qv - 1) / (2 * n), qv);
      if (mpow(p, n, qv) == qv - 1) psi = p;
    end
    ninv = mpow(n, qv - 2, qv); psinv = mpow(psi, qv - 2, qv);
    for (int i = 0; i < n; i++) begin
      hw(16'h2000 + 16'(i), 32'(mpow(psi, i, qv)));
      hw(16'h2000 + 16'(n + i), 32'(ninv * mpow(psinv, i, qv) % qv));
    end
    // seed: one byte of the name, SHAKE padding
    for (int i = 0; i < 50; i++) hw(16'h5000 + 16'(i), 32'h0);
    hw(16'h5000, {24'h1f0000, 8'(name.len())} | 32'(name[0]) << 8);
    hw(16'h5000 + ((shake_mode == 0) ? 16'd41 : 16'd33), 32'h80000000);
    // sampling: a -> L0, s -> R0, e -> R(ua)
    prog = '{ins(OP_SETQ, 27'(qv)), ins(OP_SETMU, 27'((longint'(1) << (2*sb)) / qv)),
             ins(OP_SETN, 27'(logN)), ins(OP_SETK, 27'd16), ins(OP_SETW, 27'(w)),
             ins(OP_SETBND, 27'(((longint'(1) << w) / qv) * qv)), ins(OP_SETTB, 27'd0),
             ins(OP_MODE, 27'(shake_mode)), ins(OP_ABSORB, 27'd1),
             ins(OP_SAMPU, {1'b0, 20'd0, 6'd0}),
             ins(OP_SAMPB, {1'b1, 20'd0, 6'd0}),
             ins(OP_SAMPB, {1'b1, 20'd0, 6'(ua)}),
             ins(OP_HALT, 27'd0)};
    run_prog(prog);
    rd_poly(0, 0, a); rd_poly(1, 0, s); rd_poly(1, ua, e);
    for (int i = 0; i < n; i++) begin
      chk(a[i] < qv, "a in range");
      chk(s[i] <= 16 || s[i] >= qv - 16, "s binomial");
      chk(e[i] <= 16 || e[i] >= qv - 16, "e binomial");
    end
    ref_b = new[n];
    for (int i = 0; i < n; i++) ref_b[i] = e[i];
    for (int i = 0; i < n; i++)
      for (int j = 0; j < n; j++) begin
        if (i + j < n) ref_b[i+j] = (ref_b[i+j] + a[i] * s[j]) % qv;
        else           ref_b[i+j-n] = (ref_b[i+j-n] + qv - a[i] * s[j] % qv) % qv;
      end
    // convolution: NTT a (L0 <-> R 2ua), NTT s (R0 <-> L ua)
    odd = ((L + 1) % 2) == 1;
    a_side = odd ? 1'b1 : 1'b0; a_base = odd ? 2*ua : 0;
    s_base = odd ? ua : 0;
    prog = '{ins(OP_NTT,  {1'b0, 14'd0, 6'(2*ua), 6'd0}),
             ins(OP_NTT,  {1'b1, 14'd0, 6'(ua), 6'd0}),
             ins(OP_PMUL, {a_side, 7'd0, a_side, 6'(a_base), 6'(s_base), 6'(a_base)}),
             ins(OP_INTT, {a_side, 14'd0, 6'(2*ua), 6'(a_base)}),
             // result on L at base 2ua (odd) or 0 (even); e on R at ua
             ins(OP_PADD, {1'b0, 7'd0, 1'b0, 6'(3*ua), 6'(ua), 6'(odd ? 2*ua : 0)}),
             ins(OP_HALT, 27'd0)};
    run_prog(prog);
    rd_poly(0, 3*ua, b);
    for (int i = 0; i < n; i++) chk(b[i] == ref_b[i], $sformatf("%s b[%0d] = %0d exp %0d", name, i, b[i], ref_b[i]));
    $display("%s: N=%0d q=%0d done", name, n, qv);
  endtask


  // Module-LWE, Kyber-768 size: t_i = sum_j A_ij * s_j + e_i, 3 x 3 matrix
  // of N = 256 polynomials, q = 7681, binomial k = 4 (eta = 4 of Kyber's
  // first round), SHAKE-128.
  task automatic kyber768();
    longint psi, ninv, psinv, g;
    longint A[9][], S[3][], E[3][], T[], ref_t[], tmp[];
    logic [31:0] prog[$];
    n = 256; L = 8; q = 7681;
    psi = 0;
    for (g = 2; psi == 0; g++) begin
      longint p;
      p = mpow(g, (q - 1) / (2 * n), q);
      if (mpow(p, n, q) == q - 1) psi = p;
    end
    ninv = mpow(n, q - 2, q); psinv = mpow(psi, q - 2, q);
    for (int i = 0; i < n; i++) begin
      hw(16'h2000 + 16'(i), 32'(mpow(psi, i, q)));
      hw(16'h2000 + 16'(n + i), 32'(ninv * mpow(psinv, i, q) % q));
    end
    for (int i = 0; i < 50; i++) hw(16'h5000 + 16'(i), 32'h0);
    hw(16'h5000, 32'h1f4b);                // "K" || 0x1F
    hw(16'h5000 + 16'd41, 32'h80000000);
    // sampling: s_j -> L 4j, e_i -> L 12+4i, A_ij -> R 24+4(3i+j)
    prog = '{ins(OP_SETQ, 27'd7681), ins(OP_SETMU, 27'((longint'(1) << 26) / 7681)),
             ins(OP_SETN, 27'd8), ins(OP_SETK, 27'd4), ins(OP_SETW, 27'd16),
             ins(OP_SETBND, 27'(8 * 7681)), ins(OP_SETTB, 27'd0), ins(OP_MODE, 27'd0),
             ins(OP_ABSORB, 27'd1)};
    for (int j = 0; j < 3; j++) prog.push_back(ins(OP_SAMPB, {1'b0, 20'd0, 6'(4*j)}));
    for (int i = 0; i < 3; i++) prog.push_back(ins(OP_SAMPB, {1'b0, 20'd0, 6'(12 + 4*i)}));
    for (int m = 0; m < 9; m++) prog.push_back(ins(OP_SAMPU, {1'b1, 20'd0, 6'(24 + 4*m)}));
    prog.push_back(ins(OP_HALT, 27'd0));
    run_prog(prog);
    for (int j = 0; j < 3; j++) begin rd_poly(0, 4*j, tmp); S[j] = tmp; end
    for (int i = 0; i < 3; i++) begin rd_poly(0, 12 + 4*i, tmp); E[i] = tmp; end
    for (int m = 0; m < 9; m++) begin rd_poly(1, 24 + 4*m, tmp); A[m] = tmp; end
    for (int j = 0; j < 3; j++)
      for (int c = 0; c < n; c++) chk(S[j][c] <= 4 || S[j][c] >= q - 4, "Kyber s binomial, eta 4");
    // arithmetic program
    prog = {};
    for (int j = 0; j < 3; j++) prog.push_back(ins(OP_NTT, {1'b0, 14'd0, 6'(4*j), 6'(4*j)}));
    for (int i = 0; i < 3; i++) begin
      for (int j = 0; j < 3; j++) begin
        prog.push_back(ins(OP_NTT, {1'b1, 14'd0, 6'd24, 6'(24 + 4*(3*i+j))}));  // A -> L24
        if (j == 0) prog.push_back(ins(OP_PMUL, {1'b0, 7'd0, 1'b0, 6'd28, 6'(4*j), 6'd24}));
        else begin
          prog.push_back(ins(OP_PMUL, {1'b0, 7'd0, 1'b1, 6'd16, 6'(4*j), 6'd24}));
          prog.push_back(ins(OP_PADD, {1'b0, 7'd0, 1'b0, 6'd28, 6'd16, 6'd28}));
        end
      end
      prog.push_back(ins(OP_INTT, {1'b0, 14'd0, 6'd12, 6'd28}));                  // -> R12
      prog.push_back(ins(OP_PADD, {1'b1, 7'd0, 1'b0, 6'(32 + 4*i), 6'(12 + 4*i), 6'd12}));
    end
    prog.push_back(ins(OP_HALT, 27'd0));
    run_prog(prog);
    for (int i = 0; i < 3; i++) begin
      ref_t = new[n];
      for (int c = 0; c < n; c++) ref_t[c] = E[i][c];
      for (int j = 0; j < 3; j++)
        for (int x = 0; x < n; x++)
          for (int y = 0; y < n; y++) begin
            if (x + y < n) ref_t[x+y] = (ref_t[x+y] + A[3*i+j][x] * S[j][y]) % q;
            else           ref_t[x+y-n] = (ref_t[x+y-n] + q - A[3*i+j][x] * S[j][y] % q) % q;
          end
      rd_poly(0, 32 + 4*i, T);
      for (int c = 0; c < n; c++) chk(T[c] == ref_t[c], $sformatf("Kyber-768 t%0d[%0d] = %0d exp %0d", i, c, T[c], ref_t[c]));
    end
    $display("Kyber-768 (Module-LWE, k = 3): done");
  endtask

  initial begin
    addr = 0; wdata = 0; wen = 0; ren = 0;
    @(negedge clk) rst = 1;
    repeat (2) @(negedge clk);
    rst = 0;
    rlwe("NewHope-1024", 10, 12289, 1);
    rlwe("R.EMBLEM-512", 9, 40961, 0);
    rlwe("LIMA-1024", 10, 133121, 0);
    kyber768();
    // binomial sampling benchmark: N = 512, q = 12289, k = 16, SHAKE-256
    begin
      logic [31:0] prog[$];
      n = 512;
      prog = '{ins(OP_SETQ, 27'd12289), ins(OP_SETN, 27'd9), ins(OP_SETK, 27'd16),
               ins(OP_MODE, 27'd1), ins(OP_ABSORB, 27'd1),
               ins(OP_SAMPB, {1'b0, 20'd0, 6'd0}), ins(OP_HALT, 27'd0)};
      count_samp = 1;
      run_prog(prog);
      count_samp = 0;
      $display("binomial sampling N=512 q=12289 SHAKE-256: %0d cycles", samp_cycles);
      // 512 words; 34 per SHAKE-256 block, the first block from the absorb,
      // 15 more permutations of 24 cycles plus one reload cycle each: 887
      chk(samp_cycles == 512 + 15 * 25, $sformatf("sampling cycles %0d", samp_cycles));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
