// End-to-end testbench of the processor at its default (and only) size,
// used through its pins only. It computes one Ring-LWE public key
// b = a * s + e for N = 256, q = 7681:
//   program 1: configure, absorb the seed "lattice" into SHAKE-128, sample
//              a uniformly (rejection sampling), s and e binomially (k = 16);
//   program 2: NTT(a), NTT(s), coefficient-wise product, INTT, add e.
// The host loads the psi tables, reads a, s and e back, checks the first
// coefficients of a against SHAKE-128("lattice") worked out beforehand,
// checks the range of s and e, and compares b with a schoolbook
// negative-wrapped product computed in the testbench. It also checks the
// 1288-cycle NTT and counts the mechanisms the design has: rejected
// candidates, PRNG refills (a permutation stall while sampling), clock
// gates closed and forced open, host accesses blocked while running, and
// the interrupt. A mechanism that never happens counts as a failure.
module tb_lattice_crypto_processor;
  import lwe_pkg::*;
  logic clk = 0, rst = 0;
  logic [15:0] addr;
  logic [31:0] wdata, rdata;
  logic wen, ren, int_o;
  int checks = 0, failures = 0;

  lattice_crypto_processor dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // ---------------------------------------------------------- host access
  task automatic hw(input logic [15:0] a, input logic [31:0] d);
    @(negedge clk); addr = a; wdata = d; wen = 1; ren = 0;
    @(negedge clk); wen = 0;
  endtask
  task automatic hr(input logic [15:0] a, output logic [31:0] d);
    @(negedge clk); addr = a; ren = 1; wen = 0;
    @(negedge clk); ren = 0; d = rdata;
  endtask

  localparam int N = 256, LOGN = 8;
  localparam longint Q = 7681;

  function automatic logic [15:0] caddr(bit side, int base, int i);
    return {3'b000, side, i >= N/2, i[0] ? 1'b1 : 1'b0, 10'(base*16 + ((i % (N/2)) >> 1))};
  endfunction
  task automatic rd_poly(bit side, int base, ref longint p[N]);
    logic [31:0] d;
    for (int i = 0; i < N; i++) begin hr(caddr(side, base, i), d); p[i] = longint'(d); end
  endtask

  function automatic logic [31:0] ins(opcode_e o, logic [26:0] imm);
    return {o, imm};
  endfunction
  task automatic load_prog(logic [31:0] p[$]);
    foreach (p[i]) hw(16'h4000 + 16'(i), p[i]);
  endtask
  task automatic run_prog(output int cyc);
    logic [31:0] d;
    hw(16'h6000, 32'h1);
    cyc = 0;
    while (!int_o) begin @(negedge clk); cyc++; end
    hr(16'h6000, d);
    chk(d == 32'h2, "status after HALT");
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

  // ------------------------------------------------- mechanism counters
  int n_reject = 0, n_refill = 0, n_ntt_off = 0, n_sha3_off = 0, n_samp_off = 0;
  int n_forced = 0, n_blocked = 0, n_int = 0, ntt_cycles = 0, n_pe_ops = 0;
  logic int_d = 0;
  bit live = 0;     // counters run once reset has been applied and released
  logic ntt_seen, sha3_seen, samp_seen;
  always @(posedge dut.ntt_clk)  ntt_seen  <= 1;
  always @(posedge dut.sha3_clk) sha3_seen <= 1;
  always @(posedge dut.samp_clk) samp_seen <= 1;
  always @(negedge clk) begin
    if (live) begin
      if (!ntt_seen)  n_ntt_off++;
      if (!sha3_seen) n_sha3_off++;
      if (!samp_seen) n_samp_off++;
    end
    ntt_seen <= 0; sha3_seen <= 0; samp_seen <= 0;
  end
  always @(posedge clk) if (live) begin
    if (dut.u_samp.take && !dut.u_samp.binomial && !dut.u_samp.rej_accept) n_reject++;
    if (dut.u_prng.kstart && dut.u_prng.squeeze) n_refill++;
    if (dut.clk_cfg == 3'b111) n_forced++;
    if (dut.proc_busy && wen && addr < 16'h4000) n_blocked++;
    if (dut.u_pe.done) n_pe_ops++;
    if (int_o && !int_d) n_int++;
    int_d <= int_o;
  end

  longint a[N], s[N], e[N], b[N], ref_b[N];
  logic [31:0] d;
  int cyc;
  longint exp_a[8] = '{7161, 7006, 914, 3711, 2085, 955, 2032, 7660};

  initial begin
    longint psi, ninv, psinv, g;
    logic [31:0] prog[$];
    addr = 0; wdata = 0; wen = 0; ren = 0;
    @(negedge clk) rst = 1;
    repeat (2) @(negedge clk);
    rst = 0;
    live = 1;
    // psi tables at constants address 0
    psi = 0;
    for (g = 2; psi == 0; g++) begin
      longint p;
      p = mpow(g, (Q - 1) / (2 * N), Q);
      if (mpow(p, N, Q) == Q - 1) psi = p;
    end
    ninv = mpow(N, Q - 2, Q); psinv = mpow(psi, Q - 2, Q);
    for (int i = 0; i < N; i++) begin
      hw(16'h2000 + 16'(i), 32'(mpow(psi, i, Q)));
      hw(16'h2000 + 16'(N + i), 32'(ninv * mpow(psinv, i, Q) % Q));
    end
    // seed block: "lattice" || 0x1F, pad 0x80 at byte 167 (SHAKE-128)
    for (int i = 0; i < 50; i++) hw(16'h5000 + 16'(i), 32'h0);
    hw(16'h5000, 32'h7474616c);
    hw(16'h5001, 32'h1f656369);
    hw(16'h5000 + 16'd41, 32'h80000000);
    // program 1: sampling
    prog = '{ins(OP_SETQ, 27'(Q)), ins(OP_SETMU, 27'((longint'(1) << 26) / Q)),
             ins(OP_SETN, 27'(LOGN)), ins(OP_SETK, 27'd16), ins(OP_SETW, 27'd16),
             ins(OP_SETBND, 27'(8 * Q)), ins(OP_SETTB, 27'd0), ins(OP_MODE, 27'd0),
             ins(OP_SETCLK, 27'd0), ins(OP_ABSORB, 27'd1),
             ins(OP_SAMPU, {1'b0, 20'd0, 6'd0}),     // a -> L, base 0
             ins(OP_SAMPB, {1'b1, 20'd0, 6'd8}),     // s -> R, base 8
             ins(OP_SAMPB, {1'b1, 20'd0, 6'd16}),    // e -> R, base 16
             ins(OP_HALT, 27'd0)};
    load_prog(prog);
    run_prog(cyc);
    $display("sampling program: %0d cycles", cyc);
    rd_poly(0, 0, a); rd_poly(1, 8, s); rd_poly(1, 16, e);
    for (int i = 0; i < 8; i++) chk(a[i] == exp_a[i], $sformatf("a[%0d] = %0d, SHAKE-128 gives %0d", i, a[i], exp_a[i]));
    for (int i = 0; i < N; i++) begin
      chk(a[i] < Q, "a in range");
      chk(s[i] <= 16 || s[i] >= Q - 16, "s is binomial");
      chk(e[i] <= 16 || e[i] >= Q - 16, "e is binomial");
    end
    // reference b = a * s + e (negative-wrapped)
    for (int i = 0; i < N; i++) ref_b[i] = e[i];
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        if (i + j < N) ref_b[i+j] = (ref_b[i+j] + a[i] * s[j]) % Q;
        else           ref_b[i+j-N] = (ref_b[i+j-N] + Q - a[i] * s[j] % Q) % Q;
      end
    // a marker word that the host will try to overwrite while running
    hw(caddr(0, 60, 0), 32'd1234);
    // program 2: b = INTT(NTT(a) * NTT(s)) + e
    prog = '{ins(OP_SETCLK, 27'd7),
             ins(OP_NTT,  {1'b0, 14'd0, 6'd0, 6'd0}),   // a: L0 <-> R0, ends R0
             ins(OP_NTT,  {1'b1, 14'd0, 6'd8, 6'd8}),   // s: R8 <-> L8, ends L8
             ins(OP_PMUL, {1'b1, 7'd0, 1'b1, 6'd0, 6'd8, 6'd0}), // R0 = R0 * L8
             ins(OP_INTT, {1'b1, 14'd0, 6'd24, 6'd0}),  // R0 <-> L24, ends L24
             ins(OP_SETCLK, 27'd0),
             ins(OP_PADD, {1'b0, 7'd0, 1'b0, 6'd32, 6'd16, 6'd24}), // L32 = L24 + R16
             ins(OP_HALT, 27'd0)};
    load_prog(prog);
    hw(16'h6000, 32'h1);
    repeat (50) @(negedge clk);
    hw(caddr(0, 60, 0), 32'd999);     // must be ignored: processor running
    while (!int_o) @(negedge clk);
    rd_poly(0, 32, b);
    for (int i = 0; i < N; i++) chk(b[i] == ref_b[i], $sformatf("b[%0d] = %0d exp %0d", i, b[i], ref_b[i]));
    hr(caddr(0, 60, 0), d);
    chk(d == 32'd1234, "host write ignored while running");
    // mechanisms
    $display("rejections %0d, PRNG refills %0d, NTT cycles %0d, gate-closed cycles ntt/sha3/samp %0d/%0d/%0d, forced-on %0d, blocked %0d, ops %0d, INT %0d",
             n_reject, n_refill, ntt_cycles, n_ntt_off, n_sha3_off, n_samp_off, n_forced, n_blocked, n_pe_ops, n_int);
    chk(n_reject > 0, "rejection happened");
    chk(n_refill > 0, "PRNG refill stall happened");
    chk(n_ntt_off > 0 && n_sha3_off > 0 && n_samp_off > 0, "every clock gate closed at some time");
    chk(n_forced > 0, "clock gates forced on");
    chk(n_blocked > 0, "host access blocked while running");
    chk(n_pe_ops == 5, $sformatf("%0d polynomial engine operations", n_pe_ops));
    chk(n_int == 2, "interrupt raised for each program");
    chk(ntt_cycles == 1288, $sformatf("NTT took %0d cycles, expected 1288", ntt_cycles));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // cycles of the first NTT: engine busy samples
  logic first_ntt_done = 0;
  always @(posedge clk) begin
    if (live && !first_ntt_done && dut.u_pe.busy) ntt_cycles++;
    if (live && dut.u_pe.done) first_ntt_done <= 1;
  end
endmodule
