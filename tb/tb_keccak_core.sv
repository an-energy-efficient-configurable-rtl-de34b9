// Testbench for keccak_core: pads "abc" for SHA3-256 and SHA3-512 by hand,
// loads the block into the state, runs one permutation and compares the
// digest part of the state with the published FIPS 202 digests. Then it
// permutes the all-zero state twice in a row and compares all 25 lanes with
// the Keccak-f[1600] reference values (first lanes F1258F7940E1DDE7 and
// 2D5C954DF96ECB3C), with a second `start` pulsed in the middle of the first
// permutation, which must be ignored. Also checks that a permutation takes
// exactly 24 cycles.
module tb_keccak_core;
  logic clk = 0, rst_n = 1;
  logic load, start, busy, done;
  logic [1599:0] state_i, state_o;
  int checks = 0, failures = 0;

  keccak_core dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(input int rate_bytes, output int cycles);
    state_i = '0;
    state_i[7:0] = 8'h61; state_i[15:8] = 8'h62; state_i[23:16] = 8'h63;
    state_i[31:24] = 8'h06;
    state_i[8*(rate_bytes-1) +: 8] = 8'h80;
    @(negedge clk) load = 1;
    @(negedge clk) begin load = 0; start = 1; end
    cycles = 0;
    @(negedge clk) start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
  endtask

  // Keccak-f[1600] applied once and twice to the all-zero state
  localparam logic [1599:0] ZERO_F1 = // lane 24 ... lane 0
  {
    64'heaf1ff7b5ceca249, 64'h75f644e97f30a13b, 64'h16f53526e70465c2, 64'h1841f924a2c509e4, 64'h940c7922ae3a2614,
    64'h8c3ee88a1ccf32c8, 64'hb87c5a554fd00ecb, 64'h613670957bc46611, 64'h64befef28cc970f2, 64'h05e5635a21d9ae61,
    64'h01f22f1a11a5569f, 64'h43b831cd0347c826, 64'h81a57c16dbcf555f, 64'ha9a6e6260d712103, 64'heb5aa93f2317d635,
    64'h30935ab7d08ffc64, 64'had30a6f71b19059c, 64'h8c5bda0cd6192e76, 64'h90fee5a0a44647c4, 64'hff97a42d7f8e6fd4,
    64'h8b284e056253d057, 64'hbd1547306f80494d, 64'hd598261ea65aa9ee, 64'h84d5ccf933c0478a, 64'hf1258f7940e1dde7};
  localparam logic [1599:0] ZERO_F2 = // lane 24 ... lane 0
  {
    64'h20d06cd26a8fbf5c, 64'h609f4e62a44c1059, 64'h5b3402464e1c3db6, 64'h202a9ec5faa3cce8, 64'h900e3129e7badd7b,
    64'h91a0226e649e42e9, 64'he3b8c8ee55b7b03c, 64'h48ead5fc5d0be774, 64'h97ddad33d8994b40, 64'hfd5449a6bf174743,
    64'h7cf8a9f009831265, 64'he00654042719dbd9, 64'h33c43d836eafb1f5, 64'hdeea66c4ba8f974f, 64'h68ce61b6b9ce68a1,
    64'he4fecc0fee98b425, 64'h1f1b9ee6f79a8759, 64'hfaf4f247c3d810f7, 64'h85773dae1275af0d, 64'hf957b9a2da65fb38,
    64'h4f9c4f99e5e7f156, 64'h8a20d9b25569d094, 64'h093d8d1270d76b6c, 64'h6a332cd07057b56d, 64'h2d5c954df96ecb3c};

  task automatic lanes(input logic [1599:0] exp, input string what);
    for (int i = 0; i < 25; i++)
      check(state_o[64*i +: 64] == exp[64*i +: 64], $sformatf("%s lane %0d", what, i));
  endtask

  int cyc;
  initial begin
    load = 0; start = 0; state_i = '0;
    rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    check(state_o == '0, "state cleared by reset");
    run(136, cyc);
    check(state_o[255:0] == 256'h3215431145e2bf465b529d3e6e085f85bd90d36b2d175c04b225e24fa75d983a, "SHA3-256(abc)");
    check(cyc == 24, $sformatf("permutation cycles %0d != 24", cyc));
    run(72, cyc);
    check(state_o[511:0] == 512'hf053ec4e27f89265a5d508f44c0b34574093e34776c57e1ac9f32a19e916e1102e71d240025d4f880df744748221f6086e096b4b92cd93568a16571a0b8551b7, "SHA3-512(abc)");
    check(cyc == 24, "permutation cycles (2)");
    check(!busy, "idle after done");
    // zero state, permuted twice; a start while busy must change nothing
    state_i = '0;
    @(negedge clk) load = 1;
    @(negedge clk) begin load = 0; start = 1; end
    @(negedge clk) start = 0;
    repeat (5) @(negedge clk);
    start = 1;
    @(negedge clk) start = 0;
    cyc = 7;
    while (!done) begin @(negedge clk); cyc++; end
    check(cyc == 24, $sformatf("permutation with ignored start took %0d cycles", cyc));
    lanes(ZERO_F1, "f(0)");
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    check(cyc == 24, "chained permutation cycles");
    lanes(ZERO_F2, "f(f(0))");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
