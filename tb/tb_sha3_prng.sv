// Testbench for sha3_prng: absorbs hand-padded messages through the seed
// registers and compares the squeezed 32-bit stream with SHAKE-128("seed")
// and SHAKE-256("") reference output (past the first block, so a second
// permutation is exercised), and the state read-back with SHA3-512("abc").
// Also checks the stall of one permutation between output blocks.
module tb_sha3_prng;
  import lwe_pkg::*;
  logic clk = 0, rst_n = 1;
  sha3_mode_e mode;
  logic seed_we, absorb, init, squeeze, busy, out_valid, out_ready;
  logic [5:0] seed_addr, st_addr;
  logic [31:0] seed_wdata, out_data, st_rdata;
  int checks = 0, failures = 0;

  sha3_prng dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [1599:0] blk;
  task automatic load_and_absorb();
    for (int i = 0; i < 50; i++) begin
      @(negedge clk); seed_we = 1; seed_addr = 6'(i); seed_wdata = blk[32*i +: 32];
    end
    @(negedge clk); seed_we = 0; absorb = 1; init = 1;
    @(negedge clk); absorb = 0; init = 0;
    while (busy) @(negedge clk);
  endtask

  localparam logic [1599:0] S128 = 1600'h6b2ff80f3b0a5df7d404ead8304d6cfaae67711b02767932639d0c6b41067a28e86dac1235c6e4bf93d25eaa0b564707cc965f86c1143d44b21478c0f231e3903f6be003d73009d65e8075b920bdf9d56c21180291f11acbe9b3166a733c5c736648e98fc58a0c83540e318e3a731ee6bae24b95e35f7cef8cb8a762aee3e230ffdc3f649d937ee1d852a62ba9758182ed7d38f94dc0989c62f3c9d3205fe4bb06d02127dd4da2d162a2012dbb621740b6df838c66954f4f7b754bba26f8311d7642925847936225;
  localparam logic [1151:0] S256 = 1152'h622d8a46ec6a3b94dd1f3b9e1022d1f386cf16cd6b2a5295e51151c185c146d810502c46385c77c2b78ff54655c79e34532886ab0ebc84ef7b93928e3c2207dce35ab4d0edc72c695739b16f61961e14bec4b7b3ac2e294086b49a47491c82fcf692b5679d0105cb00f2c0d8ddc45dd72f76d56e64270cb5821bb862ea52cd3f24eb3e74eb3f3b23138da80b2bddb946;
  localparam logic [511:0]  A512 = 512'hf053ec4e27f89265a5d508f44c0b34574093e34776c57e1ac9f32a19e916e1102e71d240025d4f880df744748221f6086e096b4b92cd93568a16571a0b8551b7;

  int n, gap, maxgap;
  initial begin
    seed_we = 0; absorb = 0; init = 0; squeeze = 0; out_ready = 0;
    seed_addr = 0; seed_wdata = 0; st_addr = 0; mode = M_SHAKE128;
    rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // SHAKE-128("seed")
    blk = '0; blk[31:0] = 32'h64656573; blk[39:32] = 8'h1f; blk[8*167 +: 8] = 8'h80;
    load_and_absorb();
    squeeze = 1; out_ready = 1; n = 0; gap = 0; maxgap = 0;
    while (n < 50) begin
      @(posedge clk);
      if (out_valid) begin
        check(out_data == S128[32*n +: 32], $sformatf("SHAKE-128 word %0d", n));
        n++; gap = 0;
      end else begin
        gap++; if (gap > maxgap) maxgap = gap;
      end
      @(negedge clk);
    end
    check(maxgap >= 24 && maxgap <= 27, $sformatf("stall between blocks %0d", maxgap));
    squeeze = 0; out_ready = 0;
    while (busy) @(negedge clk);
    // SHAKE-256("")
    mode = M_SHAKE256;
    blk = '0; blk[7:0] = 8'h1f; blk[8*135 +: 8] = 8'h80;
    load_and_absorb();
    squeeze = 1; out_ready = 1; n = 0;
    while (n < 36) begin
      @(posedge clk);
      if (out_valid) begin
        check(out_data == S256[32*n +: 32], $sformatf("SHAKE-256 word %0d", n));
        n++;
      end
      @(negedge clk);
    end
    squeeze = 0; out_ready = 0;
    while (busy) @(negedge clk);
    // SHA3-512("abc"), read back the state
    mode = M_SHA3_512;
    blk = '0; blk[31:0] = 32'h06636261; blk[8*71 +: 8] = 8'h80;
    load_and_absorb();
    for (int i = 0; i < 16; i++) begin
      st_addr = 6'(i); #1;
      check(st_rdata == A512[32*i +: 32], $sformatf("SHA3-512 word %0d", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
