// Testbench for dist_sampler: feeds a random 32-bit word stream with random
// gaps and recomputes in the testbench, word by word, what each mode must
// produce: uniform (mask width 16, bound = floor(2^16/q) q, N = 256,
// q = 7681), binomial with k = 16 (one word per sample, N = 512,
// q = 12289) and binomial with k = 20 (two words per sample, N = 64).
// Checks every coefficient's index and value, the count of N, the `done`
// pulse and, for binomial k <= 16, that N samples use exactly N words.
module tb_dist_sampler;
  import lwe_pkg::*;
  logic clk = 0, rst_n = 1;
  logic start, binomial, busy, done, prng_req, rnd_valid, rnd_ready, cw_valid;
  logic [3:0] logn;
  logic [CW-1:0] q, cw_data;
  logic [MU_W-1:0] mu, bound;
  logic [4:0] s;
  logic [5:0] k, wmask;
  logic [31:0] rnd_data;
  logic [11:0] cw_index;
  int checks = 0, failures = 0;

  dist_sampler dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int blen(longint v);
    int r = 0;
    while (v != 0) begin r++; v = v >> 1; end
    return r;
  endfunction

  function automatic int hw(logic [31:0] v);
    int r = 0;
    for (int i = 0; i < 32; i++) r += int'(v[i]);
    return r;
  endfunction

  // expected coefficients, filled by the stream driver
  longint exp_q[$];
  int words_used;

  task automatic run(input bit bin, input int logN, input longint qv, input int kk);
    int produced, nn;
    longint bb;
    logic [31:0] w, first;
    bit half;
    nn = 1 << logN;
    logn = 4'(logN); q = CW'(qv); s = 5'(blen(qv)); mu = MU_W'((longint'(1) << (2*blen(qv))) / qv);
    k = 6'(kk); wmask = 6'd16; bb = (65536 / qv) * qv; bound = MU_W'(bb); binomial = bin;
    exp_q.delete(); words_used = 0; produced = 0; half = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    fork
      begin : drive
        forever begin
          rnd_valid = ($urandom_range(3, 0) != 0);
          rnd_data  = $urandom;
          w = rnd_data;
          @(posedge clk);
          if (rnd_valid && rnd_ready) begin
            words_used++;
            if (!bin) begin
              if (longint'(w & 32'hFFFF) < bb) exp_q.push_back(longint'(w & 32'hFFFF) % qv);
            end else if (kk <= 16) begin
              int d;
              logic [31:0] m;
              m = (32'd1 << kk) - 1;
              d = hw(w & m) - hw((w >> kk) & m);
              exp_q.push_back(d < 0 ? d + qv : d);
            end else begin
              if (!half) first = w;
              else begin
                int d;
                logic [31:0] m;
                m = (kk == 32) ? '1 : ((32'd1 << kk) - 1);
                d = hw(first & m) - hw(w & m);
                exp_q.push_back(d < 0 ? d + qv : d);
              end
              half = !half;
            end
          end
          #1;
        end
      end
      begin : mon
        forever begin
          @(posedge clk); #2;
          if (cw_valid) begin
            longint e;
            e = exp_q.size() > 0 ? exp_q.pop_front() : -1;
            checks++;
            if (longint'(cw_data) != e || int'(cw_index) != produced) begin
              failures++;
              if (failures < 10) $display("FAIL idx %0d/%0d got %0d exp %0d", cw_index, produced, cw_data, e);
            end
            produced++;
          end
          if (done) break;
        end
      end
    join_any
    disable fork;
    rnd_valid = 0;
    checks++;
    if (produced != nn) begin failures++; $display("FAIL produced %0d of %0d", produced, nn); end
    if (bin && kk <= 16) begin
      checks++;
      if (words_used != nn) begin failures++; $display("FAIL words used %0d", words_used); end
    end
    repeat (3) @(negedge clk);
    checks++;
    if (busy || cw_valid) begin failures++; $display("FAIL not idle after done"); end
  endtask

  initial begin
    start = 0; binomial = 0; rnd_valid = 0; rnd_data = 0; logn = 6; q = 7681; mu = 0;
    bound = 0; s = 0; k = 16; wmask = 16;
    rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(0, 8, 7681, 16);
    run(1, 9, 12289, 16);
    run(1, 6, 12289, 20);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
