// Testbench for controller: a program in a testbench instruction array sets
// every configuration register, issues NTT, PMUL, ABSORB, SAMPB and HALT,
// and the testbench plays the units (done pulses after random delays, a
// busy sponge). It checks the configuration values, the command fields and
// the order of the start pulses, that the controller waits for each unit,
// the activity flags for the clock gates, and int_o after HALT. Then it
// runs 40 programs with random configuration values and one random unit
// command each (any of NTT, INTT, PMUL, PADD, PSUB, SAMPU, SAMPB, with
// random sides and bases) and checks every register and command field.
module tb_controller;
  import lwe_pkg::*;
  logic clk = 0, rst_n = 1, start, busy, int_o, im_en;
  logic [IMEM_AW-1:0] im_addr;
  logic [31:0] im_rdata;
  logic [CW-1:0] q;
  logic [MU_W-1:0] mu, bound;
  logic [4:0] s;
  logic [3:0] logn;
  logic [5:0] k, wmask, base_a, base_b, base_c;
  logic [CONST_AW-1:0] tbl_base;
  sha3_mode_e mode;
  logic [2:0] clk_cfg;
  logic pe_start, pe_done, side_a, side_c, absorb, absorb_init, prng_busy;
  logic samp_start, samp_binomial, samp_done, act_ntt, act_sha3, act_samp;
  pe_op_e pe_op;
  int checks = 0, failures = 0;

  controller dut (.*);

  always #5 clk = ~clk;

  logic [31:0] prog [16];
  always_ff @(posedge clk) if (im_en) im_rdata <= prog[im_addr];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [31:0] ins(opcode_e o, logic [26:0] imm);
    return {o, imm};
  endfunction

  // unit models
  string events[$];
  always @(posedge clk) begin
    if (pe_start) begin
      events.push_back($sformatf("pe%0d %0d %0d %0d %0d %0d %0d", pe_op, side_a, base_a, base_b, side_c, base_c, act_ntt));
      fork begin
        repeat ($urandom_range(20, 3)) @(posedge clk);
        #1 pe_done = 1; @(posedge clk); #1 pe_done = 0;
      end join_none
    end
    if (samp_start) begin
      events.push_back($sformatf("samp%0d %0d %0d", samp_binomial, side_a, base_a));
      fork begin
        repeat (15) @(posedge clk);
        chk(act_samp && act_sha3 && act_ntt, "activity during sampling");
        #1 samp_done = 1; @(posedge clk); #1 samp_done = 0;
      end join_none
    end
    if (absorb) begin
      events.push_back($sformatf("abs%0d", absorb_init));
      fork begin
        #1 prng_busy = 1; repeat (24) @(posedge clk); #1 prng_busy = 0;
      end join_none
    end
  end

  initial begin
    int t0;
    start = 0; pe_done = 0; samp_done = 0; prng_busy = 0;
    prog[0]  = ins(OP_SETQ, 27'd7681);
    prog[1]  = ins(OP_SETMU, 27'd8737);
    prog[2]  = ins(OP_SETN, 27'd8);
    prog[3]  = ins(OP_SETK, 27'd20);
    prog[4]  = ins(OP_SETW, 27'd16);
    prog[5]  = ins(OP_SETBND, 27'd61448);
    prog[6]  = ins(OP_SETTB, 27'd300);
    prog[7]  = ins(OP_SETCLK, 27'd5);
    prog[8]  = ins(OP_MODE, 27'd1);
    prog[9]  = ins(OP_NTT, {1'b1, 14'd0, 6'd9, 6'd3});
    prog[10] = ins(OP_PMUL, {1'b0, 7'd0, 1'b1, 6'd7, 6'd9, 6'd3});
    prog[11] = ins(OP_ABSORB, 27'd1);
    prog[12] = ins(OP_SAMPB, {1'b1, 20'd0, 6'd5});
    prog[13] = ins(OP_NOP, 27'd0);
    prog[14] = ins(OP_HALT, 27'd0);
    prog[15] = ins(OP_HALT, 27'd0);
    rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(!busy && !int_o, "idle after reset");
    start = 1; @(negedge clk); start = 0;
    t0 = 0;
    while (!int_o) begin @(negedge clk); t0++; end
    chk(!busy, "idle after HALT");
    chk(q == 7681 && mu == 8737 && s == 13, "q, mu, s");
    chk(logn == 8 && k == 20 && wmask == 16 && bound == 61448, "N, k, mask, bound");
    chk(tbl_base == 300 && clk_cfg == 3'd5 && mode == M_SHAKE256, "table base, clock config, mode");
    foreach (events[i]) $display("event %0d: %s", i, events[i]);
    chk(events.size() == 4, $sformatf("%0d unit commands", events.size()));
    if (events.size() == 4) begin
      chk(events[0] == "pe0 1 3 9 0 0 1", {"NTT fields: ", events[0]});
      chk(events[1] == "pe2 0 3 9 1 7 1", {"PMUL fields: ", events[1]});
      chk(events[2] == "abs1", {"ABSORB: ", events[2]});
      chk(events[3] == "samp1 1 5", {"SAMPB fields: ", events[3]});
    end
    chk(t0 > 2 * 15 + 24 + 15, $sformatf("waited for the units (%0d cycles)", t0));
    chk(!act_ntt && !act_sha3 && !act_samp, "activity cleared");
    // restart clears int
    start = 1; @(negedge clk); start = 0; @(negedge clk);
    chk(!int_o && busy, "restart clears INT");
    while (!int_o) @(negedge clk);
    // random configurations and one random unit command per program
    for (int r = 0; r < 40; r++) begin
      logic [23:0] rq; logic [25:0] rmu, rbnd; logic [3:0] rn; logic [5:0] rk, rw, ba, bb, bc;
      logic [12:0] rtb; logic [2:0] rclk; logic [1:0] rmode; logic sa, sc; int u;
      opcode_e uop;
      string expect_ev;
      rq = 24'($urandom); rmu = 26'($urandom); rbnd = 26'($urandom); rn = 4'($urandom_range(11, 6));
      rk = 6'($urandom_range(32, 1)); rw = 6'($urandom_range(26, 2)); rtb = 13'($urandom);
      rclk = 3'($urandom); rmode = 2'($urandom); sa = 1'($urandom); sc = 1'($urandom);
      ba = 6'($urandom); bb = 6'($urandom); bc = 6'($urandom);
      u = $urandom_range(6, 0);
      uop = (u < 5) ? opcode_e'(5'(OP_NTT) + 5'(u)) : (u == 5) ? OP_SAMPU : OP_SAMPB;
      prog[0] = ins(OP_SETQ, 27'(rq));   prog[1] = ins(OP_SETMU, 27'(rmu));
      prog[2] = ins(OP_SETN, 27'(rn));   prog[3] = ins(OP_SETK, 27'(rk));
      prog[4] = ins(OP_SETW, 27'(rw));   prog[5] = ins(OP_SETBND, 27'(rbnd));
      prog[6] = ins(OP_SETTB, 27'(rtb)); prog[7] = ins(OP_SETCLK, 27'(rclk));
      prog[8] = ins(OP_MODE, 27'(rmode));
      prog[9] = ins(uop, {sa, 7'($urandom), sc, bc, bb, ba});
      prog[10] = ins(OP_HALT, 27'd0);
      events.delete();
      start = 1; @(negedge clk); start = 0;
      t0 = 0;
      while (!int_o) begin @(negedge clk); t0++; end
      chk(q == rq && mu == rmu && s == 5'(bitlen(rq)), $sformatf("random q/mu (%0d)", r));
      chk(logn == rn && k == rk && wmask == rw && bound == rbnd, $sformatf("random N/k/w/bound (%0d)", r));
      chk(tbl_base == rtb && clk_cfg == rclk && mode == sha3_mode_e'(rmode), $sformatf("random table/clock/mode (%0d)", r));
      if (u < 5) begin
        pe_op_e eop;
        eop = (u == 0) ? PE_NTT : (u == 1) ? PE_INTT : (u == 2) ? PE_PMUL : (u == 3) ? PE_PADD : PE_PSUB;
        expect_ev = $sformatf("pe%0d %0d %0d %0d %0d %0d 1", eop, sa, ba, bb, sc, bc);
      end else
        expect_ev = $sformatf("samp%0d %0d %0d", u == 6, sa, ba);
      chk(events.size() == 1 && events[0] == expect_ev,
          $sformatf("random command %0d: got %s, expected %s", r, events.size() ? events[0] : "none", expect_ev));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
