// Top level of the configurable lattice cryptography processor.
//
// Blocks: the 24 KB LWE polynomial cache (8 single-port banks), the NTT
// constants RAM, the polynomial engine with its unified butterfly (modular
// arithmetic unit), the SHA-3 / SHAKE sponge (Keccak-f[1600] core and seed
// registers), the discrete distribution sampler, the 1 KB instruction memory,
// the instruction decode and control unit and the memory-mapped host
// interface. The cache, constants RAM and polynomial engine run on NTT_CLK,
// the sponge on SHA3_CLK and the sampler on SAMP_CLK, each from its own
// clock gate; a gate is open when its block is forced on by the SETCLK
// instruction, when the running operation needs the block, or when the host
// accesses the block's memories. Sampled coefficients are written straight
// into the cache. The cache banks are shared by the host (while idle), the
// sampler (while sampling) and the polynomial engine.
// Pins: clk, rst (active high, asynchronous), addr/wdata/wen/ren/rdata of the
// host interface (see mmio_if for the map and timing) and int_o, raised when
// a program reaches HALT. The block partition and the three clock gates
// follow the source's system diagram; the pin strobes, the reset polarity and
// the arbitration are this design's.
// The three latch bits that synthesis finds in this module are the enable
// latches of the three clock gates.
module lattice_crypto_processor
  import lwe_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic [15:0] addr,
  input  logic [31:0] wdata,
  input  logic        wen,
  input  logic        ren,
  output logic [31:0] rdata,
  output logic        int_o
);

  logic rst_n;
  assign rst_n = ~rst;

  // ---------------------------------------------------------------- control
  logic               proc_busy, start;
  logic               im_en_c, im_en, im_we;
  logic [IMEM_AW-1:0] im_addr_c, im_addr;
  logic [31:0]        im_wdata, im_rdata;
  logic [CW-1:0]      q;
  logic [MU_W-1:0]    mu, bound;
  logic [4:0]         s;
  logic [3:0]         logn;
  logic [5:0]         k, wmask;
  logic [CONST_AW-1:0] tbl_base;
  sha3_mode_e         mode;
  logic [2:0]         clk_cfg;
  logic               pe_start, pe_done, pe_busy;
  pe_op_e             pe_op;
  logic               side_a, side_c;
  logic [5:0]         base_a, base_b, base_c;
  logic               absorb, absorb_init, prng_busy;
  logic               samp_start, samp_binomial, samp_done, samp_busy;
  logic               act_ntt, act_sha3, act_samp;

  controller u_ctrl (
    .clk(clk), .rst_n(rst_n), .start(start), .busy(proc_busy), .int_o(int_o),
    .im_en(im_en_c), .im_addr(im_addr_c), .im_rdata(im_rdata),
    .q(q), .mu(mu), .s(s), .logn(logn), .k(k), .wmask(wmask), .bound(bound),
    .tbl_base(tbl_base), .mode(mode), .clk_cfg(clk_cfg),
    .pe_start(pe_start), .pe_op(pe_op), .side_a(side_a), .base_a(base_a),
    .base_b(base_b), .side_c(side_c), .base_c(base_c), .pe_done(pe_done),
    .absorb(absorb), .absorb_init(absorb_init), .prng_busy(prng_busy),
    .samp_start(samp_start), .samp_binomial(samp_binomial), .samp_done(samp_done),
    .act_ntt(act_ntt), .act_sha3(act_sha3), .act_samp(act_samp)
  );

  // ------------------------------------------------------- host interface
  logic               h_c_req;
  logic [2:0]         h_c_bank;
  bank_req_t          h_c_breq;
  logic               h_k_en, h_k_we;
  logic [CONST_AW-1:0] h_k_addr;
  logic [CW-1:0]      h_k_wdata;
  logic               h_i_en, h_i_we;
  logic [IMEM_AW-1:0] h_i_addr;
  logic [31:0]        h_i_wdata;
  logic               seed_we, sha3_sel;
  logic [5:0]         seed_addr;
  logic [31:0]        seed_wdata, st_rdata;
  logic [7:0][CW-1:0] c_rdata;
  logic [CW-1:0]      k_rdata;

  mmio_if u_mmio (
    .clk(clk), .rst_n(rst_n), .addr(addr), .wdata(wdata), .wen(wen), .ren(ren),
    .rdata(rdata), .proc_busy(proc_busy), .proc_int(int_o),
    .c_req(h_c_req), .c_bank(h_c_bank), .c_breq(h_c_breq), .c_rdata(c_rdata),
    .k_en(h_k_en), .k_we(h_k_we), .k_addr(h_k_addr), .k_wdata(h_k_wdata),
    .k_rdata(k_rdata),
    .i_en(h_i_en), .i_we(h_i_we), .i_addr(h_i_addr), .i_wdata(h_i_wdata),
    .i_rdata(im_rdata),
    .seed_we(seed_we), .seed_addr(seed_addr), .seed_wdata(seed_wdata),
    .st_rdata(st_rdata), .sha3_sel(sha3_sel), .start(start)
  );

  // ---------------------------------------------------------- clock gates
  logic ntt_clk, sha3_clk, samp_clk;

  clock_gate u_cg_ntt  (.clk(clk), .en(clk_cfg[0] | act_ntt | pe_busy | h_c_req | h_k_en), .gclk(ntt_clk));
  clock_gate u_cg_sha3 (.clk(clk), .en(clk_cfg[1] | act_sha3 | sha3_sel),        .gclk(sha3_clk));
  clock_gate u_cg_samp (.clk(clk), .en(clk_cfg[2] | act_samp | samp_busy), .gclk(samp_clk));

  // --------------------------------------------------- instruction memory
  assign im_en    = proc_busy ? im_en_c   : h_i_en;
  assign im_we    = proc_busy ? 1'b0      : h_i_we;
  assign im_addr  = proc_busy ? im_addr_c : h_i_addr;
  assign im_wdata = h_i_wdata;

  instr_mem u_imem (.clk(clk), .en(im_en), .we(im_we), .addr(im_addr),
                    .wdata(im_wdata), .rdata(im_rdata));

  // ------------------------------------------------------- SHA-3 / PRNG
  logic        rnd_valid, rnd_ready, prng_req;
  logic [31:0] rnd_data;

  sha3_prng u_prng (
    .clk(sha3_clk), .rst_n(rst_n), .mode(mode),
    .seed_we(seed_we), .seed_addr(seed_addr), .seed_wdata(seed_wdata),
    .absorb(absorb), .init(absorb_init), .squeeze(prng_req), .busy(prng_busy),
    .out_valid(rnd_valid), .out_ready(rnd_ready), .out_data(rnd_data),
    .st_addr(seed_addr), .st_rdata(st_rdata)
  );

  // ------------------------------------------------------------- sampler
  logic          cw_valid;
  logic [11:0]   cw_index;
  logic [CW-1:0] cw_data;

  dist_sampler u_samp (
    .clk(samp_clk), .rst_n(rst_n), .start(samp_start), .binomial(samp_binomial),
    .logn(logn), .q(q), .mu(mu), .s(s), .k(k), .wmask(wmask), .bound(bound),
    .busy(samp_busy), .done(samp_done), .prng_req(prng_req),
    .rnd_valid(rnd_valid), .rnd_ready(rnd_ready), .rnd_data(rnd_data),
    .cw_valid(cw_valid), .cw_index(cw_index), .cw_data(cw_data)
  );

  // sampled coefficient i goes to bank {side, i >= N/2, i[0]}
  bank_req_t  s_breq;
  logic [2:0] s_bank;
  logic [11:0] nh;
  assign nh           = 12'd1 << (logn - 4'd1);
  assign s_bank       = {side_a, cw_index >= nh, cw_index[0]};
  assign s_breq.en    = cw_valid;
  assign s_breq.we    = 1'b1;
  assign s_breq.addr  = {base_a, 4'b0} + BANK_AW'((cw_index & (nh - 12'd1)) >> 1);
  assign s_breq.wdata = cw_data;

  // ---------------------------------------------------- polynomial engine
  bank_req_t [7:0]     pe_breq, breq;
  logic                pe_c_en;
  logic [CONST_AW-1:0] pe_c_addr;

  poly_engine u_pe (
    .clk(ntt_clk), .rst_n(rst_n), .start(pe_start), .op(pe_op), .logn(logn),
    .side_a(side_a), .base_a(base_a), .base_b(base_b), .side_c(side_c),
    .base_c(base_c), .tbl_base(tbl_base), .q(q), .mu(mu), .s(s),
    .busy(pe_busy), .done(pe_done), .breq(pe_breq), .brdata(c_rdata),
    .c_en(pe_c_en), .c_addr(pe_c_addr), .c_rdata(k_rdata)
  );

  // cache bank arbitration: host when idle, sampler while sampling, else engine
  always_comb begin
    breq = pe_breq;
    if (act_samp) begin
      breq = '0;
      if (s_breq.en) breq[s_bank] = s_breq;
    end
    if (h_c_req) begin
      breq = '0;
      breq[h_c_bank] = h_c_breq;
    end
  end

  lwe_poly_cache u_cache (.clk(ntt_clk), .req(breq), .rdata(c_rdata));

  ntt_const_ram u_const (
    .clk(ntt_clk),
    .en(h_k_en | pe_c_en), .we(h_k_en & h_k_we),
    .addr(h_k_en ? h_k_addr : pe_c_addr),
    .wdata(h_k_wdata), .rdata(k_rdata)
  );

endmodule
