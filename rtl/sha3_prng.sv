// SHA-3 / SHAKE sponge around the Keccak-f[1600] core, used both for hashing
// and as the pseudo-random number generator that feeds the sampler.
//
// Seed registers (50 x 32 bits, the size of the whole state) are written by
// the host. `absorb` XORs the rate part of the seed registers into the state
// (after clearing it when `init` is set) and runs one permutation; padding is
// part of the seed data the host writes. After each permutation the rate part
// of the state is copied to an output register that hands out 32 bits per
// cycle on a valid/ready stream, shifting by 32 bits each time (lowest word
// first, i.e. SHAKE output order). When it is empty and `squeeze` is held
// high, the core permutes again (24 cycles) and the output register is
// refilled: output and permutation do not overlap.
// Rates: SHAKE-128 1344, SHAKE-256 and SHA3-256 1088, SHA3-512 576 bits.
// The host reads the state (the hash digest) 32 bits at a time through
// `st_addr`/`st_rdata`. The modes, the seed registers, the Keccak state and
// the 32-bit shifted output follow the source; the command interface and the
// serial squeeze schedule are this design's choice.
module sha3_prng
  import lwe_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  sha3_mode_e  mode,
  // seed registers
  input  logic        seed_we,
  input  logic [5:0]  seed_addr,
  input  logic [31:0] seed_wdata,
  // commands
  input  logic        absorb,
  input  logic        init,
  input  logic        squeeze,
  output logic        busy,
  // pseudo-random output stream
  output logic        out_valid,
  input  logic        out_ready,
  output logic [31:0] out_data,
  // state read-back
  input  logic [5:0]  st_addr,
  output logic [31:0] st_rdata
);

  localparam int RATE_MAX = 1344;

  logic [1599:0]       seed;
  logic [1599:0]       kstate, kload_val;
  logic                kload, kstart, kbusy, kdone;
  logic [RATE_MAX-1:0] obuf;
  logic [5:0]          words_left;
  logic [5:0]          rate_words;
  logic [1599:0]       rate_mask;

  always_comb begin
    unique case (mode)
      M_SHAKE128: rate_words = 6'd42;
      M_SHAKE256: rate_words = 6'd34;
      M_SHA3_256: rate_words = 6'd34;
      default:    rate_words = 6'd18;
    endcase
    rate_mask = '0;
    for (int i = 0; i < 50; i++) if (i < int'(rate_words)) rate_mask[32*i +: 32] = '1;
  end

  keccak_core u_core (
    .clk(clk), .rst_n(rst_n),
    .load(kload), .state_i(kload_val),
    .start(kstart), .busy(kbusy), .done(kdone),
    .state_o(kstate)
  );

  // absorb: cycle 1 loads state ^ seed, cycle 2 starts the permutation
  logic absorb_pend;
  assign kload     = absorb && !kbusy && !absorb_pend;
  assign kload_val = (init ? '0 : kstate) ^ (seed & rate_mask);
  assign kstart    = absorb_pend ||
                     (squeeze && words_left == 6'd0 && !kbusy && !kdone && !absorb);
  assign busy      = kbusy || absorb_pend || kdone;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seed        <= '0;
      absorb_pend <= 1'b0;
      obuf        <= '0;
      words_left  <= '0;
    end else begin
      if (seed_we && seed_addr < 6'd50) seed[32*seed_addr +: 32] <= seed_wdata;
      absorb_pend <= kload;
      if (kload) begin
        words_left <= '0;
      end else if (kdone) begin
        obuf       <= kstate[RATE_MAX-1:0];
        words_left <= rate_words;
      end else if (out_valid && out_ready) begin
        obuf       <= obuf >> 32;
        words_left <= words_left - 6'd1;
      end
    end
  end

  assign out_valid = (words_left != 6'd0) && !kbusy;
  assign out_data  = obuf[31:0];
  assign st_rdata  = (st_addr < 6'd50) ? kstate[32*st_addr +: 32] : '0;

endmodule
