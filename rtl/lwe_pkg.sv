// Shared constants and types of the lattice cryptography processor.
//
// Coefficients are 24 bits wide (the modulus q is configurable up to 24 bits).
// The polynomial cache is built from eight single-port banks, four per side
// (L0..L3, R0..R3); a bank is addressed by {side, upper_half, odd}. The
// instruction set is this design's own: the source only says that the 1 KB
// instruction memory holds 32-bit custom instructions.
// Linting this package on its own lists its memory sizes as unused
// parameters; each is used by the modules that import the package.
package lwe_pkg;

  localparam int unsigned CW          = 24;    // coefficient / modulus width
  localparam int unsigned BANK_WORDS  = 1024;  // words per cache bank (8 x 1024 x 24 bit = 24 KB)
  localparam int unsigned BANK_AW     = 10;
  localparam int unsigned CONST_WORDS = 5120;  // NTT constants RAM, 5120 x 24 bit = 15 KB
  localparam int unsigned CONST_AW    = 13;
  localparam int unsigned IMEM_WORDS  = 256;   // 1 KB of 32-bit instructions
  localparam int unsigned IMEM_AW     = 8;
  localparam int unsigned MU_W        = CW + 2; // Barrett factor floor(4^s / q)

  // one request to a single-port RAM bank
  typedef struct packed {
    logic               en;
    logic               we;
    logic [BANK_AW-1:0] addr;
    logic [CW-1:0]      wdata;
  } bank_req_t;

  // modular arithmetic unit operations
  typedef enum logic [2:0] {
    MA_GS  = 3'd0,   // o0 = u+v, o1 = (u-v)*w
    MA_CT  = 3'd1,   // o0 = u+v*w, o1 = u-v*w
    MA_MUL = 3'd2,   // o0 = v*w
    MA_ADD = 3'd3,   // o0 = u+v
    MA_SUB = 3'd4    // o0 = u-v
  } ma_op_e;

  // polynomial engine commands
  typedef enum logic [2:0] {
    PE_NTT  = 3'd0,
    PE_INTT = 3'd1,
    PE_PMUL = 3'd2,
    PE_PADD = 3'd3,
    PE_PSUB = 3'd4
  } pe_op_e;

  // SHA-3 / SHAKE modes of the Keccak sponge
  typedef enum logic [1:0] {
    M_SHAKE128 = 2'd0,   // rate 1344 bits
    M_SHAKE256 = 2'd1,   // rate 1088 bits
    M_SHA3_256 = 2'd2,   // rate 1088 bits
    M_SHA3_512 = 2'd3    // rate  576 bits
  } sha3_mode_e;

  // instruction opcodes, instr[31:27]
  typedef enum logic [4:0] {
    OP_NOP    = 5'd0,
    OP_HALT   = 5'd1,   // stop and raise INT
    OP_SETQ   = 5'd2,   // imm[23:0] = q
    OP_SETMU  = 5'd3,   // imm[25:0] = floor(4^s / q), s = bit length of q
    OP_SETN   = 5'd4,   // imm[3:0]  = log2 N
    OP_SETK   = 5'd5,   // imm[5:0]  = binomial chunk width k
    OP_SETW   = 5'd6,   // imm[5:0]  = rejection sampling bit-mask width
    OP_SETBND = 5'd7,   // imm[25:0] = rejection bound (a multiple of q)
    OP_SETTB  = 5'd8,   // imm[12:0] = base of the psi table in the constants RAM
    OP_SETCLK = 5'd9,   // imm[2:0]  = clock gates forced on {samp, sha3, ntt}
    OP_MODE   = 5'd10,  // imm[1:0]  = SHA-3 mode
    OP_ABSORB = 5'd11,  // imm[0] = clear state first; xor seed into state, permute
    OP_SAMPU  = 5'd12,  // uniform (rejection) sampling into poly (imm[26], imm[5:0])
    OP_SAMPB  = 5'd13,  // binomial sampling into poly (imm[26], imm[5:0])
    OP_NTT    = 5'd14,  // src (imm[26], imm[5:0]), other side base imm[11:6]
    OP_INTT   = 5'd15,
    OP_PMUL   = 5'd16,  // a (imm[26], imm[5:0]), b (!imm[26], imm[11:6]), c (imm[18], imm[17:12])
    OP_PADD   = 5'd17,
    OP_PSUB   = 5'd18
  } opcode_e;

  // bit length of x (position of the highest set bit plus one)
  function automatic logic [4:0] bitlen(input logic [CW-1:0] x);
    bitlen = '0;
    for (int i = 0; i < CW; i++) if (x[i]) bitlen = 5'(i + 1);
  endfunction

endpackage
