// One round of the Keccak-f[1600] permutation (theta, rho, pi, chi, iota),
// purely combinational, on the whole 1600-bit state at once.
//
// Lane (x,y) is state[64*(x+5y) +: 64], the FIPS 202 bit order. The round
// constant of round `rnd` is generated by the FIPS 202 LFSR inside a constant
// function evaluated at elaboration, so no table is written out. The round is the standard one; the source
// only says the core is a parallel round-per-cycle Keccak-f[1600].
module keccak_round (
  input  logic [1599:0] state_i,
  input  logic [4:0]    rnd,
  output logic [1599:0] state_o
);

  function automatic logic [63:0] rotl(input logic [63:0] v, input int n);
    rotl = (n == 0) ? v : ((v << n) | (v >> (64 - n)));
  endfunction

  // FIPS 202 rc(t): 8-bit LFSR x^8+x^6+x^5+x^4+1
  function automatic logic rc_bit(input int t);
    logic [7:0] r;
    r = 8'h01;
    for (int i = 0; i < (t % 255); i++) begin
      r = {r[6:0], 1'b0} ^ (r[7] ? 8'h71 : 8'h00);
    end
    rc_bit = r[0];
  endfunction

  // the 24 round constants, round r in bits [64r +: 64]
  function automatic logic [24*64-1:0] round_consts();
    logic [24*64-1:0] t;
    t = '0;
    for (int ir = 0; ir < 24; ir++)
      for (int j = 0; j <= 6; j++) t[64*ir + (1 << j) - 1] = rc_bit(j + 7 * ir);
    return t;
  endfunction

  // evaluated once, at elaboration
  localparam logic [24*64-1:0] RC = round_consts();

  // rho offsets, indexed x + 5y
  localparam int RHO [25] = '{ 0,  1, 62, 28, 27,
                              36, 44,  6, 55, 20,
                               3, 10, 43, 25, 39,
                              41, 45, 15, 21,  8,
                              18,  2, 61, 56, 14};

  logic [63:0] a [25];
  logic [63:0] b [25];
  logic [63:0] c [5];
  logic [63:0] d [5];
  logic [63:0] rc;

  always_comb begin
    for (int i = 0; i < 25; i++) a[i] = state_i[64*i +: 64];
    // theta
    for (int x = 0; x < 5; x++) c[x] = a[x] ^ a[x+5] ^ a[x+10] ^ a[x+15] ^ a[x+20];
    for (int x = 0; x < 5; x++) d[x] = c[(x+4)%5] ^ rotl(c[(x+1)%5], 1);
    for (int i = 0; i < 25; i++) a[i] = a[i] ^ d[i%5];
    // rho and pi: B[y, 2x+3y] = rot(A[x,y], r[x,y])
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        b[y + 5*((2*x + 3*y) % 5)] = rotl(a[x + 5*y], RHO[x + 5*y]);
    // chi
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        a[x + 5*y] = b[x + 5*y] ^ (~b[(x+1)%5 + 5*y] & b[(x+2)%5 + 5*y]);
    // iota
    rc = (rnd < 5'd24) ? RC[64*rnd +: 64] : '0;
    a[0] = a[0] ^ rc;
    for (int i = 0; i < 25; i++) state_o[64*i +: 64] = a[i];
  end

endmodule
