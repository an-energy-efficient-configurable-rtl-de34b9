// Barrett reduction r = x mod q for a configurable modulus q of up to 24 bits.
//
// With s the bit length of q and mu = floor(4^s / q) (both supplied by the
// configuration registers), t = floor(floor(x / 2^(s-1)) * mu / 2^(s+1)) is
// an estimate of x / q that is at most two too small, so r = x - t*q needs at
// most two conditional subtractions. Valid for x < 4^s, which covers the
// product of two residues and every rejection-sampling candidate below the
// bound. Combinational. The source names "fast Barrett reduction" after
// rejection sampling; the precise variant is this design's choice.
module barrett_reduce
  import lwe_pkg::*;
(
  input  logic [2*CW-1:0] x,
  input  logic [CW-1:0]   q,
  input  logic [MU_W-1:0] mu,
  input  logic [4:0]      s,
  output logic [CW-1:0]   r
);

  logic [2*CW-1:0]      xs;
  logic [2*CW+MU_W-1:0] prod;
  logic [2*CW-1:0]      t;
  logic [2*CW+1:0]      rem, rem1;

  always_comb begin
    xs   = (s == 5'd0) ? x : (x >> (s - 5'd1));
    prod = xs * (2*CW+MU_W)'(mu);
    t    = (2*CW)'(prod >> (s + 5'd1));
    rem  = (2*CW+2)'(x) - (2*CW+2)'(t) * (2*CW+2)'(q);
    rem1 = (rem >= (2*CW+2)'(q)) ? rem - (2*CW+2)'(q) : rem;
    r    = CW'((rem1 >= (2*CW+2)'(q)) ? rem1 - (2*CW+2)'(q) : rem1);
  end

endmodule
