// Rejection sampler for uniform coefficients in [0, q).
//
// A masked pseudo-random candidate x is accepted when x < bound, where the
// bound is a multiple of q (the largest one that fits the mask width), and
// the accepted value is then reduced modulo q with Barrett reduction. Using a
// multiple of q instead of q itself lowers the rejection probability. Pure
// combinational logic: one candidate per cycle. The comparison against the
// bound and the Barrett reduction follow the source's sampler drawing; the
// bound itself is a configuration value.
module rejection_sampler
  import lwe_pkg::*;
(
  input  logic [31:0]     x,
  input  logic [MU_W-1:0] bound,
  input  logic [CW-1:0]   q,
  input  logic [MU_W-1:0] mu,
  input  logic [4:0]      s,
  output logic            accept,
  output logic [CW-1:0]   sample
);

  assign accept = (x < 32'(bound));

  barrett_reduce u_red (.x((2*CW)'(x)), .q(q), .mu(mu), .s(s), .r(sample));

endmodule
