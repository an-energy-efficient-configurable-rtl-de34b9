// Modular arithmetic unit: one unified Cooley-Tukey / Gentleman-Sande
// butterfly with a 24-bit datapath and configurable modulus q, reused for the
// coefficient-wise operations on polynomials.
//
// Structure (as drawn in the source): a first modular adder/subtractor pair
// on (u, v), a modular multiplier, and a second adder/subtractor pair on
// (u, product); multiplexers pick the path.
//   GS : o0 = u + v,     o1 = (u - v) * w
//   CT : o0 = u + v * w, o1 = u - v * w
//   MUL: o0 = v * w      ADD: o0 = u + v      SUB: o0 = u - v
// All results are in [0, q) for inputs in [0, q). Purely combinational; the
// polynomial engine registers the RAM outputs in front of it and writes its
// results straight back. The multiplier reduces with Barrett reduction
// (this design's choice: the source does not say how products are reduced).
module mod_arith_unit
  import lwe_pkg::*;
(
  input  ma_op_e          op,
  input  logic [CW-1:0]   u,
  input  logic [CW-1:0]   v,
  input  logic [CW-1:0]   w,
  input  logic [CW-1:0]   q,
  input  logic [MU_W-1:0] mu,
  input  logic [4:0]      s,
  output logic [CW-1:0]   o0,
  output logic [CW-1:0]   o1
);

  function automatic logic [CW-1:0] madd(input logic [CW-1:0] a, b, m);
    logic [CW:0] t;
    t = {1'b0, a} + {1'b0, b};
    madd = CW'((t >= {1'b0, m}) ? t - {1'b0, m} : t);
  endfunction

  function automatic logic [CW-1:0] msub(input logic [CW-1:0] a, b, m);
    msub = (a >= b) ? a - b : a + (m - b);
  endfunction

  logic [CW-1:0]   s1_sum, s1_dif, m_in, p, s2_sum, s2_dif;
  logic [2*CW-1:0] m_prod;

  always_comb begin
    s1_sum = madd(u, v, q);
    s1_dif = msub(u, v, q);
    m_in   = (op == MA_GS) ? s1_dif : v;
    m_prod = m_in * w;
  end

  barrett_reduce u_red (.x(m_prod), .q(q), .mu(mu), .s(s), .r(p));

  always_comb begin
    s2_sum = madd(u, p, q);
    s2_dif = msub(u, p, q);
    unique case (op)
      MA_GS:   begin o0 = s1_sum; o1 = p;      end
      MA_CT:   begin o0 = s2_sum; o1 = s2_dif; end
      MA_MUL:  begin o0 = p;      o1 = '0;     end
      MA_ADD:  begin o0 = s1_sum; o1 = '0;     end
      MA_SUB:  begin o0 = s1_dif; o1 = '0;     end
      default: begin o0 = '0;     o1 = '0;     end
    endcase
  end

endmodule
