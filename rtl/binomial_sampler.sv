// Centered binomial sampler: takes two k-bit chunks a and b (k <= 32, already
// masked) and returns HW(a) - HW(b) as a residue modulo q, i.e. adds q to a
// negative difference. The sample has standard deviation sqrt(k/2). The
// computation is the same for every input, so it is constant-time.
// Combinational; this follows the source's description and drawing
// (two Hamming-weight units, a subtractor and a conditional add of q).
module binomial_sampler
  import lwe_pkg::*;
(
  input  logic [31:0]   a,
  input  logic [31:0]   b,
  input  logic [CW-1:0] q,
  output logic [CW-1:0] sample
);

  logic [5:0] hwa, hwb;

  always_comb begin
    hwa = '0;
    hwb = '0;
    for (int i = 0; i < 32; i++) begin
      hwa = hwa + 6'(a[i]);
      hwb = hwb + 6'(b[i]);
    end
    sample = (hwa >= hwb) ? CW'(hwa - hwb) : q - CW'(hwb - hwa);
  end

endmodule
