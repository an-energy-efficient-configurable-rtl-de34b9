// NTT constants RAM: one single-port 5120 x 24-bit RAM (15 KB) holding
// pre-computed tables. For a transform of length N the table at `base`
// holds psi^i (i = 0..N-1) and the table at base + N holds N^-1 * psi^-i.
// The twiddle factors are derived from the first table: omega^e = psi^(2e)
// and omega^-e = omega^(N-e) = -psi^(N-2e), so no omega tables are stored.
// Read latency one cycle. The source gives the compression idea; the table
// layout and the 15 KB size (the on-chip SRAM total less the cache and
// instruction memory) are this design's reading.
module ntt_const_ram
  import lwe_pkg::*;
(
  input  logic                clk,
  input  logic                en,
  input  logic                we,
  input  logic [CONST_AW-1:0] addr,
  input  logic [CW-1:0]       wdata,
  output logic [CW-1:0]       rdata
);

  sram_sp #(.WORDS(CONST_WORDS), .DW(CW), .AW(CONST_AW)) u_ram (
    .clk(clk), .en(en), .we(we), .addr(addr), .wdata(wdata), .rdata(rdata)
  );

endmodule
