// LWE polynomial cache: 24 KB made of eight single-port banks of 1024 x 24
// bits, four on the left side (L0..L3) and four on the right (R0..R3).
//
// A polynomial of length N lives on one side, split over its four banks:
// coefficient i is in bank {i >= N/2, i[0]} at word base + ((i mod N/2) >> 1),
// so L0 holds 0, 2, ..., N/2-2, L1 holds 1, 3, ..., L2 holds N/2, N/2+2, ...
// and L3 holds N/2+1, N/2+3, .... Bank b (= {side, upper, odd}) takes the
// request req[b] and returns rdata[b] one cycle later. The split into 4+4
// single-port RAMs and the coefficient placement follow the source; the bank
// depth comes from its 24 KB total.
module lwe_poly_cache
  import lwe_pkg::*;
(
  input  logic            clk,
  input  bank_req_t [7:0] req,
  output logic [7:0][CW-1:0] rdata
);

  for (genvar b = 0; b < 8; b++) begin : g_bank
    sram_sp #(.WORDS(BANK_WORDS), .DW(CW)) u_bank (
      .clk(clk), .en(req[b].en), .we(req[b].we), .addr(req[b].addr),
      .wdata(req[b].wdata), .rdata(rdata[b])
    );
  end

endmodule
