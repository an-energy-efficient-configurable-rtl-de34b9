// Instruction memory: 1 KB, 256 x 32-bit instructions, single port with
// one-cycle read latency. The host writes programs through the memory-mapped
// interface while the processor is idle; the controller fetches from it
// while running. Size and word width follow the source.
module instr_mem
  import lwe_pkg::*;
(
  input  logic               clk,
  input  logic               en,
  input  logic               we,
  input  logic [IMEM_AW-1:0] addr,
  input  logic [31:0]        wdata,
  output logic [31:0]        rdata
);

  sram_sp #(.WORDS(IMEM_WORDS), .DW(32), .AW(IMEM_AW)) u_ram (
    .clk(clk), .en(en), .we(we), .addr(addr), .wdata(wdata), .rdata(rdata)
  );

endmodule
