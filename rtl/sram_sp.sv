// Single-port synchronous RAM, the model of one SRAM macro: one access per
// cycle, either a write or a read whose data appears on `rdata` after the
// clock edge and is held until the next read. On the chip these are foundry
// SRAM macros; here the array is plain synthesizable logic.
module sram_sp #(
  parameter int unsigned WORDS = 1024,
  parameter int unsigned DW    = 24,
  parameter int unsigned AW    = $clog2(WORDS)
) (
  input  logic          clk,
  input  logic          en,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  logic [DW-1:0] wdata,
  output logic [DW-1:0] rdata
);

  logic [DW-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end

endmodule
