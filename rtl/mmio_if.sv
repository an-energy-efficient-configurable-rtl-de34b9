// Memory-mapped read/write interface between the host pins (ADDR, WDATA,
// RDATA) and the processor's memories and registers. Word address map:
//   0x0000-0x1FFF  polynomial cache: addr[12] side (0 = L, 1 = R),
//                  addr[11:10] bank {upper, odd}, addr[9:0] word
//   0x2000-0x33FF  NTT constants RAM
//   0x4000-0x40FF  instruction memory
//   0x5000-0x5031  write: seed registers; read: Keccak state words
//   0x6000         write bit 0: start the program at address 0;
//                  read: {30'b0, int, busy}
// A write takes effect at the clock edge where `wen` is sampled; read data
// appears on `rdata` in the cycle after `ren`. Memory accesses are ignored
// while the processor runs. The source shows the interface and its pins;
// the map and the strobes are this design's.
// Most output bits (addresses, write data, write strobes) are plain slices
// of the host pins: the block decodes only the enables, the start pulse and
// the read multiplexer, so 155 of its 194 output bits carry no logic of
// their own. That is intended: each memory sees the host bus directly.
module mmio_if
  import lwe_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic [15:0]         addr,
  input  logic [31:0]         wdata,
  input  logic                wen,
  input  logic                ren,
  output logic [31:0]         rdata,
  input  logic                proc_busy,
  input  logic                proc_int,
  // polynomial cache
  output logic                c_req,      // access to bank c_bank
  output logic [2:0]          c_bank,
  output bank_req_t           c_breq,
  input  logic [7:0][CW-1:0]  c_rdata,
  // NTT constants RAM
  output logic                k_en,
  output logic                k_we,
  output logic [CONST_AW-1:0] k_addr,
  output logic [CW-1:0]       k_wdata,
  input  logic [CW-1:0]       k_rdata,
  // instruction memory
  output logic                i_en,
  output logic                i_we,
  output logic [IMEM_AW-1:0]  i_addr,
  output logic [31:0]         i_wdata,
  input  logic [31:0]         i_rdata,
  // Keccak seed registers and state
  output logic                seed_we,
  output logic [5:0]          seed_addr,
  output logic [31:0]         seed_wdata,
  input  logic [31:0]         st_rdata,
  output logic                sha3_sel,
  // control
  output logic                start
);

  typedef enum logic [2:0] {R_CACHE, R_CONST, R_IMEM, R_SHA3, R_CTRL, R_NONE} region_e;

  region_e region, rd_region;
  logic    acc, mem_ok;
  logic [2:0]  rd_bank;
  logic [31:0] st_q;

  always_comb begin
    unique casez (addr[15:12])
      4'b000?: region = R_CACHE;
      4'b001?: region = R_CONST;
      4'b0100: region = R_IMEM;
      4'b0101: region = R_SHA3;
      4'b0110: region = R_CTRL;
      default: region = R_NONE;
    endcase
    acc    = wen || ren;
    mem_ok = acc && !proc_busy;

    c_req        = mem_ok && region == R_CACHE;
    c_bank       = addr[12:10];
    c_breq.en    = c_req;
    c_breq.we    = wen;
    c_breq.addr  = addr[9:0];
    c_breq.wdata = wdata[CW-1:0];

    k_en    = mem_ok && region == R_CONST;
    k_we    = wen;
    k_addr  = addr[CONST_AW-1:0];
    k_wdata = wdata[CW-1:0];

    i_en    = mem_ok && region == R_IMEM;
    i_we    = wen;
    i_addr  = addr[IMEM_AW-1:0];
    i_wdata = wdata;

    sha3_sel   = mem_ok && region == R_SHA3;
    seed_we    = sha3_sel && wen;
    seed_addr  = addr[5:0];
    seed_wdata = wdata;

    start = wen && region == R_CTRL && wdata[0] && !proc_busy;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_region <= R_NONE;
      rd_bank   <= '0;
      st_q      <= '0;
    end else if (ren) begin
      rd_region <= (region == R_CTRL || mem_ok) ? region : R_NONE;
      rd_bank   <= addr[12:10];
      st_q      <= st_rdata;
    end
  end

  always_comb begin
    unique case (rd_region)
      R_CACHE: rdata = 32'(c_rdata[rd_bank]);
      R_CONST: rdata = 32'(k_rdata);
      R_IMEM:  rdata = i_rdata;
      R_SHA3:  rdata = st_q;
      R_CTRL:  rdata = {30'b0, proc_int, proc_busy};
      default: rdata = '0;
    endcase
  end

endmodule
