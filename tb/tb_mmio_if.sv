// Testbench for mmio_if: drives host reads and writes to every region and
// checks the decoded memory strobes and addresses, the read-data multiplexer
// (with testbench values standing in for the memories), the start strobe,
// the status word and that memory accesses are blocked while busy.
module tb_mmio_if;
  import lwe_pkg::*;
  logic clk = 0, rst_n = 1;
  logic [15:0] addr;
  logic [31:0] wdata, rdata;
  logic wen, ren, proc_busy, proc_int;
  logic c_req, k_en, k_we, i_en, i_we, seed_we, sha3_sel, start;
  logic [2:0] c_bank;
  bank_req_t c_breq;
  logic [7:0][CW-1:0] c_rdata;
  logic [CONST_AW-1:0] k_addr;
  logic [CW-1:0] k_wdata, k_rdata;
  logic [IMEM_AW-1:0] i_addr;
  logic [31:0] i_wdata, i_rdata, seed_wdata, st_rdata;
  logic [5:0] seed_addr;
  int checks = 0, failures = 0;

  mmio_if dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic rd(input logic [15:0] a, output logic [31:0] d);
    @(negedge clk); addr = a; ren = 1; wen = 0; #1;
    @(negedge clk); ren = 0; #1; d = rdata;
  endtask

  initial begin
    logic [31:0] d;
    addr = 0; wdata = 0; wen = 0; ren = 0; proc_busy = 0; proc_int = 0;
    for (int b = 0; b < 8; b++) c_rdata[b] = CW'(24'h100000 + b);
    k_rdata = 24'h0ABCDE; i_rdata = 32'hDEADBEEF; st_rdata = 32'h12345678;
    rst_n = 0; @(negedge clk); rst_n = 1;
    // cache write to R2 (side 1, upper, even) word 5
    @(negedge clk); addr = 16'h1805; wdata = 32'h00FEDCBA; wen = 1; #1;
    chk(c_req && c_bank == 3'd6 && c_breq.en && c_breq.we && c_breq.addr == 10'd5 && c_breq.wdata == 24'hFEDCBA, "cache write decode");
    chk(!k_en && !i_en && !seed_we && !start, "only the cache selected");
    // constants write
    addr = 16'h2000 + 16'd4000; wdata = 32'h000777; #1;
    chk(k_en && k_we && k_addr == 13'd4000 && k_wdata == 24'h777 && !c_req, "constants write decode");
    // instruction write
    addr = 16'h40FF; wdata = 32'hCAFEF00D; #1;
    chk(i_en && i_we && i_addr == 8'hFF && i_wdata == 32'hCAFEF00D, "imem write decode");
    // seed write
    addr = 16'h5031; wdata = 32'h0BADCAFE; #1;
    chk(seed_we && seed_addr == 6'd49 && seed_wdata == 32'h0BADCAFE && sha3_sel, "seed write decode");
    // start
    addr = 16'h6000; wdata = 32'h1; #1;
    chk(start, "start strobe");
    @(negedge clk); wen = 0;
    // reads, one cycle latency
    rd(16'h0C00, d); chk(d == 32'h100003, "read cache bank L3");
    rd(16'h1400, d); chk(d == 32'h100005, "read cache bank R1");
    rd(16'h2001, d); chk(d == 32'h0ABCDE, "read constants");
    rd(16'h4001, d); chk(d == 32'hDEADBEEF, "read imem");
    rd(16'h5003, d); chk(d == 32'h12345678, "read Keccak state");
    proc_int = 1;
    rd(16'h6000, d); chk(d == 32'h2, "status int");
    // busy: memory accesses blocked, status still readable, no start
    proc_busy = 1;
    @(negedge clk); addr = 16'h0001; wen = 1; wdata = 1; #1;
    chk(!c_req, "cache blocked while busy");
    addr = 16'h6000; #1;
    chk(!start, "no start while busy");
    @(negedge clk); wen = 0;
    rd(16'h6000, d); chk(d == 32'h3, "status busy");
    rd(16'h2001, d); chk(d == 32'h0, "blocked read returns 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
