// Instruction decode and control. Fetches 32-bit instructions from the
// instruction memory, keeps the configuration registers (modulus q, its
// Barrett factor, log2 N, sampler parameters, SHA-3 mode, constant-table
// base, clock-gate settings) and runs one operation of one unit at a time:
// polynomial engine (NTT, INTT, PMUL, PADD, PSUB), Keccak sponge (ABSORB)
// or sampler (SAMPU, SAMPB, which also runs the PRNG in squeeze mode).
//
// Timing: a configuration instruction takes 2 cycles (fetch, decode); a
// unit operation issues a one-cycle start pulse and waits for the unit's
// done pulse (for ABSORB, for the sponge to go idle). HALT stops the program
// and raises `int_o`, which stays high until the next `start`. The `act_*`
// outputs tell the clock gates which blocks the current operation needs.
// The source gives the instruction memory and says that it holds custom
// instructions; the instruction set and this sequencing are this design's.
module controller
  import lwe_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  output logic               busy,
  output logic               int_o,
  // instruction memory
  output logic               im_en,
  output logic [IMEM_AW-1:0] im_addr,
  input  logic [31:0]        im_rdata,
  // configuration
  output logic [CW-1:0]      q,
  output logic [MU_W-1:0]    mu,
  output logic [4:0]         s,
  output logic [3:0]         logn,
  output logic [5:0]         k,
  output logic [5:0]         wmask,
  output logic [MU_W-1:0]    bound,
  output logic [CONST_AW-1:0] tbl_base,
  output sha3_mode_e         mode,
  output logic [2:0]         clk_cfg,   // {samp, sha3, ntt} forced on
  // polynomial engine
  output logic               pe_start,
  output pe_op_e             pe_op,
  output logic               side_a,
  output logic [5:0]         base_a,
  output logic [5:0]         base_b,
  output logic               side_c,
  output logic [5:0]         base_c,
  input  logic               pe_done,
  // Keccak sponge
  output logic               absorb,
  output logic               absorb_init,
  input  logic               prng_busy,
  // sampler
  output logic               samp_start,
  output logic               samp_binomial,
  input  logic               samp_done,
  // activity, for the clock gates
  output logic               act_ntt,
  output logic               act_sha3,
  output logic               act_samp
);

  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_DECODE, S_WAIT_PE, S_WAIT_SAMP,
                            S_ABS_ISSUE, S_ABS_WAIT} state_e;

  state_e             st;
  logic [IMEM_AW-1:0] pc;
  logic [1:0]         settle;
  opcode_e            opc;
  logic [26:0]        imm;

  assign opc     = opcode_e'(im_rdata[31:27]);
  assign imm     = im_rdata[26:0];
  assign im_en   = (st == S_FETCH);
  assign im_addr = pc;
  assign busy    = (st != S_IDLE);
  assign s       = bitlen(q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st            <= S_IDLE;
      pc            <= '0;
      settle        <= '0;
      int_o         <= 1'b0;
      q             <= CW'(12289);
      mu            <= '0;
      logn          <= 4'd8;
      k             <= 6'd16;
      wmask         <= 6'd16;
      bound         <= '0;
      tbl_base      <= '0;
      mode          <= M_SHAKE128;
      clk_cfg       <= 3'b000;
      pe_start      <= 1'b0;
      pe_op         <= PE_NTT;
      side_a        <= 1'b0;
      base_a        <= '0;
      base_b        <= '0;
      side_c        <= 1'b0;
      base_c        <= '0;
      absorb        <= 1'b0;
      absorb_init   <= 1'b0;
      samp_start    <= 1'b0;
      samp_binomial <= 1'b0;
      act_ntt       <= 1'b0;
      act_sha3      <= 1'b0;
      act_samp      <= 1'b0;
    end else begin
      pe_start   <= 1'b0;
      samp_start <= 1'b0;
      absorb     <= 1'b0;
      unique case (st)
        S_IDLE: begin
          if (start) begin
            pc    <= '0;
            int_o <= 1'b0;
            st    <= S_FETCH;
          end
        end
        S_FETCH: st <= S_DECODE;
        S_DECODE: begin
          pc <= pc + 1'b1;
          st <= S_FETCH;
          unique case (opc)
            OP_HALT:   begin int_o <= 1'b1; st <= S_IDLE; end
            OP_SETQ:   q        <= imm[CW-1:0];
            OP_SETMU:  mu       <= imm[MU_W-1:0];
            OP_SETN:   logn     <= imm[3:0];
            OP_SETK:   k        <= imm[5:0];
            OP_SETW:   wmask    <= imm[5:0];
            OP_SETBND: bound    <= imm[MU_W-1:0];
            OP_SETTB:  tbl_base <= imm[CONST_AW-1:0];
            OP_SETCLK: clk_cfg  <= imm[2:0];
            OP_MODE:   mode     <= sha3_mode_e'(imm[1:0]);
            OP_ABSORB: begin
              absorb_init <= imm[0];
              act_sha3    <= 1'b1;
              st          <= S_ABS_ISSUE;
            end
            OP_SAMPU, OP_SAMPB: begin
              samp_binomial <= (opc == OP_SAMPB);
              side_a        <= imm[26];
              base_a        <= imm[5:0];
              samp_start    <= 1'b1;
              act_samp      <= 1'b1;
              act_sha3      <= 1'b1;
              act_ntt       <= 1'b1;
              st            <= S_WAIT_SAMP;
            end
            OP_NTT, OP_INTT, OP_PMUL, OP_PADD, OP_PSUB: begin
              unique case (opc)
                OP_NTT:  pe_op <= PE_NTT;
                OP_INTT: pe_op <= PE_INTT;
                OP_PMUL: pe_op <= PE_PMUL;
                OP_PADD: pe_op <= PE_PADD;
                default: pe_op <= PE_PSUB;
              endcase
              side_a   <= imm[26];
              base_a   <= imm[5:0];
              base_b   <= imm[11:6];
              side_c   <= imm[18];
              base_c   <= imm[17:12];
              pe_start <= 1'b1;
              act_ntt  <= 1'b1;
              st       <= S_WAIT_PE;
            end
            default: ;  // NOP and unused opcodes
          endcase
        end
        S_WAIT_PE: begin
          if (pe_done) begin
            act_ntt <= 1'b0;
            st      <= S_FETCH;
          end
        end
        S_WAIT_SAMP: begin
          if (samp_done) settle <= 2'd1;
          // one more cycle so that the last coefficient is written
          if (settle == 2'd1) begin
            settle   <= '0;
            act_samp <= 1'b0;
            act_ntt  <= 1'b0;
            st       <= S_ABS_WAIT;   // let the sponge settle too
          end
        end
        S_ABS_ISSUE: begin
          if (!prng_busy && settle == 2'd0) begin
            absorb <= 1'b1;
            settle <= 2'd2;
          end else if (settle != 2'd0) begin
            settle <= settle - 2'd1;
            if (settle == 2'd1) st <= S_ABS_WAIT;
          end
        end
        S_ABS_WAIT: begin
          if (!prng_busy && !absorb) begin
            act_sha3 <= 1'b0;
            st       <= S_FETCH;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
