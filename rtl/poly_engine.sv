// Polynomial engine: sequences the single butterfly of the modular
// arithmetic unit over the single-port banks of the polynomial cache to
// compute the negative-wrapped NTT, its inverse and coefficient-wise
// multiplication, addition and subtraction.
//
// The NTT is the constant-geometry form: every stage reads coefficients at the
// same positions and writes them at the same positions, and the data
// ping-pong between the two sides of the cache, one stage reading one side
// and writing the other. With coefficient i stored in bank {i >= N/2, i[0]}
// every cycle touches two banks of the source side and two different banks
// of the destination side, so one butterfly per cycle runs on single-port
// RAMs without conflicts.
//   NTT  (forward, Gentleman-Sande form, natural in -> bit-reversed out):
//        pass 0 multiplies a[i] by psi^i; stage s = 0..L-1 (L = log2 N) reads
//        (j, j+N/2) and writes (2j, 2j+1) = (u+v, (u-v)*omega^e),
//        e = (j >> s) << s.
//   INTT (inverse, Cooley-Tukey form, bit-reversed in -> natural out):
//        stage s reads (2j, 2j+1) and writes (j, j+N/2) = (u+v*w, u-v*w),
//        w = omega^-e, e = (j >> t) << t, t = L-1-s; a last pass multiplies
//        by N^-1 psi^-i.
//   PMUL/PADD/PSUB: c[i] = a[i] op b[i]; a and b must be on opposite sides,
//        c may be on either side and may overwrite a or b.
// Each of the L+1 passes of a transform alternates sides, starting from
// (side_a, base_a) and using (!side_a, base_b) as the other buffer; the
// result is on !side_a at base_b when L+1 is odd and back at (side_a,
// base_a) when it is even.
// Timing: a pass issues one butterfly (or one coefficient) per cycle, reads
// the RAMs in that cycle and writes the results in the next; each pass ends
// with one drain cycle, except the psi pass, whose last write cannot collide
// with the first reads of stage 0. A forward NTT of length N therefore
// takes N + L (N/2 + 1) cycles from the edge that samples `start` to the
// edge that raises `done` (1288 for N = 256), an inverse NTT
// L (N/2 + 1) + N + 1 and a coefficient-wise operation N + 1.
// `busy` is high from the cycle after `start` until `done`.
// The constant geometry, the ping-pong, the bank split and the single
// unified butterfly follow the source; the pass schedule, the twiddle
// addressing and the command interface are this design's.
module poly_engine
  import lwe_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  pe_op_e              op,
  input  logic [3:0]          logn,
  input  logic                side_a,
  input  logic [5:0]          base_a,
  input  logic [5:0]          base_b,
  input  logic                side_c,
  input  logic [5:0]          base_c,
  input  logic [CONST_AW-1:0] tbl_base,
  input  logic [CW-1:0]       q,
  input  logic [MU_W-1:0]     mu,
  input  logic [4:0]          s,
  output logic                busy,
  output logic                done,
  // polynomial cache banks
  output bank_req_t [7:0]     breq,
  input  logic [7:0][CW-1:0]  brdata,
  // NTT constants RAM (read only)
  output logic                c_en,
  output logic [CONST_AW-1:0] c_addr,
  input  logic [CW-1:0]       c_rdata
);

  typedef enum logic [2:0] {K_PSI, K_GS, K_CT, K_POST, K_PW} kind_e;

  // command registers
  pe_op_e     op_r;
  logic [3:0] logn_r;
  logic       side_a_r, side_c_r;
  logic [5:0] base_a_r, base_b_r, base_c_r;
  logic [CONST_AW-1:0] tbl_r;

  logic [3:0]  pass;       // current pass
  logic [11:0] j;          // item within the pass
  logic        drain;      // drain cycle at the end of a pass

  logic [12:0] n;
  logic [11:0] nh, nq;     // N/2, N/4
  logic [3:0]  npass;
  logic [12:0] items;
  kind_e       kind;
  logic [3:0]  stage;
  logic        src_side, dst_side;
  logic [BANK_AW-1:0] src_base, dst_base;

  assign n  = 13'd1 << logn_r;
  assign nh = 12'(n >> 1);
  assign nq = 12'(n >> 2);

  always_comb begin
    npass = (op_r == PE_NTT || op_r == PE_INTT) ? logn_r + 4'd1 : 4'd1;
    unique case (op_r)
      PE_NTT:  begin kind = (pass == 4'd0) ? K_PSI : K_GS;    stage = pass - 4'd1; end
      PE_INTT: begin kind = (pass == logn_r) ? K_POST : K_CT; stage = pass;        end
      default: begin kind = K_PW;                             stage = '0;          end
    endcase
    items    = (kind == K_GS || kind == K_CT) ? {1'b0, nh} : n;
    src_side = side_a_r ^ pass[0];
    dst_side = ~src_side;
    src_base = pass[0] ? {base_b_r, 4'b0} : {base_a_r, 4'b0};
    dst_base = pass[0] ? {base_a_r, 4'b0} : {base_b_r, 4'b0};
  end

  // ---------------------------------------------------------------------
  // issue stage: read addresses for item j
  // ---------------------------------------------------------------------
  typedef struct packed {
    logic               valid;
    ma_op_e             op;
    logic [2:0]         u_bank, v_bank, w_bank;
    logic               w_const;   // w from the constants RAM, else from w_bank
    logic               neg;       // negate the constant
    logic [2:0]         d0_bank, d1_bank;
    logic [BANK_AW-1:0] d0_addr, d1_addr;
    logic               d1_we;
  } pipe_t;

  pipe_t              iss, pr;
  logic [7:0]         rd_en;
  logic [7:0][BANK_AW-1:0] rd_addr;
  logic               issuing;

  function automatic logic [2:0] bk(input logic side, input logic [11:0] i, input logic [11:0] half);
    bk = {side, i >= half, i[0]};
  endfunction

  always_comb begin
    logic [11:0]        e;
    logic [BANK_AW-1:0] offw, jq;
    logic [3:0]         t;
    issuing = busy && !drain;
    iss     = '0;
    rd_en   = '0;
    rd_addr = '0;
    c_en    = 1'b0;
    c_addr  = '0;
    offw    = BANK_AW'((j & (nh - 12'd1)) >> 1);
    jq      = BANK_AW'(j & (nq - 12'd1));
    e       = '0;
    t       = '0;
    if (issuing) begin
      iss.valid = 1'b1;
      unique case (kind)
        K_PSI, K_POST: begin
          iss.op      = MA_MUL;
          iss.v_bank  = bk(src_side, j, nh);
          iss.w_const = 1'b1;
          iss.d0_bank = bk(dst_side, j, nh);
          iss.d0_addr = dst_base + offw;
          rd_en[iss.v_bank]   = 1'b1;
          rd_addr[iss.v_bank] = src_base + offw;
          c_en   = 1'b1;
          c_addr = tbl_r + CONST_AW'(j) + ((kind == K_POST) ? CONST_AW'(n) : '0);
        end
        K_GS: begin
          iss.op      = MA_GS;
          iss.u_bank  = {src_side, 1'b0, j[0]};
          iss.v_bank  = {src_side, 1'b1, j[0]};
          iss.w_const = 1'b1;
          iss.d0_bank = {dst_side, j >= nq, 1'b0};
          iss.d1_bank = {dst_side, j >= nq, 1'b1};
          iss.d0_addr = dst_base + jq;
          iss.d1_addr = dst_base + jq;
          iss.d1_we   = 1'b1;
          rd_en[iss.u_bank]   = 1'b1;
          rd_en[iss.v_bank]   = 1'b1;
          rd_addr[iss.u_bank] = src_base + BANK_AW'(j >> 1);
          rd_addr[iss.v_bank] = src_base + BANK_AW'(j >> 1);
          e      = (j >> stage) << stage;
          c_en   = 1'b1;
          c_addr = tbl_r + CONST_AW'(e << 1);
        end
        K_CT: begin
          iss.op      = MA_CT;
          iss.u_bank  = {src_side, j >= nq, 1'b0};
          iss.v_bank  = {src_side, j >= nq, 1'b1};
          iss.w_const = 1'b1;
          iss.d0_bank = {dst_side, 1'b0, j[0]};
          iss.d1_bank = {dst_side, 1'b1, j[0]};
          iss.d0_addr = dst_base + BANK_AW'(j >> 1);
          iss.d1_addr = dst_base + BANK_AW'(j >> 1);
          iss.d1_we   = 1'b1;
          rd_en[iss.u_bank]   = 1'b1;
          rd_en[iss.v_bank]   = 1'b1;
          rd_addr[iss.u_bank] = src_base + jq;
          rd_addr[iss.v_bank] = src_base + jq;
          t      = logn_r - 4'd1 - stage;
          e      = (j >> t) << t;
          c_en   = 1'b1;
          iss.neg = (e != 12'd0);
          c_addr = tbl_r + ((e == 12'd0) ? '0 : CONST_AW'(n - 13'(e << 1)));
        end
        default: begin // K_PW
          iss.op      = (op_r == PE_PMUL) ? MA_MUL : (op_r == PE_PADD) ? MA_ADD : MA_SUB;
          iss.w_const = 1'b0;
          if (op_r == PE_PMUL) begin
            iss.v_bank = bk(side_a_r, j, nh);
            iss.w_bank = bk(~side_a_r, j, nh);
          end else begin
            iss.u_bank = bk(side_a_r, j, nh);
            iss.v_bank = bk(~side_a_r, j, nh);
          end
          iss.d0_bank = bk(side_c_r, j, nh);
          iss.d0_addr = {base_c_r, 4'b0} + offw;
          rd_en[bk(side_a_r, j, nh)]    = 1'b1;
          rd_en[bk(~side_a_r, j, nh)]   = 1'b1;
          rd_addr[bk(side_a_r, j, nh)]  = {base_a_r, 4'b0} + offw;
          rd_addr[bk(~side_a_r, j, nh)] = {base_b_r, 4'b0} + offw;
        end
      endcase
    end
  end

  // ---------------------------------------------------------------------
  // write stage: butterfly on the RAM outputs, write back
  // ---------------------------------------------------------------------
  logic [CW-1:0] u, v, w, o0, o1;

  always_comb begin
    u = brdata[pr.u_bank];
    v = brdata[pr.v_bank];
    if (pr.w_const) w = (pr.neg && c_rdata != '0) ? q - c_rdata : c_rdata;
    else            w = brdata[pr.w_bank];
  end

  mod_arith_unit u_mau (.op(pr.op), .u(u), .v(v), .w(w), .q(q), .mu(mu), .s(s),
                        .o0(o0), .o1(o1));

  always_comb begin
    for (int b = 0; b < 8; b++) begin
      breq[b].en    = rd_en[b];
      breq[b].we    = 1'b0;
      breq[b].addr  = rd_addr[b];
      breq[b].wdata = '0;
    end
    if (pr.valid) begin
      breq[pr.d0_bank].en    = 1'b1;
      breq[pr.d0_bank].we    = 1'b1;
      breq[pr.d0_bank].addr  = pr.d0_addr;
      breq[pr.d0_bank].wdata = o0;
      if (pr.d1_we) begin
        breq[pr.d1_bank].en    = 1'b1;
        breq[pr.d1_bank].we    = 1'b1;
        breq[pr.d1_bank].addr  = pr.d1_addr;
        breq[pr.d1_bank].wdata = o1;
      end
    end
  end

  // a write and a read never meet on one single-port bank
  always_ff @(posedge clk) begin
    if (pr.valid) begin
      assert (!rd_en[pr.d0_bank]) else $error("poly_engine: bank conflict on write port 0");
      assert (!(pr.d1_we && rd_en[pr.d1_bank])) else $error("poly_engine: bank conflict on write port 1");
    end
  end

  // ---------------------------------------------------------------------
  // sequencing
  // ---------------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      done     <= 1'b0;
      pass     <= '0;
      j        <= '0;
      drain    <= 1'b0;
      pr       <= '0;
      op_r     <= PE_NTT;
      logn_r   <= 4'd6;
      side_a_r <= 1'b0;
      side_c_r <= 1'b0;
      base_a_r <= '0;
      base_b_r <= '0;
      base_c_r <= '0;
      tbl_r    <= '0;
    end else begin
      done <= 1'b0;
      pr   <= iss;
      if (!busy) begin
        if (start) begin
          busy     <= 1'b1;
          op_r     <= op;
          logn_r   <= logn;
          side_a_r <= side_a;
          side_c_r <= side_c;
          base_a_r <= base_a;
          base_b_r <= base_b;
          base_c_r <= base_c;
          tbl_r    <= tbl_base;
          pass     <= '0;
          j        <= '0;
          drain    <= 1'b0;
        end
      end else if (drain) begin
        drain <= 1'b0;
        j     <= '0;
        if (pass + 4'd1 == npass) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          pass <= pass + 4'd1;
        end
      end else begin
        if (13'(j) + 13'd1 == items) begin
          // the psi pass's last write (bank {dst,1,1}) cannot collide with
          // the first reads of stage 0 (banks {.,0,0}, {.,1,0}): no drain
          if (kind == K_PSI) begin
            pass <= pass + 4'd1;
            j    <= '0;
          end else begin
            drain <= 1'b1;
          end
        end else begin
          j <= j + 12'd1;
        end
      end
    end
  end

endmodule
