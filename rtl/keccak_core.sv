// Keccak-f[1600] core: the full 1600-bit state is held in one register and
// one complete round is applied per clock, so a permutation takes 24 cycles.
//
// Interface: `load` writes `state_i` into the state register (the sponge
// logic around the core uses it to absorb seed data); `start` begins a
// permutation, round 0 is applied at the clock edge that samples `start` and rounds
// 1..23 on the next 23 edges, so `done` pulses 24 cycles after `start`,
// together with the result on `state_o`; `busy` covers rounds 1..23.
// A `start` while busy is ignored. The round-per-cycle parallel structure and
// the 24-cycle latency follow the source; the load/start handshake is this
// design's own.
module keccak_core (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          load,
  input  logic [1599:0] state_i,
  input  logic          start,
  output logic          busy,
  output logic          done,
  output logic [1599:0] state_o
);

  logic [1599:0] st, st_next;
  logic [4:0]    rnd;

  keccak_round u_round (.state_i(st), .rnd(rnd), .state_o(st_next));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st   <= '0;
      rnd  <= '0;
      busy <= 1'b0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (busy) begin
        st <= st_next;
        if (rnd == 5'd23) begin
          busy <= 1'b0;
          done <= 1'b1;
          rnd  <= '0;
        end else begin
          rnd <= rnd + 5'd1;
        end
      end else if (load) begin
        st <= state_i;
      end else if (start) begin
        // round 0 is applied at the start edge itself
        st   <= st_next;
        busy <= 1'b1;
        rnd  <= 5'd1;
      end
    end
  end

  assign state_o = st;

endmodule
