// Discrete distribution sampler: turns the 32-bit pseudo-random stream of
// the SHA-3 PRNG into N polynomial coefficients.
//
// On `start` it consumes PRNG words (valid/ready) and produces coefficients
// with index 0..N-1 on (`cw_valid`, `cw_index`, `cw_data`), one cycle after
// the word that completed them, until N have been produced; `done` then
// pulses. Uniform mode: each word is ANDed with a (2^w - 1) bit mask and
// passed through the rejection sampler, rejected words produce nothing.
// Binomial mode: chunk a = word & mask_k and b = (word >> k) & mask_k when
// 2k <= 32, otherwise a and b come from two consecutive words. The bit mask,
// the two samplers and the output multiplexer follow the source; the
// chunking of words into a and b and the stream interface are this design's.
module dist_sampler
  import lwe_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic            binomial,   // 0: uniform (rejection), 1: binomial
  input  logic [3:0]      logn,
  input  logic [CW-1:0]   q,
  input  logic [MU_W-1:0] mu,
  input  logic [4:0]      s,
  input  logic [5:0]      k,          // binomial chunk width, 1..32
  input  logic [5:0]      wmask,      // rejection mask width, 1..32
  input  logic [MU_W-1:0] bound,
  output logic            busy,
  output logic            done,
  output logic            prng_req,   // squeeze enable for the PRNG
  input  logic            rnd_valid,
  output logic            rnd_ready,
  input  logic [31:0]     rnd_data,
  output logic            cw_valid,
  output logic [11:0]     cw_index,
  output logic [CW-1:0]   cw_data
);

  logic [31:0]   mask_u, mask_k, masked;
  logic          rej_accept;
  logic [CW-1:0] rej_val, bin_val;
  logic [31:0]   chunk_a, chunk_b, first_word;
  logic          half;        // first of two words already taken (k > 16)
  logic          two_words;
  logic [12:0]   count;
  logic [12:0]   n;

  assign n         = 13'd1 << logn;
  assign mask_u    = (wmask >= 6'd32) ? '1 : ((32'd1 << wmask) - 32'd1);
  assign mask_k    = (k >= 6'd32) ? '1 : ((32'd1 << k) - 32'd1);
  assign two_words = (k > 6'd16);
  assign masked    = rnd_data & mask_u;          // the bit-mask AND
  assign rnd_ready = busy;
  assign prng_req  = busy;

  always_comb begin
    if (two_words) begin
      chunk_a = first_word & mask_k;
      chunk_b = rnd_data & mask_k;
    end else begin
      chunk_a = rnd_data & mask_k;
      chunk_b = (rnd_data >> k) & mask_k;
    end
  end

  rejection_sampler u_rej (.x(masked), .bound(bound), .q(q), .mu(mu), .s(s),
                           .accept(rej_accept), .sample(rej_val));
  binomial_sampler  u_bin (.a(chunk_a), .b(chunk_b), .q(q), .sample(bin_val));

  logic take, produce;
  assign take    = busy && rnd_valid;
  assign produce = take && (binomial ? (!two_words || half) : rej_accept);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy       <= 1'b0;
      done       <= 1'b0;
      half       <= 1'b0;
      first_word <= '0;
      count      <= '0;
      cw_valid   <= 1'b0;
      cw_index   <= '0;
      cw_data    <= '0;
    end else begin
      done     <= 1'b0;
      cw_valid <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy  <= 1'b1;
          half  <= 1'b0;
          count <= '0;
        end
      end else if (take) begin
        if (binomial && two_words) begin
          half       <= !half;
          first_word <= rnd_data;
        end
        if (produce) begin
          cw_valid <= 1'b1;
          cw_index <= count[11:0];
          cw_data  <= binomial ? bin_val : rej_val;
          count    <= count + 13'd1;
          if (count + 13'd1 == n) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end

endmodule
