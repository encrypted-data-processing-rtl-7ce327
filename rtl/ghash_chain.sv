// ghash_chain: the line digest of the paper's Fig. 11 (bottom half), an
// AES-GCM style authenticator over the eight ciphertext sections.
//
// Function: Y = X*H; then Y = (Y ^ C_i)*H for i = 0..7; finally
// D = Y ^ E_K2(X), of which the leading 64 bits are the 8-byte digest.
// X is the tweak <SEID, EA>, H = E_K2(0) is the hash key, E_K2(X) is the
// encrypted tweak that XTS also uses (input mask). The chain, the inputs
// and the 8-byte length are the paper's; doing one GF(2^128)
// multiplication per clock and truncating to the leading bits are this
// design's choices.
//
// Timing: start samples x, h, mask and the ciphertext line and performs
// the first multiplication (X*H); the other eight follow one per cycle,
// so done pulses 8 cycles after start with digest valid (held until the
// next start).
module ghash_chain
  import edap_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    start,
  input  blk_t    x,
  input  blk_t    h,
  input  blk_t    mask,
  input  line_t   ctext,
  output logic    busy,
  output logic    done,
  output digest_t digest
);

  blk_t  y, hk, msk, prod_in;
  line_t c;
  logic [$clog2(SECTIONS+1)-1:0] cnt;

  assign prod_in = y ^ section(c, int'(cnt));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y <= '0; hk <= '0; msk <= '0; c <= '0;
      cnt <= '0; busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        y    <= gf128_mul(x, h);
        hk   <= h;
        msk  <= mask;
        c    <= ctext;
        cnt  <= '0;
        busy <= 1'b1;
      end else if (busy) begin
        y <= gf128_mul(prod_in, hk);
        if (cnt == SECTIONS[$bits(cnt)-1:0] - 1'b1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
        cnt <= cnt + 1'b1;
      end
    end
  end

  assign digest = (y ^ msk) >> 64;

endmodule
