// aes_key_expand: iterative AES key schedule (FIPS-197 KeyExpansion).
//
// A pulse on start loads the cipher key; one 32-bit schedule word is then
// produced per clock, so all NW = 4*(NR+1) words are ready NW-NK cycles
// later (40 cycles for a 128-bit key, 52 for a 256-bit key), when done
// pulses and round_keys holds the expanded schedule. The schedule stays
// in registers until the next start or clear, which is how the key
// registers of the trusted footprint hold the XTS keys. clear zeroes the
// schedule (key erasure).
//
// The paper asks only for standard AES with 128- or 256-bit keys; the
// one-word-per-cycle schedule and the stored round keys are this
// design's choice.
module aes_key_expand
  import aes_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,
  input  logic               start,
  input  logic [KEY_BITS-1:0] key,
  output logic               busy,
  output logic               done,
  output round_keys_t        round_keys
);

  logic [31:0] w [NW];
  logic [$clog2(NW+1)-1:0] idx;
  logic [7:0]  rcon;
  logic [31:0] prev, nxt;

  assign prev = w[idx - 1];

  always_comb begin
    logic [31:0] t;
    t = prev;
    if (idx % NK == 0)
      t = sub_word({prev[23:0], prev[31:24]}) ^ {rcon, 24'h0};
    else if (NK > 6 && idx % NK == 4)
      t = sub_word(prev);
    nxt = w[idx - NK] ^ t;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NW; i++) w[i] <= '0;
      idx  <= '0;
      rcon <= 8'h01;
      busy <= 1'b0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (clear) begin
        for (int i = 0; i < NW; i++) w[i] <= '0;
        busy <= 1'b0;
      end else if (start) begin
        for (int i = 0; i < NK; i++) w[i] <= key[KEY_BITS - 1 - 32*i -: 32];
        idx  <= NK[$bits(idx)-1:0];
        rcon <= 8'h01;
        busy <= 1'b1;
      end else if (busy) begin
        w[idx] <= nxt;
        if (idx % NK == 0) rcon <= xtime(rcon);
        if (idx == NW[$bits(idx)-1:0] - 1'b1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
        idx <= idx + 1'b1;
      end
    end
  end

  always_comb
    for (int r = 0; r <= NR; r++)
      round_keys[r] = {w[4*r], w[4*r+1], w[4*r+2], w[4*r+3]};

endmodule
