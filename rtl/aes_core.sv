// aes_core: iterative AES block cipher, encryption or decryption, two
// clock cycles per round.
//
// The paper sizes its engine on standard AES with 10 rounds for a 128-bit
// key, each round done in under two cycles, for 20 cycles per block
// (Fig. 9 shows a 20-cycle DEC stage). This core splits every round into
// two register stages: phase A applies SubBytes+ShiftRows (decryption:
// InvShiftRows+InvSubBytes), phase B MixColumns and AddRoundKey
// (decryption: AddRoundKey then InvMixColumns); the last round skips the
// column mixing. The first AddRoundKey is folded into the load.
//
// Timing: start (with block_in and decrypt) is sampled on a clock edge;
// done pulses and block_out is valid 2*NR cycles later (20 for AES-128)
// and block_out holds until the next start. busy is high in between; a
// start while busy is ignored. round_keys is the expanded key schedule and
// must be stable while busy.
module aes_core
  import aes_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        decrypt,
  input  block_t      block_in,
  input  round_keys_t round_keys,
  output logic        busy,
  output logic        done,
  output block_t      block_out
);

  block_t st;
  logic   dec;
  logic   phase;                        // 0: phase A next, 1: phase B next
  logic [$clog2(NR+1)-1:0] rnd;         // round being computed, 1..NR

  block_t a_out, b_out, rk;

  assign rk = dec ? round_keys[NR - rnd] : round_keys[rnd];

  always_comb begin
    a_out = dec ? inv_shift_sub(st) : sub_shift(st);
    if (dec) b_out = (rnd == NR[$bits(rnd)-1:0]) ? (st ^ rk) : inv_mix_columns(st ^ rk);
    else     b_out = ((rnd == NR[$bits(rnd)-1:0]) ? st : mix_columns(st)) ^ rk;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st    <= '0;
      dec   <= 1'b0;
      phase <= 1'b0;
      rnd   <= '0;
      busy  <= 1'b0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          st    <= block_in ^ (decrypt ? round_keys[NR] : round_keys[0]);
          dec   <= decrypt;
          phase <= 1'b0;
          rnd   <= 1;
          busy  <= 1'b1;
        end
      end else if (!phase) begin
        st    <= a_out;
        phase <= 1'b1;
      end else begin
        st    <= b_out;
        phase <= 1'b0;
        if (rnd == NR[$bits(rnd)-1:0]) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          rnd <= rnd + 1'b1;
        end
      end
    end
  end

  assign block_out = st;

endmodule
