// edap_key_store: the key registers of the trusted footprint and the
// sequencer that installs a session's keys into them.
//
// The paper's root of trust holds registers for the SEID and the program
// encryption key K = <K1, K2>, and a small controller inside the core that
// installs them. In this design the controller is a sequencer: an install
// request carries the SEID and the two XTS keys as recovered by the
// processor's private-key unit (which is outside this block); the
// sequencer expands K1 and K2 into round-key registers (in parallel,
// NW-NK cycles), then derives the GCM hash key H = E_K2(0) with one AES
// pass (2*NR cycles), and raises keys_ready. With 128-bit keys that is
// 40 + 1 + 20 = 61 cycles from install to keys_ready.
//
// Nothing here can be read back by software: the key material goes only
// to the encryption engine. zeroize erases all of it and drops
// keys_ready (end of a session). An install while busy is ignored.
//
// From the paper: which registers exist, the SEID width (64 bits), the
// 128- or 256-bit XTS keys, H = E_K2(0). This design's choices: the
// install interface, storing expanded round keys rather than the raw key,
// and erasure on zeroize.
module edap_key_store
  import aes_pkg::*;
  import edap_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                install,
  input  seid_t               in_seid,
  input  logic [KEY_BITS-1:0] in_k1,
  input  logic [KEY_BITS-1:0] in_k2,
  input  logic                zeroize,
  output logic                busy,
  output logic                keys_ready,
  output seid_t               seid,
  output round_keys_t         rk1,
  output round_keys_t         rk2,
  output blk_t                hkey
);

  typedef enum logic [1:0] {K_IDLE, K_EXPAND, K_HASH} ks_st_e;
  ks_st_e st;

  logic   x1_busy, x1_done, x2_busy, x2_done;
  logic   x1_seen, x2_seen;
  logic   h_start, h_busy, h_done;
  blk_t   h_out;
  logic   go;

  assign go = install && st == K_IDLE && !zeroize;

  aes_key_expand u_k1 (.clk, .rst_n, .clear(zeroize), .start(go), .key(in_k1),
                       .busy(x1_busy), .done(x1_done), .round_keys(rk1));
  aes_key_expand u_k2 (.clk, .rst_n, .clear(zeroize), .start(go), .key(in_k2),
                       .busy(x2_busy), .done(x2_done), .round_keys(rk2));

  assign h_start = (st == K_EXPAND) && (x1_seen || x1_done) && (x2_seen || x2_done);

  aes_core u_h (.clk, .rst_n, .start(h_start), .decrypt(1'b0), .block_in('0),
                .round_keys(rk2), .busy(h_busy), .done(h_done), .block_out(h_out));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= K_IDLE; seid <= '0; hkey <= '0; keys_ready <= 1'b0;
      x1_seen <= 1'b0; x2_seen <= 1'b0;
    end else if (zeroize) begin
      st <= K_IDLE; seid <= '0; hkey <= '0; keys_ready <= 1'b0;
      x1_seen <= 1'b0; x2_seen <= 1'b0;
    end else begin
      unique case (st)
        K_IDLE: if (install) begin
          seid <= in_seid;
          keys_ready <= 1'b0;
          x1_seen <= 1'b0; x2_seen <= 1'b0;
          st <= K_EXPAND;
        end
        K_EXPAND: begin
          if (x1_done) x1_seen <= 1'b1;
          if (x2_done) x2_seen <= 1'b1;
          if (h_start) st <= K_HASH;
        end
        K_HASH: if (h_done) begin
          hkey <= h_out;
          keys_ready <= 1'b1;
          st <= K_IDLE;
        end
        default: st <= K_IDLE;
      endcase
    end
  end

  assign busy = (st != K_IDLE) || x1_busy || x2_busy || h_busy;

endmodule
