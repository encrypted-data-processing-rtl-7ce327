// edap_crypto_engine: the data encryption engine placed between the L2 and
// the L1 caches (the "Data Decryption" and "Data Encryption" boxes of the
// paper's Fig. 10, the configuration its use case and its 6% result are
// about).
//
// Everything at and above the L2 holds ciphertext C plus an 8-byte digest
// D per 128-byte line; the L1 holds cleartext. When engaged:
//  * Fill (L2 -> L1): the tweak X = <SEID, EA> is encrypted while the L2 is
//    read; when the line arrives its eight sections are XTS-decrypted in
//    parallel (20 cycles for AES-128, the paper's decryption penalty) and,
//    alongside, the digest of the ciphertext is recomputed and compared
//    with the stored one. A mismatch (tampered data or digest, a line
//    moved to another effective address, wrong keys or SEID) is returned
//    as fill_resp_ok = 0 and pulses integrity_fail; no cleartext is handed
//    out then.
//  * Writeback (L1 -> L2): a dirty line is taken into a one-line buffer,
//    XTS-encrypted, its digest computed, and written to the L2. The L1 is
//    free as soon as the buffer takes the line, so the encryption is off
//    the critical path, as the paper assumes for stores.
// When disengaged (supervisor/hypervisor running), lines pass unchanged:
// fills return the raw ciphertext with ok = 1, writebacks store raw data
// with a zero digest, so privileged code only ever sees ciphertext.
// A writeback with wb_erase set stores an all-zero line and zero digest
// without encryption (a block released to other users).
//
// Interfaces (valid/ready; a request is taken in a cycle with both high):
//  fill: two clients, 0 = L1 data cache (priority), 1 = L1 instruction
//        cache; fill_resp_valid[c] pulses with fill_resp_data/ok.
//  wb:   one client (the data cache).
//  l2_rd: request with a real address; the L2 answers later with one
//        l2_rd_resp_valid pulse carrying the line and its digest. One read
//        is outstanding at a time.
//  l2_wr: line, digest and real address.
//  wb_busy: the writeback buffer still holds a line not yet in the L2.
// A fill whose line sits in the writeback buffer waits until the buffer
// has written it, so a fill never reads a stale line from the L2.
//
// From the paper: placement, XTS-AES with tweak <SEID, EA>, the 8-byte
// digest, the 20-cycle decryption, encryption in parallel with execution.
// This design's choices: the handshakes, where the digest is kept (a
// side field of each L2 line), the one-line writeback buffer, the raw
// pass-through when disengaged, and the fill priority.
module edap_crypto_engine
  import aes_pkg::*;
  import edap_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        engaged,
  input  seid_t       seid,
  input  round_keys_t rk1,
  input  round_keys_t rk2,
  input  blk_t        hkey,
  // fill clients
  input  logic [1:0]  fill_req_valid,
  output logic [1:0]  fill_req_ready,
  input  addr_t [1:0] fill_req_ea,
  input  addr_t [1:0] fill_req_ra,
  output logic [1:0]  fill_resp_valid,
  output line_t       fill_resp_data,
  output logic        fill_resp_ok,
  // writeback client
  input  logic        wb_valid,
  output logic        wb_ready,
  input  addr_t       wb_ea,
  input  addr_t       wb_ra,
  input  line_t       wb_data,
  input  logic        wb_erase,
  // L2 read port
  output logic        l2_rd_valid,
  input  logic        l2_rd_ready,
  output addr_t       l2_rd_ra,
  input  logic        l2_rd_resp_valid,
  input  line_t       l2_rd_resp_data,
  input  digest_t     l2_rd_resp_digest,
  // L2 write port
  output logic        l2_wr_valid,
  input  logic        l2_wr_ready,
  output addr_t       l2_wr_ra,
  output line_t       l2_wr_data,
  output digest_t     l2_wr_digest,
  // status
  output logic        integrity_fail,
  output logic        fill_hazard_stall,
  output logic        wb_busy
);

  // ---------------------------------------------------------------- fill
  typedef enum logic [2:0] {F_IDLE, F_REQ, F_WAIT, F_DEC, F_RAW} fill_st_e;
  fill_st_e fst;
  logic     fcli;                 // client being served
  addr_t    f_ea, f_ra;
  logic     f_eng;                // engaged when the fill was taken
  line_t    f_ct;
  digest_t  f_dig;
  logic     f_have_ct, f_hash_started;

  logic     d_t0_valid, d_busy, d_done;
  blk_t     d_t0;
  line_t    d_out;
  logic     dh_busy, dh_done;
  digest_t  dh_digest;
  logic     d_tweak_start, d_data_start, dh_start;

  // ----------------------------------------------------------- writeback
  typedef enum logic [2:0] {W_IDLE, W_ENC, W_HASH, W_WRITE} wb_st_e;
  wb_st_e   wst;
  addr_t    w_ea, w_ra;
  line_t    w_line;
  digest_t  w_dig;
  logic     e_t0_valid, e_busy, e_done;
  blk_t     e_t0;
  line_t    e_out;
  logic     eh_busy, eh_done;
  digest_t  eh_digest;
  logic     e_start, eh_start;

  // fill arbitration: data cache first
  logic       pick_valid, pick;
  logic       hazard;
  addr_t      pick_ra;
  assign pick       = fill_req_valid[0] ? 1'b0 : 1'b1;
  assign pick_valid = |fill_req_valid;
  assign pick_ra    = fill_req_ra[pick];
  assign hazard     = (wst != W_IDLE) &&
                      (w_ra[ADDR_BITS-1:OFFS_BITS] == pick_ra[ADDR_BITS-1:OFFS_BITS]);
  assign fill_hazard_stall = (fst == F_IDLE) && pick_valid && hazard;

  always_comb begin
    fill_req_ready = '0;
    if (fst == F_IDLE && pick_valid && !hazard) fill_req_ready[pick] = 1'b1;
  end

  assign d_tweak_start = (fst == F_IDLE) && pick_valid && !hazard && engaged;
  assign d_data_start  = (fst == F_WAIT) && l2_rd_resp_valid && f_eng;
  assign dh_start      = (fst == F_DEC) && f_have_ct && !f_hash_started && d_t0_valid;

  assign l2_rd_valid = (fst == F_REQ);
  assign l2_rd_ra    = {f_ra[ADDR_BITS-1:OFFS_BITS], {OFFS_BITS{1'b0}}};

  xts_line u_dec (
    .clk, .rst_n, .rk1, .rk2,
    .tweak_start(d_tweak_start), .x(make_tweak(seid, fill_req_ea[pick])),
    .data_start(d_data_start), .decrypt(1'b1), .din(l2_rd_resp_data),
    .t0_valid(d_t0_valid), .t0(d_t0), .busy(d_busy), .done(d_done), .dout(d_out)
  );

  ghash_chain u_dec_hash (
    .clk, .rst_n, .start(dh_start), .x(make_tweak(seid, f_ea)), .h(hkey), .mask(d_t0),
    .ctext(f_ct), .busy(dh_busy), .done(dh_done), .digest(dh_digest)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fst <= F_IDLE; fcli <= 1'b0; f_ea <= '0; f_ra <= '0; f_eng <= 1'b0;
      f_ct <= '0; f_dig <= '0; f_have_ct <= 1'b0; f_hash_started <= 1'b0;
    end else begin
      unique case (fst)
        F_IDLE: if (pick_valid && !hazard) begin
          fcli  <= pick;
          f_ea  <= fill_req_ea[pick];
          f_ra  <= fill_req_ra[pick];
          f_eng <= engaged;
          f_have_ct <= 1'b0;
          f_hash_started <= 1'b0;
          fst <= F_REQ;
        end
        F_REQ:  if (l2_rd_ready) fst <= F_WAIT;
        F_WAIT: if (l2_rd_resp_valid) begin
          f_ct  <= l2_rd_resp_data;
          f_dig <= l2_rd_resp_digest;
          f_have_ct <= 1'b1;
          fst <= f_eng ? F_DEC : F_RAW;
        end
        F_DEC: begin
          if (dh_start) f_hash_started <= 1'b1;
          // the hash (8 cycles) always ends before the 20-cycle decryption
          if (d_done) fst <= F_IDLE;
        end
        F_RAW:  fst <= F_IDLE;
        default: fst <= F_IDLE;
      endcase
    end
  end

  always_comb begin
    fill_resp_valid = '0;
    fill_resp_data  = '0;
    fill_resp_ok    = 1'b0;
    integrity_fail  = 1'b0;
    if (fst == F_DEC && d_done) begin
      fill_resp_valid[fcli] = 1'b1;
      fill_resp_ok   = (dh_digest == f_dig) && f_hash_started && !dh_busy;
      fill_resp_data = fill_resp_ok ? d_out : '0;
      integrity_fail = !fill_resp_ok;
    end else if (fst == F_RAW) begin
      fill_resp_valid[fcli] = 1'b1;
      fill_resp_ok   = 1'b1;
      fill_resp_data = f_ct;
    end
  end

  // ----------------------------------------------------------- writeback
  assign wb_ready = (wst == W_IDLE);
  assign wb_busy  = (wst != W_IDLE);
  assign e_start  = (wst == W_IDLE) && wb_valid && engaged && !wb_erase;
  assign eh_start = (wst == W_ENC) && e_done;

  xts_line u_enc (
    .clk, .rst_n, .rk1, .rk2,
    .tweak_start(e_start), .x(make_tweak(seid, wb_ea)),
    .data_start(e_start), .decrypt(1'b0), .din(wb_data),
    .t0_valid(e_t0_valid), .t0(e_t0), .busy(e_busy), .done(e_done), .dout(e_out)
  );

  ghash_chain u_enc_hash (
    .clk, .rst_n, .start(eh_start), .x(make_tweak(seid, w_ea)), .h(hkey), .mask(e_t0),
    .ctext(e_out), .busy(eh_busy), .done(eh_done), .digest(eh_digest)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wst <= W_IDLE; w_ea <= '0; w_ra <= '0; w_line <= '0; w_dig <= '0;
    end else begin
      unique case (wst)
        W_IDLE: if (wb_valid) begin
          w_ea <= wb_ea;
          w_ra <= wb_ra;
          if (wb_erase) begin
            w_line <= '0; w_dig <= '0; wst <= W_WRITE;
          end else if (engaged) begin
            wst <= W_ENC;
          end else begin
            w_line <= wb_data; w_dig <= '0; wst <= W_WRITE;
          end
        end
        W_ENC:  if (e_done) begin w_line <= e_out; wst <= W_HASH; end
        W_HASH: if (eh_done) begin w_dig <= eh_digest; wst <= W_WRITE; end
        W_WRITE: if (l2_wr_ready) wst <= W_IDLE;
        default: wst <= W_IDLE;
      endcase
    end
  end

  assign l2_wr_valid  = (wst == W_WRITE);
  assign l2_wr_ra     = {w_ra[ADDR_BITS-1:OFFS_BITS], {OFFS_BITS{1'b0}}};
  assign l2_wr_data   = w_line;
  assign l2_wr_digest = w_dig;

  // handshake rules
  a_rd_stable: assert property (@(posedge clk) disable iff (!rst_n)
    l2_rd_valid && !l2_rd_ready |=> l2_rd_valid && $stable(l2_rd_ra));
  a_wr_stable: assert property (@(posedge clk) disable iff (!rst_n)
    l2_wr_valid && !l2_wr_ready |=> l2_wr_valid && $stable(l2_wr_data));
  a_one_resp: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0(fill_resp_valid));

endmodule
