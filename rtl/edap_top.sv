// edap_top: the memory-side trusted footprint of an EDAP core in the
// paper's main configuration, with the data encryption engine between the
// L2 and the L1 caches.
//
// Inside: the key registers and their install sequencer (edap_key_store),
// the transfer-of-control sequencer (edap_ctl), the encryption engine
// (edap_crypto_engine: XTS-AES decryption of fills with digest check,
// XTS-AES encryption of writebacks with digest generation), and two
// effective-addressed cleartext L1 caches, a 32 kB data cache (8 ways x
// 32 sets) and a 48 kB instruction cache (6 ways x 64 sets), both with
// 128-byte lines. Ways per cache are this design's choice.
//
// Outside, and so brought out as ports: the core's load/store and fetch
// ports (the core itself and its address translation are conventional and
// supply both effective and real address with each request), the
// privilege transfers (trap, resume), the unwrapped keys from the
// processor's private-key unit (key_install with SEID, K1, K2), and the L2
// read and write ports (real addresses, ciphertext lines with an 8-byte
// digest each).
//
// Timing: see the blocks. In short, an L1 hit answers one cycle after
// the request is taken; an
// engaged miss costs the L2 time plus 20 cycles of decryption (the
// tweak is encrypted during the L2 access); writebacks are encrypted in a
// buffer off the critical path; trap and resume hold the core while both
// caches are cleared.
module edap_top
  import aes_pkg::*;
  import edap_pkg::*;
#(
  parameter int unsigned D_SETS = 32,
  parameter int unsigned D_WAYS = 8,
  parameter int unsigned I_SETS = 64,
  parameter int unsigned I_WAYS = 6
) (
  input  logic                clk,
  input  logic                rst_n,
  // keys from the private-key unit
  input  logic                key_install,
  input  seid_t               key_seid,
  input  logic [KEY_BITS-1:0] key_k1,
  input  logic [KEY_BITS-1:0] key_k2,
  input  logic                key_zeroize,
  output logic                keys_ready,
  // transfer of control
  input  logic                trap,
  input  logic                resume,
  output logic                hold,
  output logic                user_mode,
  output logic                engaged,
  output logic                resume_refused,
  // core data port
  input  logic                d_req_valid,
  output logic                d_req_ready,
  input  l1_op_e              d_req_op,
  input  addr_t               d_req_ea,
  input  addr_t               d_req_ra,
  input  logic [63:0]         d_req_wdata,
  input  logic [7:0]          d_req_be,
  input  logic                d_req_priv,
  output logic                d_resp_valid,
  output logic [63:0]         d_resp_rdata,
  output logic                d_resp_fault,
  output logic                d_resp_denied,
  // core fetch port
  input  logic                i_req_valid,
  output logic                i_req_ready,
  input  addr_t               i_req_ea,
  input  addr_t               i_req_ra,
  input  logic                i_req_priv,
  output logic                i_resp_valid,
  output logic [63:0]         i_resp_rdata,
  output logic                i_resp_fault,
  output logic                i_resp_denied,
  // L2 ports
  output logic                l2_rd_valid,
  input  logic                l2_rd_ready,
  output addr_t               l2_rd_ra,
  input  logic                l2_rd_resp_valid,
  input  line_t               l2_rd_resp_data,
  input  digest_t             l2_rd_resp_digest,
  output logic                l2_wr_valid,
  input  logic                l2_wr_ready,
  output addr_t               l2_wr_ra,
  output line_t               l2_wr_data,
  output digest_t             l2_wr_digest,
  // events
  output logic                integrity_fail,
  output logic                fill_hazard_stall,
  output logic                d_hit,
  output logic                d_miss,
  output logic                i_hit,
  output logic                i_miss
);

  seid_t       seid;
  round_keys_t rk1, rk2;
  blk_t        hkey;
  logic        ks_busy;
  logic        clr_req, clr_done_d, clr_done_i, wb_busy;

  logic [1:0]  fill_req_valid, fill_req_ready, fill_resp_valid;
  addr_t [1:0] fill_req_ea, fill_req_ra;
  line_t       fill_resp_data;
  logic        fill_resp_ok;
  logic        wb_valid, wb_ready, wb_erase;
  addr_t       wb_ea, wb_ra;
  line_t       wb_data;

  // the fetch port's unused write-side signals
  logic        i_wb_valid, i_wb_erase;
  addr_t       i_wb_ea, i_wb_ra;
  line_t       i_wb_data;

  edap_key_store u_keys (
    .clk, .rst_n, .install(key_install), .in_seid(key_seid), .in_k1(key_k1),
    .in_k2(key_k2), .zeroize(key_zeroize), .busy(ks_busy), .keys_ready,
    .seid, .rk1, .rk2, .hkey
  );

  edap_ctl u_ctl (
    .clk, .rst_n, .keys_ready, .trap, .resume, .clr_done_d, .clr_done_i, .wb_busy,
    .clr_req, .engaged, .hold, .user_mode, .resume_refused
  );

  edap_crypto_engine u_engine (
    .clk, .rst_n, .engaged, .seid, .rk1, .rk2, .hkey,
    .fill_req_valid, .fill_req_ready, .fill_req_ea, .fill_req_ra,
    .fill_resp_valid, .fill_resp_data, .fill_resp_ok,
    .wb_valid, .wb_ready, .wb_ea, .wb_ra, .wb_data, .wb_erase,
    .l2_rd_valid, .l2_rd_ready, .l2_rd_ra, .l2_rd_resp_valid, .l2_rd_resp_data,
    .l2_rd_resp_digest, .l2_wr_valid, .l2_wr_ready, .l2_wr_ra, .l2_wr_data, .l2_wr_digest,
    .integrity_fail, .fill_hazard_stall, .wb_busy
  );

  edap_l1_cache #(.SETS(D_SETS), .WAYS(D_WAYS), .WRITABLE(1'b1)) u_l1d (
    .clk, .rst_n, .engaged,
    .req_valid(d_req_valid), .req_ready(d_req_ready), .req_op(d_req_op),
    .req_ea(d_req_ea), .req_ra(d_req_ra), .req_wdata(d_req_wdata), .req_be(d_req_be),
    .req_priv(d_req_priv), .resp_valid(d_resp_valid), .resp_rdata(d_resp_rdata),
    .resp_fault(d_resp_fault), .resp_denied(d_resp_denied),
    .clr_req, .clr_done(clr_done_d),
    .fill_valid(fill_req_valid[0]), .fill_ready(fill_req_ready[0]),
    .fill_ea(fill_req_ea[0]), .fill_ra(fill_req_ra[0]),
    .fill_resp_valid(fill_resp_valid[0]), .fill_resp_data, .fill_resp_ok,
    .wb_valid, .wb_ready, .wb_ea, .wb_ra, .wb_data, .wb_erase,
    .ev_hit(d_hit), .ev_miss(d_miss)
  );

  edap_l1_cache #(.SETS(I_SETS), .WAYS(I_WAYS), .WRITABLE(1'b0)) u_l1i (
    .clk, .rst_n, .engaged,
    .req_valid(i_req_valid), .req_ready(i_req_ready), .req_op(OP_LOAD),
    .req_ea(i_req_ea), .req_ra(i_req_ra), .req_wdata(64'h0), .req_be(8'h0),
    .req_priv(i_req_priv), .resp_valid(i_resp_valid), .resp_rdata(i_resp_rdata),
    .resp_fault(i_resp_fault), .resp_denied(i_resp_denied),
    .clr_req, .clr_done(clr_done_i),
    .fill_valid(fill_req_valid[1]), .fill_ready(fill_req_ready[1]),
    .fill_ea(fill_req_ea[1]), .fill_ra(fill_req_ra[1]),
    .fill_resp_valid(fill_resp_valid[1]), .fill_resp_data, .fill_resp_ok,
    .wb_valid(i_wb_valid), .wb_ready(1'b0), .wb_ea(i_wb_ea), .wb_ra(i_wb_ra),
    .wb_data(i_wb_data), .wb_erase(i_wb_erase),
    .ev_hit(i_hit), .ev_miss(i_miss)
  );

  // the instruction cache never holds a dirty line
  a_icache_no_wb: assert property (@(posedge clk) disable iff (!rst_n) !i_wb_valid);

endmodule
