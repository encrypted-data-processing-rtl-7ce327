// xts_line: XTS-AES of one 128-byte cache line, the upper half of the
// paper's Fig. 11.
//
// The tweak X = <SEID, EA> is encrypted with K2 to T_0 = E_K2(X); section
// i uses T_i = T_0 * alpha^i (alpha = x in GF(2^128)), and
// C_i = E_K1(P_i ^ T_i) ^ T_i (decryption: P_i = D_K1(C_i ^ T_i) ^ T_i).
// As in the figure, the eight sections have eight AES units of their own
// and run in parallel, next to a ninth unit for the tweak.
//
// The tweak and the data are started separately so that the tweak can be
// encrypted while the line is still being read from the L2 (the paper:
// the address encryption "can be done in parallel and folded into the
// pipeline"); that split is this design's choice. tweak_start takes x;
// t0_valid rises 2*NR cycles later with t0. data_start takes din and
// decrypt; the eight units start as soon as both data and T_0 are there,
// and done pulses 2*NR cycles after that (20 cycles for AES-128) with
// dout valid and held until the next data_start. A new tweak_start must
// not come while a line is in flight. When tweak and data start in the
// same cycle the line is done 4*NR+1 cycles later.
module xts_line
  import aes_pkg::*;
  import edap_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  round_keys_t rk1,
  input  round_keys_t rk2,
  input  logic        tweak_start,
  input  blk_t        x,
  input  logic        data_start,
  input  logic        decrypt,
  input  line_t       din,
  output logic        t0_valid,
  output blk_t        t0,
  output logic        busy,
  output logic        done,
  output line_t       dout
);

  logic  tw_busy, tw_done;
  blk_t  tw_out;
  logic  pending, dec_q;
  line_t din_q;
  blk_t  t [SECTIONS];
  logic  lane_go;
  line_t lane_src;
  logic  [SECTIONS-1:0] lane_busy, lane_done;
  blk_t  lane_out [SECTIONS];

  aes_core u_tweak (
    .clk, .rst_n, .start(tweak_start), .decrypt(1'b0), .block_in(x),
    .round_keys(rk2), .busy(tw_busy), .done(tw_done), .block_out(tw_out)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t0_valid <= 1'b0;
      pending  <= 1'b0;
      dec_q    <= 1'b0;
      din_q    <= '0;
    end else begin
      if (tweak_start)  t0_valid <= 1'b0;
      else if (tw_done) t0_valid <= 1'b1;
      if (data_start) begin
        din_q <= din;
        dec_q <= decrypt;
      end
      if (lane_go)         pending <= 1'b0;
      else if (data_start) pending <= 1'b1;
    end
  end

  assign t0 = tw_out;

  always_comb begin
    t[0] = tw_out;
    for (int i = 1; i < SECTIONS; i++) t[i] = xts_mul_alpha(t[i-1]);
  end

  assign lane_go  = (data_start || pending) && (t0_valid || tw_done) && !tweak_start;
  assign lane_src = data_start ? din : din_q;

  for (genvar i = 0; i < SECTIONS; i++) begin : g_lane
    aes_core u_aes (
      .clk, .rst_n, .start(lane_go), .decrypt(data_start ? decrypt : dec_q),
      .block_in(section(lane_src, i) ^ t[i]), .round_keys(rk1),
      .busy(lane_busy[i]), .done(lane_done[i]), .block_out(lane_out[i])
    );
    assign dout[LINE_BITS - 1 - 128*i -: 128] = lane_out[i] ^ t[i];
  end

  assign busy = tw_busy || pending || lane_busy[0];
  assign done = lane_done[0];

endmodule
