// tb_edap_crypto_engine: the engine between an L2 model and two directly
// driven L1 clients. Lines are prepared by the reference model as the data
// owner would (XTS-AES ciphertext under <SEID, EA> plus digest) and placed
// in the L2. Checks: engaged fills decrypt correctly for both clients in
// exactly 20 cycles after the L2 answers (the L2 model takes 24 cycles,
// long enough for the tweak to be encrypted during the access); a changed digest, a changed
// ciphertext bit and a line fetched under another effective address all
// fail the integrity check and return no data; writebacks are encrypted
// and signed like the reference; erase writes zeros; disengaged fills and
// writebacks pass raw; a fill of a line still in the writeback buffer
// waits for it and then reads the new data.
module tb_edap_crypto_engine;
  import aes_pkg::*;
  import edap_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, engaged = 0;
  seid_t seid;
  round_keys_t rk1, rk2;
  blk_t hkey;
  logic [1:0] fill_req_valid = 0, fill_req_ready, fill_resp_valid;
  addr_t [1:0] fill_req_ea, fill_req_ra;
  line_t fill_resp_data;
  logic fill_resp_ok;
  logic wb_valid = 0, wb_ready, wb_erase = 0;
  addr_t wb_ea, wb_ra;
  line_t wb_data;
  logic l2_rd_valid, l2_rd_ready, l2_rd_resp_valid, l2_wr_valid, l2_wr_ready;
  addr_t l2_rd_ra, l2_wr_ra;
  line_t l2_rd_resp_data, l2_wr_data;
  digest_t l2_rd_resp_digest, l2_wr_digest;
  logic integrity_fail, fill_hazard_stall, wb_busy;
  int checks = 0, failures = 0, cyc = 0, t_l2resp = 0, hazards = 0;

  logic [255:0] k1, k2;

  edap_crypto_engine dut (.*);

  l2_model #(.LATENCY(24)) u_l2 (
    .clk, .rd_valid(l2_rd_valid), .rd_ready(l2_rd_ready), .rd_ra(l2_rd_ra),
    .rd_resp_valid(l2_rd_resp_valid), .rd_resp_data(l2_rd_resp_data),
    .rd_resp_digest(l2_rd_resp_digest), .wr_valid(l2_wr_valid), .wr_ready(l2_wr_ready),
    .wr_ra(l2_wr_ra), .wr_data(l2_wr_data), .wr_digest(l2_wr_digest));

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    if (l2_rd_resp_valid) t_l2resp = cyc;
    if (fill_hazard_stall) hazards++;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic line8_t rand_line();
    line8_t l;
    for (int i = 0; i < 8; i++) l[i] = {$urandom, $urandom, $urandom, $urandom};
    return l;
  endfunction

  // the data owner's preparation of one line
  task automatic owner_store(addr_t ea, addr_t ra, line8_t p);
    blk_t x = make_tweak(seid, ea);
    line8_t c = xts(k1, k2, NK, x, p, 0);
    u_l2.poke(ra, pack_line(c), digest(k2, NK, x, c));
  endtask

  task automatic fill(int cl, addr_t ea, addr_t ra, output line_t d, output logic ok,
                      output int lat);
    fill_req_valid[cl] = 1; fill_req_ea[cl] = ea; fill_req_ra[cl] = ra;
    do @(posedge clk); while (!fill_req_ready[cl]);
    #1 fill_req_valid[cl] = 0;
    do @(posedge clk); while (!fill_resp_valid[cl]);
    d = fill_resp_data; ok = fill_resp_ok;
    lat = cyc - t_l2resp;
    #1;
  endtask

  task automatic writeback(addr_t ea, addr_t ra, line_t d, logic erase);
    wb_valid = 1; wb_ea = ea; wb_ra = ra; wb_data = d; wb_erase = erase;
    do @(posedge clk); while (!wb_ready);
    #1 wb_valid = 0; wb_erase = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    words_t w1, w2;
    line8_t p, c;
    line_t d;
    logic ok;
    int lat, fails_before;
    addr_t ea, ra;
    ref_init();
    seid = 64'h5e1d_0000_cafe_0001;
    k1 = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    k2 = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    if (KEY_BITS == 128) begin k1[127:0] = '0; k2[127:0] = '0; end
    w1 = expand(k1, NK); w2 = expand(k2, NK);
    for (int r = 0; r <= NR; r++) begin rk1[r] = rk(w1, r); rk2[r] = rk(w2, r); end
    hkey = aes_enc(k2, NK, 128'h0);
    fill_req_ea = '0; fill_req_ra = '0; wb_ea = '0; wb_ra = '0; wb_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1; engaged = 1;
    @(posedge clk); #1;

    // engaged fills, both clients
    for (int n = 0; n < 6; n++) begin
      ea = {32'h0000_7fff, $urandom} & ~64'h7f;
      ra = {32'h0000_0001, $urandom} & ~64'h7f;
      p = rand_line();
      owner_store(ea, ra, p);
      fill(n % 2, ea, ra, d, ok, lat);
      check(ok && d == pack_line(p), "engaged fill returns the owner's cleartext");
      check(lat == 20, $sformatf("decryption took %0d cycles after the L2, expected 20", lat));
    end

    // tampering
    ea = 64'h0000_1000_0000_0080; ra = 64'h0000_0002_0000_0100;
    p = rand_line();
    owner_store(ea, ra, p);
    u_l2.poke(ra, u_l2.peek(ra), u_l2.peek_digest(ra) ^ 64'h1);
    fill(0, ea, ra, d, ok, lat);
    check(!ok && d == '0, "changed digest is refused");
    owner_store(ea, ra, p);
    u_l2.poke(ra, u_l2.peek(ra) ^ (line_t'(1) << 517), u_l2.peek_digest(ra));
    fill(0, ea, ra, d, ok, lat);
    check(!ok && d == '0, "changed ciphertext is refused");
    owner_store(ea, ra, p);
    fill(1, ea + 64'h80, ra, d, ok, lat);
    check(!ok && d == '0, "line fetched under another effective address is refused");
    fill(1, ea, ra, d, ok, lat);
    check(ok && d == pack_line(p), "same line at its own address is accepted");

    // writeback: encrypted and signed like the owner would
    ea = 64'h0000_3000_0000_0400; ra = 64'h0000_0003_0000_0200;
    p = rand_line();
    writeback(ea, ra, pack_line(p), 0);
    // a fill of the same line must wait for the buffer
    fill(0, ea, ra, d, ok, lat);
    check(ok && d == pack_line(p), "fill after writeback of the same line reads the new data");
    check(hazards > 0, "fill waited for the writeback buffer");
    c = xts(k1, k2, NK, make_tweak(seid, ea), p, 0);
    check(u_l2.peek(ra) == pack_line(c), "writeback ciphertext matches XTS-AES");
    check(u_l2.peek_digest(ra) == digest(k2, NK, make_tweak(seid, ea), c),
          "writeback digest matches");

    // erase
    writeback(ea, ra, pack_line(p), 1);
    repeat (5) @(posedge clk);
    check(u_l2.peek(ra) == '0 && u_l2.peek_digest(ra) == '0, "erase writes a zero line");

    // disengaged: raw pass-through
    engaged = 0;
    owner_store(ea, ra, p);
    fill(0, ea, ra, d, ok, lat);
    check(ok && d == u_l2.peek(ra), "disengaged fill returns the raw ciphertext");
    writeback(ea, ra + 64'h80, pack_line(p), 0);
    repeat (5) @(posedge clk);
    check(u_l2.peek(ra + 64'h80) == pack_line(p), "disengaged writeback stores raw data");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
