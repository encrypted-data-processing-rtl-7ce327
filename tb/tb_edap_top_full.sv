// tb_edap_top_full: the end-to-end run of tb_edap_top on the design at its
// default sizes (32 kB 8-way data cache, 48 kB 6-way instruction cache,
// AES-128), with an L2 model below it and the data owner, the loader and an attacker played
// by the testbench using the reference model.
//
// Story: the processor starts in privileged mode; a resume before keys are
// installed is refused. The owner's program and data lines are prepared
// (XTS-AES under <SEID, EA>, digest) and placed in the L2 by real address.
// Privileged code reading them sees only ciphertext. Keys are installed,
// control passes to the program (caches cleared, engine engaged); it
// fetches its code and reads its data in cleartext, stores and evicts
// (encrypted writebacks), acquires and releases blocks; privileged
// requests are refused; a tampered line and a line moved to another
// effective address fault. A trap clears the caches (dirty lines leave
// encrypted) and disengages; the L2 then decrypts, under the reference, to
// exactly what the program wrote, with valid digests. After a second
// resume the data is read back again.
//
// Every mechanism is counted and must happen at least once: refused
// resume, clear on resume and on trap, decrypted fill, encrypted
// writeback, integrity failure, refused privileged access, acquire,
// release, fill waiting on the writeback buffer, instruction fetch.
module tb_edap_top_full;
  import aes_pkg::*;
  import edap_pkg::*;
  import tb_ref_pkg::*;

  localparam int D_SETS = 32, D_WAYS = 8;   // the design's defaults
  localparam int NPROG = 6, NDATA = 12, NOPS = 150;

  logic clk = 0, rst_n = 0;
  logic key_install = 0, key_zeroize = 0, keys_ready;
  seid_t key_seid = '0;
  logic [KEY_BITS-1:0] key_k1 = '0, key_k2 = '0;
  logic trap = 0, resume = 0, hold, user_mode, engaged, resume_refused;
  logic d_req_valid = 0, d_req_ready, d_req_priv = 0;
  l1_op_e d_req_op = OP_LOAD;
  addr_t d_req_ea = '0, d_req_ra = '0;
  logic [63:0] d_req_wdata = '0, d_resp_rdata;
  logic [7:0] d_req_be = '0;
  logic d_resp_valid, d_resp_fault, d_resp_denied;
  logic i_req_valid = 0, i_req_ready, i_req_priv = 0;
  addr_t i_req_ea = '0, i_req_ra = '0;
  logic i_resp_valid, i_resp_fault, i_resp_denied;
  logic [63:0] i_resp_rdata;
  logic l2_rd_valid, l2_rd_ready, l2_rd_resp_valid, l2_wr_valid, l2_wr_ready;
  addr_t l2_rd_ra, l2_wr_ra;
  line_t l2_rd_resp_data, l2_wr_data;
  digest_t l2_rd_resp_digest, l2_wr_digest;
  logic integrity_fail, fill_hazard_stall, d_hit, d_miss, i_hit, i_miss;

  edap_top dut (.*);

  l2_model #(.LATENCY(22)) u_l2 (
    .clk, .rd_valid(l2_rd_valid), .rd_ready(l2_rd_ready), .rd_ra(l2_rd_ra),
    .rd_resp_valid(l2_rd_resp_valid), .rd_resp_data(l2_rd_resp_data),
    .rd_resp_digest(l2_rd_resp_digest), .wr_valid(l2_wr_valid), .wr_ready(l2_wr_ready),
    .wr_ra(l2_wr_ra), .wr_data(l2_wr_data), .wr_digest(l2_wr_digest));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_refused = 0, n_clear = 0, n_fill_dec = 0, n_wb_enc = 0, n_integrity = 0;
  int n_denied = 0, n_acquire = 0, n_release = 0, n_hazard = 0, n_fetch = 0;

  always @(posedge clk) if (rst_n) begin
    if (resume_refused) n_refused++;
    if (dut.clr_req) n_clear++;
    if (dut.fill_resp_valid != 0 && dut.fill_resp_ok && engaged) n_fill_dec++;
    if (l2_wr_valid && l2_wr_ready && l2_wr_digest != 0) n_wb_enc++;
    if (integrity_fail) n_integrity++;
    if (fill_hazard_stall) n_hazard++;
    if (i_resp_valid && !i_resp_fault && !i_resp_denied && engaged) n_fetch++;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [255:0] k1, k2;
  seid_t seid;
  localparam addr_t CODE = 64'h0000_0000_1000_0000;
  localparam addr_t DATA = 64'h0000_0000_2000_0000;
  localparam addr_t SPARE = 64'h0000_0000_3000_0000;
  function automatic addr_t ra_of(addr_t ea);
    return ea + 64'h0000_0100_0000_0000;
  endfunction

  line8_t prog [NPROG];
  logic [63:0] model [addr_t];

  task automatic owner_store(addr_t ea, addr_t ra, line8_t p);
    blk_t x = make_tweak(seid, ea);
    line8_t c = xts(k1, k2, NK, x, p, 0);
    u_l2.poke(ra, pack_line(c), digest(k2, NK, x, c));
  endtask

  task automatic daccess(l1_op_e op, addr_t ea, logic [63:0] wd, logic [7:0] be, logic priv,
                         output logic [63:0] r, output logic f, output logic dn);
    d_req_valid = 1; d_req_op = op; d_req_ea = ea; d_req_ra = ra_of(ea);
    d_req_wdata = wd; d_req_be = be; d_req_priv = priv;
    do @(posedge clk); while (!d_req_ready);
    #1 d_req_valid = 0;
    while (!d_resp_valid) begin @(posedge clk); #1; end
    r = d_resp_rdata; f = d_resp_fault; dn = d_resp_denied;
    if (op == OP_ACQUIRE && !f && !dn) n_acquire++;
    if (op == OP_RELEASE && !f && !dn) n_release++;
    if (dn) n_denied++;
  endtask

  task automatic fetch(addr_t ea, output logic [63:0] r, output logic f);
    i_req_valid = 1; i_req_ea = ea; i_req_ra = ra_of(ea); i_req_priv = 0;
    do @(posedge clk); while (!i_req_ready);
    #1 i_req_valid = 0;
    while (!i_resp_valid) begin @(posedge clk); #1; end
    r = i_resp_rdata; f = i_resp_fault;
  endtask

  task automatic transfer(bit to_user);
    #1;
    if (to_user) resume = 1; else trap = 1;
    @(posedge clk); #1 resume = 0; trap = 0;
    @(posedge clk);
    while (hold) @(posedge clk);
    #1;
  endtask

  function automatic logic [63:0] dw(line8_t l, int d);
    return l[d / 2][127 - 64*(d % 2) -: 64];
  endfunction

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] r;
    logic f, dn;
    line8_t p, c;
    addr_t ea, a_ea;
    logic [63:0] wd;
    logic [7:0] be;
    ref_init();
    seid = {$urandom, $urandom};
    k1 = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    k2 = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    if (KEY_BITS == 128) begin k1[127:0] = '0; k2[127:0] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    // the owner's program and data, placed by the loader
    for (int n = 0; n < NPROG; n++) begin
      for (int i = 0; i < 8; i++) prog[n][i] = {$urandom, $urandom, $urandom, $urandom};
      owner_store(CODE + 128*n, ra_of(CODE + 128*n), prog[n]);
    end
    for (int n = 0; n < NDATA; n++) begin
      for (int i = 0; i < 8; i++) p[i] = {$urandom, $urandom, $urandom, $urandom};
      owner_store(DATA + 128*n, ra_of(DATA + 128*n), p);
      for (int d = 0; d < 16; d++) model[DATA + 128*n + 8*d] = dw(p, d);
    end

    // no keys yet: the program cannot be entered
    transfer(1);
    check(!engaged && !user_mode, "resume refused without keys");

    // privileged code sees only ciphertext
    daccess(OP_LOAD, DATA + 8, '0, '0, 1, r, f, dn);
    check(!dn && !f && r == u_l2.peek(ra_of(DATA))[1023 - 64 -: 64] && r != model[DATA + 8],
          "privileged load returns ciphertext");

    // the private-key unit hands over the unwrapped keys
    key_seid = seid; key_k1 = k1[255 -: KEY_BITS]; key_k2 = k2[255 -: KEY_BITS];
    key_install = 1; @(posedge clk); #1 key_install = 0;
    while (!keys_ready) @(posedge clk);

    transfer(1);
    check(engaged && user_mode, "program entered, engine engaged");

    // code fetch in cleartext
    for (int n = 0; n < NPROG; n++)
      for (int d = 0; d < 16; d += 5) begin
        fetch(CODE + 128*n + 8*d, r, f);
        check(!f && r == dw(prog[n], d), "fetched instruction doubleword");
      end

    // loads and stores over the data
    for (int n = 0; n < NOPS; n++) begin
      ea = DATA + 8 * ($urandom % (16 * NDATA));
      if ($urandom % 3 == 0) begin
        wd = {$urandom, $urandom}; be = 8'($urandom);
        daccess(OP_STORE, ea, wd, be, 0, r, f, dn);
        for (int b = 0; b < 8; b++) if (be[b]) model[ea][8*b +: 8] = wd[8*b +: 8];
        check(!f && !dn, "store");
      end else begin
        daccess(OP_LOAD, ea, '0, '0, 0, r, f, dn);
        check(!f && !dn && r == model[ea], $sformatf("load %h", ea));
      end
    end

    // a fill that must wait for the line's own encrypted writeback
    a_ea = DATA;
    for (int j = 1; j <= D_WAYS; j++) begin
      ea = a_ea + 128 * D_SETS * j;
      if (!model.exists(ea)) begin
        for (int i = 0; i < 8; i++) p[i] = {$urandom, $urandom, $urandom, $urandom};
        owner_store(ea, ra_of(ea), p);
        for (int d = 0; d < 16; d++) model[ea + 8*d] = dw(p, d);
      end
    end
    for (int k = 1; k <= D_WAYS + 1 && n_hazard == 0; k++) begin
      daccess(OP_STORE, a_ea, 64'hfeed_0000_0000_0000 + k, 8'hff, 0, r, f, dn);
      model[a_ea] = 64'hfeed_0000_0000_0000 + k;
      for (int j = 1; j <= D_WAYS && n_hazard == 0; j++) begin
        daccess(OP_LOAD, a_ea + 128 * D_SETS * j, '0, '0, 0, r, f, dn);
        check(r == model[a_ea + 128 * D_SETS * j], "conflicting line");
        daccess(OP_LOAD, a_ea, '0, '0, 0, r, f, dn);
        check(r == model[a_ea], "line read back while its writeback is in flight");
      end
    end

    // privileged access while the program runs is refused
    daccess(OP_LOAD, DATA, '0, '0, 1, r, f, dn);
    check(dn && r == '0, "privileged load refused while engaged");

    // acquire a fresh block and use it; release another
    daccess(OP_ACQUIRE, SPARE, '0, '0, 0, r, f, dn);
    daccess(OP_STORE, SPARE + 16, 64'h0123_4567_89ab_cdef, 8'hff, 0, r, f, dn);
    for (int d = 0; d < 16; d++) model[SPARE + 8*d] = '0;
    model[SPARE + 16] = 64'h0123_4567_89ab_cdef;
    daccess(OP_LOAD, SPARE + 16, '0, '0, 0, r, f, dn);
    check(r == 64'h0123_4567_89ab_cdef, "acquired block holds its store");
    daccess(OP_RELEASE, DATA + 128 * (NDATA - 1), '0, '0, 0, r, f, dn);
    repeat (4) @(posedge clk);
    check(u_l2.peek(ra_of(DATA + 128 * (NDATA - 1))) == '0, "released block is zero in memory");

    // attacks: a tampered line, and a line copied to another address
    ea = DATA + 128 * (NDATA - 2);
    daccess(OP_RELEASE, ea, '0, '0, 0, r, f, dn);      // make sure it is not cached
    owner_store(ea, ra_of(ea), '{default: 128'h5});
    u_l2.poke(ra_of(ea), u_l2.peek(ra_of(ea)) ^ (line_t'(1) << 700), u_l2.peek_digest(ra_of(ea)));
    daccess(OP_LOAD, ea, '0, '0, 0, r, f, dn);
    check(f && r == '0, "tampered line faults");
    u_l2.poke(ra_of(SPARE + 128), u_l2.peek(ra_of(DATA + 128)), u_l2.peek_digest(ra_of(DATA + 128)));
    daccess(OP_LOAD, SPARE + 128, '0, '0, 0, r, f, dn);
    check(f && r == '0, "relocated line faults");
    u_l2.poke(ra_of(ea), '0, '0);
    for (int d = 0; d < 16; d++) begin
      model[ea + 8*d] = '0;
      model[DATA + 128 * (NDATA - 1) + 8*d] = '0;
    end

    // trap: caches cleared, dirty lines leave encrypted, engine disengaged
    transfer(0);
    check(!engaged && !user_mode, "trap disengages");
    for (int n = 0; n < NDATA - 2; n++) begin
      ea = DATA + 128*n;
      c = unpack_line(u_l2.peek(ra_of(ea)));
      check(u_l2.peek_digest(ra_of(ea)) == digest(k2, NK, make_tweak(seid, ea), c),
            "digest in memory valid after trap");
      p = xts(k1, k2, NK, make_tweak(seid, ea), c, 1);
      for (int d = 0; d < 16; d++)
        check(dw(p, d) == model[ea + 8*d],
              $sformatf("memory decrypts to the program's data at %h: %h vs %h", ea + 8*d, dw(p, d), model[ea + 8*d]));
    end
    c = unpack_line(u_l2.peek(ra_of(SPARE)));
    p = xts(k1, k2, NK, make_tweak(seid, SPARE), c, 1);
    check(dw(p, 2) == 64'h0123_4567_89ab_cdef, "acquired block was written back encrypted");
    daccess(OP_LOAD, DATA + 16, '0, '0, 1, r, f, dn);
    check(!dn && r != model[DATA + 16], "after trap, privileged code sees ciphertext");

    // back to the program: data read again through decryption
    transfer(1);
    for (int n = 0; n < 40; n++) begin
      ea = DATA + 8 * ($urandom % (16 * (NDATA - 2)));
      daccess(OP_LOAD, ea, '0, '0, 0, r, f, dn);
      check(!f && r == model[ea], "data after second resume");
    end
    transfer(0);

    $display("mechanisms: refused=%0d clears=%0d fills=%0d enc_wb=%0d integrity=%0d denied=%0d acquire=%0d release=%0d hazard=%0d fetch=%0d",
             n_refused, n_clear, n_fill_dec, n_wb_enc, n_integrity, n_denied, n_acquire,
             n_release, n_hazard, n_fetch);
    check(n_refused > 0, "refused resume happened");
    check(n_clear >= 4, "clears happened");
    check(n_fill_dec > 0, "decrypted fills happened");
    check(n_wb_enc > 0, "encrypted writebacks happened");
    check(n_integrity >= 2, "integrity failures happened");
    check(n_denied > 0, "refused privileged access happened");
    check(n_acquire > 0, "acquire happened");
    check(n_release > 0, "release happened");
    check(n_hazard > 0, "fill waited on the writeback buffer");
    check(n_fetch > 0, "instruction fetches happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
