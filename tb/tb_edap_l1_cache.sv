// tb_edap_l1_cache: a small L1 (4 sets x 2 ways) against a behavioural
// engine that keeps cleartext lines by real address, answers fills after
// 20 cycles and can be told to fail the integrity check for one line.
// A scoreboard of doublewords gives every expected load value. Checks:
// load/store hit and miss values, hit latency of 1 cycle, dirty victims
// written back with the right effective and real address, OP_ACQUIRE
// without a fill, OP_RELEASE erasing, privileged requests refused while
// engaged and served while disengaged, a failed fill reported as a fault
// and not installed, and clear writing back every dirty line.
module tb_edap_l1_cache;
  import edap_pkg::*;

  localparam int SETS = 4, WAYS = 2;
  logic clk = 0, rst_n = 0, engaged = 1;
  logic req_valid = 0, req_ready, req_priv = 0;
  l1_op_e req_op = OP_LOAD;
  addr_t req_ea = '0, req_ra = '0;
  logic [63:0] req_wdata = '0, resp_rdata;
  logic [7:0] req_be = '0;
  logic resp_valid, resp_fault, resp_denied;
  logic clr_req = 0, clr_done;
  logic fill_valid, fill_ready, fill_resp_valid = 0, fill_resp_ok = 0;
  addr_t fill_ea, fill_ra, wb_ea, wb_ra;
  line_t fill_resp_data = '0, wb_data;
  logic wb_valid, wb_ready, wb_erase, ev_hit, ev_miss;
  int checks = 0, failures = 0;
  int fills = 0, wbs = 0, erases = 0;
  addr_t bad_ra = '1;
  addr_t last_wb_ea;

  edap_l1_cache #(.SETS(SETS), .WAYS(WAYS), .WRITABLE(1'b1)) dut (.*);

  always #5 clk = ~clk;

  // behavioural engine: memory of cleartext lines by real line address
  line_t mem [addr_t];
  assign fill_ready = 1'b1;
  assign wb_ready   = 1'b1;

  function automatic line_t rd(addr_t ra);
    return mem.exists(ra >> 7) ? mem[ra >> 7] : '0;
  endfunction

  always @(posedge clk) begin
    if (fill_valid) begin
      automatic addr_t ra = fill_ra;
      fills++;
      fork begin
        repeat (20) @(posedge clk);
        #1 fill_resp_valid = 1; fill_resp_ok = (ra != bad_ra);
        fill_resp_data = fill_resp_ok ? rd(ra) : '0;
        @(posedge clk); #1 fill_resp_valid = 0;
      end join_none
    end
    if (wb_valid) begin
      wbs++;
      last_wb_ea = wb_ea;
      if (wb_erase) erases++;
      mem[wb_ra >> 7] = wb_erase ? '0 : wb_data;
    end
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // EA and RA differ by a fixed offset in this test
  function automatic addr_t ra_of(addr_t ea);
    return ea ^ 64'h0000_0040_0000_0000;
  endfunction

  task automatic access(l1_op_e op, addr_t ea, logic [63:0] wd, logic [7:0] be, logic priv,
                        output logic [63:0] rdata, output logic fault, output logic denied,
                        output int lat);
    req_valid = 1; req_op = op; req_ea = ea; req_ra = ra_of(ea); req_wdata = wd;
    req_be = be; req_priv = priv;
    do @(posedge clk); while (!req_ready);
    #1 req_valid = 0;
    lat = 0;
    while (!resp_valid) begin @(posedge clk); lat++; #1; end
    rdata = resp_rdata; fault = resp_fault; denied = resp_denied;
    @(posedge clk); #1;
  endtask

  function automatic logic [63:0] dw_of(line_t l, addr_t ea);
    return l[1023 - 64*ea[6:3] -: 64];
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] r, model [addr_t];
    logic f, dn;
    int lat, w0;
    addr_t ea;
    line_t l;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // memory contents: random lines at 16 line addresses (4 per set)
    for (int a = 0; a < 16; a++) begin
      for (int i = 0; i < 32; i++) l[32*i +: 32] = $urandom;
      mem[ra_of(64'h1000 + 128*a) >> 7] = l;
      for (int d = 0; d < 16; d++) model[64'h1000 + 128*a + 8*d] = l[1023 - 64*d -: 64];
    end
    @(posedge clk); #1;
    // random loads and stores
    for (int n = 0; n < 300; n++) begin
      ea = 64'h1000 + 8 * ($urandom % 256);
      if ($urandom % 3 == 0) begin
        logic [63:0] wd = {$urandom, $urandom};
        logic [7:0] be = 8'($urandom);
        access(OP_STORE, ea, wd, be, 0, r, f, dn, lat);
        for (int b = 0; b < 8; b++) if (be[b]) model[ea][8*b +: 8] = wd[8*b +: 8];
        check(!f && !dn, "store accepted");
      end else begin
        logic was_hit;
        access(OP_LOAD, ea, '0, '0, 0, r, f, dn, lat);
        check(r == model[ea] && !f && !dn, $sformatf("load %h", ea));
        was_hit = (lat == 1);
        check(lat == 1 || lat > 20, $sformatf("latency %0d: hit 1 or miss > 20", lat));
      end
    end
    check(wbs > 0, "dirty victims were written back");
    // a privileged request while engaged is refused
    access(OP_LOAD, 64'h1000, '0, '0, 1, r, f, dn, lat);
    check(dn && r == '0, "privileged load refused while engaged");
    // a fill that fails the integrity check
    bad_ra = ra_of(64'h9000);
    access(OP_LOAD, 64'h9000, '0, '0, 0, r, f, dn, lat);
    check(f && r == '0, "failed fill reported as fault");
    w0 = fills;
    access(OP_LOAD, 64'h9000, '0, '0, 0, r, f, dn, lat);
    check(f && fills == w0 + 1, "failed line was not installed");
    bad_ra = '1;
    // acquire: no fill, zero line, dirty
    w0 = fills;
    access(OP_ACQUIRE, 64'h8000, '0, '0, 0, r, f, dn, lat);
    check(fills == w0, "acquire does not read memory");
    access(OP_LOAD, 64'h8008, '0, '0, 0, r, f, dn, lat);
    check(r == '0 && lat == 1, "acquired line reads zero and hits");
    access(OP_STORE, 64'h8008, 64'h1234_5678_9abc_def0, 8'hff, 0, r, f, dn, lat);
    // release: erased in memory and in L1
    w0 = erases;
    access(OP_RELEASE, 64'h1000, '0, '0, 0, r, f, dn, lat);
    check(erases == w0 + 1 && rd(ra_of(64'h1000)) == '0, "release erases the block in memory");
    for (int d = 0; d < 16; d++) model[64'h1000 + 8*d] = '0;
    access(OP_LOAD, 64'h1008, '0, '0, 0, r, f, dn, lat);
    check(r == '0 && lat > 20, "released block is gone from the L1");
    // clear: all dirty lines reach memory, then everything misses
    clr_req = 1; @(posedge clk); #1 clr_req = 0;
    while (!clr_done) @(posedge clk);
    @(posedge clk); #1;
    check(rd(ra_of(64'h8000))[1023-64 -: 64] == 64'h1234_5678_9abc_def0, "clear wrote back the acquired line");
    for (int a = 0; a < 16; a++) begin
      l = rd(ra_of(64'h1000 + 128*a));
      for (int d = 0; d < 16; d++)
        check(l[1023 - 64*d -: 64] == model[64'h1000 + 128*a + 8*d], "memory after clear");
    end
    access(OP_LOAD, 64'h1010, '0, '0, 0, r, f, dn, lat);
    check(lat > 20, "miss after clear");
    // disengaged: privileged requests are served
    engaged = 0;
    access(OP_LOAD, 64'h1080, '0, '0, 1, r, f, dn, lat);
    check(!dn && r == model[64'h1080], "privileged load served while disengaged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
