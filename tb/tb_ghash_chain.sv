// tb_ghash_chain: checks the digest chain against GCM Test Case 2 of the
// GCM specification (placed in the last two sections, X = 0) and against
// the reference chain for random inputs; checks the 8-cycle latency.
module tb_ghash_chain;
  import edap_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, start = 0;
  blk_t x, h, mask;
  line_t ct;
  logic busy, done;
  digest_t dg;
  int checks = 0, failures = 0;

  ghash_chain dut (.clk, .rst_n, .start, .x, .h, .mask, .ctext(ct), .busy, .done, .digest(dg));

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run();
    int cyc = 0;
    start = 1; @(posedge clk); start = 0;
    while (!done) begin @(posedge clk); cyc++; end
    check(cyc == 8, $sformatf("latency %0d, expected 8", cyc));
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [127:0] y;
    line8_t l;
    ref_init();
    repeat (3) @(posedge clk);
    rst_n = 1;
    // GCM test case 2: K = 0, P = 0^128
    h = 128'h66e94bd4ef8a2c3b884cfa59ca342b2e;
    check(aes_enc(256'h0, 4, 128'h0) == h, "reference AES gives H = E_0(0)");
    check(gcm_mul(gcm_mul(128'h0388dace60b6a392f328c2b971b2fe78, h) ^ 128'h80, h)
          == (128'hab6e47d42cec13bdf53a67b21257bddf ^ 128'h58e2fccefa7e3061367f1d57a4e7455a),
          "reference GHASH on GCM test case 2");
    x = '0;
    mask = 128'h58e2fccefa7e3061367f1d57a4e7455a;
    ct = '0;
    ct[255:128] = 128'h0388dace60b6a392f328c2b971b2fe78;
    ct[127:0]   = 128'h80;
    run();
    check(dg == 64'hab6e47d42cec13bd, "GCM test case 2 tag, leading 8 bytes");
    for (int n = 0; n < 20; n++) begin
      x = {$urandom, $urandom, $urandom, $urandom};
      h = {$urandom, $urandom, $urandom, $urandom};
      mask = {$urandom, $urandom, $urandom, $urandom};
      for (int i = 0; i < 8; i++) l[i] = {$urandom, $urandom, $urandom, $urandom};
      ct = pack_line(l);
      run();
      y = gcm_mul(x, h);
      for (int i = 0; i < 8; i++) y = gcm_mul(y ^ l[i], h);
      y ^= mask;
      check(dg == y[127:64], "random chain vs reference");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
