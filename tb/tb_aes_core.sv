// tb_aes_core: drives the AES core with the FIPS-197 C.1 vector and random
// blocks in both directions, comparing with the reference model, and
// checks the latency of 2*NR cycles (20 for a 128-bit key).
module tb_aes_core;
  import aes_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, start = 0, decrypt = 0;
  block_t din, dout;
  round_keys_t rks;
  logic busy, done;
  int checks = 0, failures = 0;

  aes_core dut (.clk, .rst_n, .start, .decrypt, .block_in(din), .round_keys(rks),
                .busy, .done, .block_out(dout));

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic set_key(logic [255:0] k);
    words_t w = expand(k, NK);
    for (int r = 0; r <= NR; r++) rks[r] = rk(w, r);
  endtask

  task automatic run(bit dec, block_t b, output block_t r);
    int cyc = 0;
    din = b; decrypt = dec; start = 1;
    @(posedge clk); start = 0;
    while (!done) begin @(posedge clk); cyc++; end
    check(cyc == 2*NR, $sformatf("latency %0d, expected %0d", cyc, 2*NR));
    r = dout;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [255:0] k;
    block_t r, p;
    ref_init();
    repeat (3) @(posedge clk);
    rst_n = 1;
    k = 256'h000102030405060708090a0b0c0d0e0f101112131415161718191a1b1c1d1e1f;
    if (KEY_BITS == 128) k = {k[255:128], 128'h0};
    set_key(k);
    run(0, 128'h00112233445566778899aabbccddeeff, r);
    check(r == (KEY_BITS == 128 ? 128'h69c4e0d86a7b0430d8cdb78070b4c55a
                                : 128'h8ea2b7ca516745bfeafc49904b496089), "FIPS-197 C vector");
    run(1, r, r);
    check(r == 128'h00112233445566778899aabbccddeeff, "FIPS-197 C vector decrypt");
    for (int n = 0; n < 30; n++) begin
      k = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      if (KEY_BITS == 128) k[127:0] = '0;
      set_key(k);
      p = {$urandom, $urandom, $urandom, $urandom};
      run(n[0], p, r);
      check(r == (n[0] ? aes_dec(k, NK, p) : aes_enc(k, NK, p)), "random block vs reference");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
