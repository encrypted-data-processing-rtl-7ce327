// tb_xts_line: checks XTS-AES of a line against IEEE 1619 vectors 1 and 2
// (first two sections) and against the reference for random lines in both
// directions; checks that with the tweak encrypted ahead of the data a
// line takes 2*NR cycles, and 4*NR+1 when tweak and data start together.
module tb_xts_line;
  import aes_pkg::*;
  import edap_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, tweak_start = 0, data_start = 0, decrypt = 0;
  round_keys_t rk1, rk2;
  blk_t x, t0;
  line_t din, dout;
  logic t0_valid, busy, done;
  int checks = 0, failures = 0;

  xts_line dut (.clk, .rst_n, .rk1, .rk2, .tweak_start, .x, .data_start, .decrypt, .din,
                .t0_valid, .t0, .busy, .done, .dout);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic set_keys(logic [255:0] k1, logic [255:0] k2);
    words_t w1 = expand(k1, NK);
    words_t w2 = expand(k2, NK);
    for (int r = 0; r <= NR; r++) begin rk1[r] = rk(w1, r); rk2[r] = rk(w2, r); end
  endtask

  // early = 1: tweak first, data after t0_valid; else both in one cycle
  task automatic run(bit early, bit dec, blk_t tw, line_t d);
    int cyc = 0;
    x = tw; tweak_start = 1;
    if (!early) begin din = d; decrypt = dec; data_start = 1; end
    @(posedge clk); tweak_start = 0; data_start = 0;
    if (early) begin
      while (!t0_valid) @(posedge clk);
      repeat (2) @(posedge clk);
      din = d; decrypt = dec; data_start = 1;
      @(posedge clk); data_start = 0;
    end
    while (!done) begin @(posedge clk); cyc++; end
    check(cyc == (early ? 2*NR : 4*NR+1), $sformatf("line latency %0d", cyc));
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [255:0] k1, k2;
    line8_t l, e;
    ref_init();
    repeat (3) @(posedge clk);
    rst_n = 1;
    if (KEY_BITS == 128) begin
      set_keys(256'h0, 256'h0);
      run(1, 0, 128'h0, '0);
      check(dout[1023:768] == 256'h917cf69ebd68b2ec9b9fe9a3eadda692cd43d2f59598ed858c02c2652fbf922e,
            "IEEE 1619 XTS-AES-128 vector 1");
      set_keys({128'h11111111111111111111111111111111, 128'h0},
               {128'h22222222222222222222222222222222, 128'h0});
      run(0, 0, 128'h33333333330000000000000000000000, {8{128'h44444444444444444444444444444444}});
      check(dout[1023:768] == 256'hc454185e6a16936e39334038acef838bfb186fff7480adc4289382ecd6d394f0,
            "IEEE 1619 XTS-AES-128 vector 2");
    end
    for (int n = 0; n < 12; n++) begin
      k1 = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      k2 = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      if (KEY_BITS == 128) begin k1[127:0] = '0; k2[127:0] = '0; end
      set_keys(k1, k2);
      for (int i = 0; i < 8; i++) l[i] = {$urandom, $urandom, $urandom, $urandom};
      x = {$urandom, $urandom, $urandom, $urandom};
      run(n[0], n[1], x, pack_line(l));
      e = xts(k1, k2, NK, x, l, n[1]);
      check(dout == pack_line(e), "random line vs reference");
      check(t0 == aes_enc(k2, NK, x), "T0 = E_K2(X)");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
