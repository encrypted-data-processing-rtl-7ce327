// tb_edap_key_store: installs random SEIDs and XTS key pairs and checks the
// round keys and the hash key H = E_K2(0) against the reference, the
// install time (NW-NK key expansion + 2*NR for H + 2 cycles of
// sequencing; 62 cycles for 128-bit keys), and that zeroize erases
// everything and drops keys_ready.
module tb_edap_key_store;
  import aes_pkg::*;
  import edap_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, install = 0, zeroize = 0;
  seid_t in_seid, seid;
  logic [KEY_BITS-1:0] in_k1, in_k2;
  logic busy, keys_ready;
  round_keys_t rk1, rk2;
  blk_t hkey;
  int checks = 0, failures = 0;

  edap_key_store dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [255:0] k1, k2;
    words_t w1, w2;
    int cyc;
    ref_init();
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    check(!keys_ready, "no keys after reset");
    for (int n = 0; n < 6; n++) begin
      k1 = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      k2 = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      if (KEY_BITS == 128) begin k1[127:0] = '0; k2[127:0] = '0; end
      in_k1 = k1[255 -: KEY_BITS]; in_k2 = k2[255 -: KEY_BITS];
      in_seid = {$urandom, $urandom};
      install = 1; @(posedge clk); install = 0;
      cyc = 0;
      while (!keys_ready) begin @(posedge clk); cyc++; end
      check(cyc == NW - NK + 2*NR + 2, $sformatf("install took %0d cycles", cyc));
      w1 = expand(k1, NK); w2 = expand(k2, NK);
      for (int r = 0; r <= NR; r++) begin
        check(rk1[r] == rk(w1, r), "K1 round key");
        check(rk2[r] == rk(w2, r), "K2 round key");
      end
      check(hkey == aes_enc(k2, NK, 128'h0), "H = E_K2(0)");
      check(seid == in_seid, "SEID register");
      check(!busy, "idle after install");
    end
    zeroize = 1; @(posedge clk); zeroize = 0; @(posedge clk);
    check(!keys_ready && rk1 == '0 && rk2 == '0 && hkey == '0 && seid == '0, "zeroize erases keys");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
