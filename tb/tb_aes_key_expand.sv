// tb_aes_key_expand: checks the iterative key schedule against the
// FIPS-197 Appendix A example (last round key of key 2b7e1516...) and
// against the reference schedule for random keys, and checks that the
// schedule takes NW-NK cycles and that clear erases it.
module tb_aes_key_expand;
  import aes_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, clear = 0, start = 0;
  logic [KEY_BITS-1:0] key;
  logic busy, done;
  round_keys_t rks;
  int checks = 0, failures = 0;

  aes_key_expand dut (.clk, .rst_n, .clear, .start, .key, .busy, .done, .round_keys(rks));

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(logic [KEY_BITS-1:0] k);
    int cyc = 0;
    words_t w;
    key = k; start = 1;
    @(posedge clk); start = 0;
    while (!done) begin @(posedge clk); cyc++; end
    check(cyc == NW - NK, $sformatf("schedule took %0d cycles, expected %0d", cyc, NW - NK));
    w = expand({k, {(256-KEY_BITS){1'b0}}}, NK);
    for (int r = 0; r <= NR; r++)
      check(rks[r] == rk(w, r), $sformatf("round key %0d", r));
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ref_init();
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    if (KEY_BITS == 128) begin
      run(128'h2b7e151628aed2a6abf7158809cf4f3c);
      check(rks[NR] == 128'hd014f9a8c9ee2589e13f0cc8b6630ca6, "FIPS-197 A.1 round key 10");
    end else begin
      run(256'h603deb1015ca71be2b73aef0857d77811f352c073b6108d72d9810a30914dff4);
      check(rks[NR] == 128'hfe4890d1e6188d0b046df344706c631e, "FIPS-197 A.3 round key 14");
    end
    for (int n = 0; n < 20; n++) begin
      logic [255:0] r = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      run(r[KEY_BITS-1:0]);
    end
    clear = 1; @(posedge clk); clear = 0; @(posedge clk);
    check(rks == '0, "clear erases the schedule");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
