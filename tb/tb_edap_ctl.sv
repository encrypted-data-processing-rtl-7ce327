// tb_edap_ctl: checks the transfer-of-control order with cache models that
// finish their clears after different delays and an engine whose
// writeback buffer drains after both: resume without keys is
// refused; resume clears both caches while still disengaged and engages
// only after both are done; trap clears both caches while still engaged
// and disengages only after both are done; hold covers each clear.
module tb_edap_ctl;
  logic clk = 0, rst_n = 0, keys_ready = 0, trap = 0, resume = 0;
  logic clr_done_d = 0, clr_done_i = 0, wb_busy = 0;
  logic clr_req, engaged, hold, user_mode, resume_refused;
  int checks = 0, failures = 0;
  int clr_reqs = 0;

  edap_ctl dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // cache models: done pulses 7 (data) and 13 (instruction) cycles after clr_req
  always @(posedge clk) if (rst_n && clr_req) begin
    clr_reqs++;
    fork
      begin repeat (7) @(posedge clk); #1 clr_done_d = 1; @(posedge clk); #1 clr_done_d = 0; end
      begin repeat (13) @(posedge clk); #1 clr_done_i = 1; @(posedge clk); #1 clr_done_i = 0; end
      begin #1 wb_busy = 1; repeat (17) @(posedge clk); #1 wb_busy = 0; end
    join_none
  end

  task automatic pulse(ref logic s);
    #1 s = 1; @(posedge clk); #1 s = 0;
  endtask

  task automatic transition(bit to_user);
    logic start_eng = engaged;
    int n = 0;
    if (to_user) pulse(resume); else pulse(trap);
    while (hold) begin
      check(engaged == start_eng, "mode unchanged while caches clear");
      @(posedge clk); n++;
    end
    check(n >= 17, $sformatf("hold lasted %0d cycles, covers both clears and the drain", n));
    check(engaged == to_user && user_mode == to_user, "mode after transition");
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    check(!engaged && !user_mode, "starts disengaged");
    #1 resume = 1; @(posedge clk); #1 resume = 0;
    check(resume_refused && !hold, "resume without keys is refused");
    @(posedge clk);
    keys_ready = 1;
    for (int i = 0; i < 3; i++) begin
      transition(1);
      repeat (4) @(posedge clk);
      transition(0);
    end
    check(clr_reqs == 6, $sformatf("one clear per transition (%0d)", clr_reqs));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
