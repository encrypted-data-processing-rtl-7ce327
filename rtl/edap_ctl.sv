// edap_ctl: transfer-of-control sequencer of the trusted footprint.
//
// The paper's rule for the L2/L1 configuration: any transfer of control
// into supervisor/hypervisor must clear the L1 caches and disengage the
// encryption engine; any transfer back to the authorized program's
// problem state must clear the L1 caches and re-engage it. This block
// enforces that order:
//  * resume (enter the authorized program): ignored and flagged with
//    resume_refused unless keys are installed; otherwise both caches are
//    cleared while the engine is still disengaged (raw lines of privileged
//    code are written back raw), then engaged goes high.
//  * trap (enter supervisor/hypervisor): both caches are cleared while the
//    engine is still engaged (the program's dirty lines leave encrypted),
//    then engaged goes low.
// While a clear runs, hold is high and the core must not issue requests
// or change privilege. user_mode is high while the authorized program may
// run (engine engaged, caches holding only its lines).
//
// A switch also waits until the engine's writeback buffer has written its
// last line (wb_busy low), so the program's last dirty line is in memory,
// encrypted, before privileged code runs.
//
// Timing: clr_req is a one-cycle pulse one cycle after the accepted
// trap/resume; engaged changes the cycle after both caches have pulsed
// clr_done and wb_busy is low. From the paper: the clear-and-switch rule; this design's
// choice: the sequencing, the refusal without keys, the pulse interface.
module edap_ctl (
  input  logic clk,
  input  logic rst_n,
  input  logic keys_ready,
  input  logic trap,
  input  logic resume,
  input  logic clr_done_d,
  input  logic clr_done_i,
  input  logic wb_busy,
  output logic clr_req,
  output logic engaged,
  output logic hold,
  output logic user_mode,
  output logic resume_refused
);

  typedef enum logic [1:0] {C_SUP, C_CLR_IN, C_USER, C_CLR_OUT} ctl_st_e;
  ctl_st_e st;
  logic d_seen, i_seen;
  logic both_done;

  assign both_done = (d_seen || clr_done_d) && (i_seen || clr_done_i);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_SUP; engaged <= 1'b0; clr_req <= 1'b0;
      d_seen <= 1'b0; i_seen <= 1'b0; resume_refused <= 1'b0;
    end else begin
      clr_req <= 1'b0;
      resume_refused <= 1'b0;
      unique case (st)
        C_SUP: if (resume) begin
          if (keys_ready) begin
            clr_req <= 1'b1;
            d_seen <= 1'b0; i_seen <= 1'b0;
            st <= C_CLR_IN;
          end else begin
            resume_refused <= 1'b1;
          end
        end
        C_USER: if (trap) begin
          clr_req <= 1'b1;
          d_seen <= 1'b0; i_seen <= 1'b0;
          st <= C_CLR_OUT;
        end
        C_CLR_IN, C_CLR_OUT: begin
          if (clr_done_d) d_seen <= 1'b1;
          if (clr_done_i) i_seen <= 1'b1;
          if (both_done && !clr_req && !wb_busy) begin
            engaged <= (st == C_CLR_IN);
            st <= (st == C_CLR_IN) ? C_USER : C_SUP;
          end
        end
        default: st <= C_SUP;
      endcase
    end
  end

  assign hold      = (st == C_CLR_IN) || (st == C_CLR_OUT);
  assign user_mode = (st == C_USER);

  a_engaged_only_in_user: assert property (@(posedge clk) disable iff (!rst_n)
    user_mode |-> engaged);

endmodule
