// thread_ctrl: thread state controller of one PE.
//
// Keeps the PE's thread in one of the execution model's states (Idle,
// Initialization, Pre-compute, Sp_execution, Wait, Verification, Stable
// execution, Sub thread verify, Commit, Squash, Restart) and moves it on the
// events of the model.  The state meanings follow the model; the design's own
// state diagram was not available, so the transitions below are this
// implementation's reading of the state semantics:
//   Idle        -spawn_go-> Initialization;  -start_stable-> Stable execution
//   Initialization -> Pre-compute (one cycle: registers, version and start
//               address are copied in the spawn cycle)
//   Pre-compute -pslice_exit-> Sp_execution
//   Sp_execution -cqip, successor exists-> Wait (a cqip with no successor is
//               passed over); -verify_msg-> Verification
//   Wait        -verify_msg-> Verification
//   Verification -token-> Stable execution (after the own verification passed)
//   Stable execution -cqip (or a cqip reached while speculative), successor
//               exists-> Sub thread verify
//   Sub thread verify -sub_done & sub_pass-> Commit; -sub_done & !sub_pass->
//               Stable execution (successors were squashed, it runs on)
//   Commit      -commit_done-> Idle (the central logic then passes the token)
//   any speculative state -squash-> Squash -> Idle
//   Pre-compute/Sp_execution/Wait -restart-> Restart -> Pre-compute
// Outputs: the state, core_run (core may fetch), core_start (one-cycle pulse
// telling the core to begin at its thread's start address), spec_mode
// (memory and register accesses are speculative/stable rather than
// pre-computation).  Every event input is sampled at the rising edge.
module thread_ctrl
  import prophet_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    spawn_go,
  input  logic    start_stable,
  input  logic    pslice_exit,
  input  logic    cqip,
  input  logic    has_succ,
  input  logic    verify_msg,
  input  logic    token,
  input  logic    sub_done,
  input  logic    sub_pass,
  input  logic    commit_done,
  input  logic    squash,
  input  logic    restart,
  output tstate_e state,
  output logic    at_cqip,
  output logic    core_run,
  output logic    core_start,
  output logic    spec_mode
);

  tstate_e nxt;
  logic    at_cqip_n;

  always_comb begin
    nxt = state;
    at_cqip_n = at_cqip;
    unique case (state)
      TS_IDLE:      begin
                      at_cqip_n = 1'b0;
                      if (spawn_go) nxt = TS_INIT;
                      else if (start_stable) nxt = TS_STABLE;
                    end
      TS_INIT:      nxt = TS_PRECOMP;
      TS_PRECOMP:   if (pslice_exit) nxt = TS_SPEXEC;
      TS_SPEXEC:    if (verify_msg) nxt = TS_VERIFY;
                    else if (cqip && has_succ) begin nxt = TS_WAIT; at_cqip_n = 1'b1; end
      TS_WAIT:      if (verify_msg) nxt = TS_VERIFY;
      TS_VERIFY:    if (token) nxt = TS_STABLE;
      TS_STABLE:    if ((cqip || at_cqip) && has_succ) nxt = TS_SUBVERIFY;
                    else if (at_cqip) at_cqip_n = 1'b0;
      TS_SUBVERIFY: if (sub_done) begin
                      nxt = sub_pass ? TS_COMMIT : TS_STABLE;
                      at_cqip_n = 1'b0;
                    end
      TS_COMMIT:    if (commit_done) nxt = TS_IDLE;
      TS_SQUASH:    nxt = TS_IDLE;
      TS_RESTART:   begin nxt = TS_PRECOMP; at_cqip_n = 1'b0; end
      default:      nxt = TS_IDLE;
    endcase
    // squash and restart override the normal flow of a speculative thread
    if (state inside {TS_INIT, TS_PRECOMP, TS_SPEXEC, TS_WAIT, TS_VERIFY} && squash) begin
      nxt = TS_SQUASH; at_cqip_n = 1'b0;
    end else if (state inside {TS_PRECOMP, TS_SPEXEC, TS_WAIT} && restart) begin
      nxt = TS_RESTART; at_cqip_n = 1'b0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= TS_IDLE; at_cqip <= 1'b0; core_start <= 1'b0;
    end else begin
      state      <= nxt;
      at_cqip    <= at_cqip_n;
      core_start <= (nxt == TS_PRECOMP && state inside {TS_INIT, TS_RESTART}) ||
                    (nxt == TS_STABLE && state == TS_IDLE);
    end
  end

  assign core_run  = state inside {TS_PRECOMP, TS_SPEXEC, TS_STABLE};
  assign spec_mode = state inside {TS_SPEXEC, TS_WAIT, TS_VERIFY, TS_STABLE,
                                   TS_SUBVERIFY, TS_COMMIT};

endmodule
