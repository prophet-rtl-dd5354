// tb_thread_ctrl: self-checking test of the thread state controller.
//
// Drives a spawned thread through Initialization, Pre-compute, Sp_execution,
// Wait, Verification and, on the stable token, Stable execution; then the
// stable thread's Sub thread verify (a failed and a passed verification),
// Commit and Idle.  A second thread is restarted and squashed, and an
// initial stable thread passes a cqip with no successor.  Every transition
// is expected one clock after its event.
module tb_thread_ctrl;
  import prophet_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic spawn_go = 0, start_stable = 0, pslice_exit = 0, cqip = 0, has_succ = 0;
  logic verify_msg = 0, token = 0, sub_done = 0, sub_pass = 0, commit_done = 0;
  logic squash = 0, restart = 0;
  tstate_e state;
  logic at_cqip, core_run, core_start, spec_mode;
  int checks = 0, failures = 0, starts = 0;

  thread_ctrl dut (.*);

  always @(posedge clk) if (rst_n && core_start) starts++;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (state %s)", what, state.name()); end
  endtask

  // raise an event for one cycle and check the state afterwards
  task automatic ev(ref logic s, input tstate_e exp, input string what);
    @(negedge clk); s = 1; @(negedge clk); s = 0;
    check(state == exp, what);
  endtask

  initial begin
    #5000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    check(state == TS_IDLE && !core_run, "idle after reset");
    ev(spawn_go, TS_INIT, "spawn -> Initialization");
    @(negedge clk); check(state == TS_PRECOMP && core_run && !spec_mode, "-> Pre-compute");
    ev(cqip, TS_PRECOMP, "cqip ignored in pre-computation");
    ev(pslice_exit, TS_SPEXEC, "pslice_exit -> Sp_execution");
    check(spec_mode, "speculative accesses in Sp_execution");
    ev(cqip, TS_SPEXEC, "cqip without successor passes");
    has_succ = 1;
    ev(cqip, TS_WAIT, "cqip -> Wait");
    check(!core_run && at_cqip, "core stopped at cqip");
    ev(verify_msg, TS_VERIFY, "verification message -> Verification");
    ev(token, TS_STABLE, "stable token -> Stable execution");
    @(negedge clk); check(state == TS_SUBVERIFY, "pending cqip -> Sub thread verify");
    sub_pass = 0;
    ev(sub_done, TS_STABLE, "failed verification -> continue stable");
    @(negedge clk); check(state == TS_STABLE, "stays stable");
    ev(cqip, TS_SUBVERIFY, "cqip -> Sub thread verify");
    ev(squash, TS_SUBVERIFY, "stable thread ignores squash");
    sub_pass = 1;
    ev(sub_done, TS_COMMIT, "passed verification -> Commit");
    ev(commit_done, TS_IDLE, "commit done -> Idle");
    // restart and squash of a speculative thread
    ev(spawn_go, TS_INIT, "second spawn");
    @(negedge clk);
    ev(pslice_exit, TS_SPEXEC, "-> Sp_execution");
    ev(restart, TS_RESTART, "violation -> Restart");
    @(negedge clk); check(state == TS_PRECOMP, "Restart -> Pre-compute");
    ev(squash, TS_SQUASH, "squash -> Squash");
    @(negedge clk); check(state == TS_IDLE, "Squash -> Idle");
    has_succ = 0;
    ev(start_stable, TS_STABLE, "program start -> Stable execution");
    ev(cqip, TS_STABLE, "stable cqip without successor passes");
    @(negedge clk);
    check(starts == 4, "core_start on every (re)start");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
