// tb_central_spec_logic: self-checking test of the central speculation logic.
//
// The thread states of the four PEs are set by the testbench.  Checks the
// program start, out-of-order spawning into the Immediate Successor List
// (a child goes right after its parent and inherits its successors), thread
// versions (child gets the parent's, parent adds one), refusal with no free
// PE, violation -> restart of the earliest violator and squash of the later
// threads, the sqush instruction, verification routing and result, commit
// with token passing, and squash of all speculative threads on a failed
// verification.  Every event takes effect in one cycle.
module tb_central_spec_logic;
  import prophet_pkg::*;
  localparam int NPE = 4;

  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;

  tstate_e       state [NPE];
  logic          spawn_req [NPE], spawn_ack [NPE], squash_req [NPE], squash_ack [NPE];
  logic [LW-1:0] spawn_label [NPE], squash_label [NPE], start_pc [NPE];
  logic          spawn_ok;
  logic          vfy_done [NPE], vfy_pass [NPE], commit_done [NPE], vio [NPE];
  logic          spawn_go [NPE], start_stable [NPE], verify_msg [NPE], sub_done [NPE];
  logic          sub_pass [NPE], token [NPE], squash [NPE], restart [NPE], has_succ [NPE];
  logic          active [NPE];
  logic [1:0]    copy_from [NPE], parent [NPE], stable_pe;
  logic [2:0]    rank [NPE], cnt;
  logic [VW-1:0] tv [NPE];
  int checks = 0, failures = 0;

  central_spec_logic #(.NPE(NPE)) dut (.*);

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic string isl();
    string s = "";
    for (int i = 0; i < NPE; i++) if (i < cnt) s = {s, $sformatf("%0d", dut.order[i])};
    return s;
  endfunction

  task automatic spawn(input int p, input logic [LW-1:0] lab, input int exp_child);
    @(negedge clk); spawn_req[p] = 1; spawn_label[p] = lab; #1;
    check(spawn_ack[p], "spawn acknowledged");
    if (exp_child >= 0) check(spawn_ok && spawn_go[exp_child] && copy_from[exp_child] == 2'(p),
                              $sformatf("PE%0d spawns PE%0d", p, exp_child));
    else check(!spawn_ok, "spawn refused, no free PE");
    @(negedge clk); spawn_req[p] = 0;
    if (exp_child >= 0) state[exp_child] = TS_SPEXEC;
  endtask

  initial begin
    #5000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < NPE; p++) begin
      state[p] = TS_IDLE; spawn_req[p] = 0; squash_req[p] = 0; vfy_done[p] = 0;
      vfy_pass[p] = 0; commit_done[p] = 0; vio[p] = 0; spawn_label[p] = '0; squash_label[p] = '0;
    end
    repeat (2) @(negedge clk); rst_n = 1;
    start = 1; #1 check(start_stable[0], "start makes PE0 stable");
    @(negedge clk); start = 0; state[0] = TS_STABLE;
    check(cnt == 1 && tv[0] == 1 && stable_pe == 0, "one stable thread, version 1");
    spawn(0, 16'hA, 1);
    check(isl() == "01" && tv[0] == 2 && tv[1] == 1 && parent[1] == 0 && start_pc[1] == 16'hA,
          $sformatf("ISL 01, versions (%s)", isl()));
    spawn(0, 16'hB, 2);
    check(isl() == "021" && tv[0] == 3 && tv[2] == 2, $sformatf("second child goes first (%s)", isl()));
    spawn(1, 16'hC, 3);
    check(isl() == "0213" && has_succ[1] && !has_succ[3], $sformatf("ISL 0213 (%s)", isl()));
    check(rank[1] == 2 && rank[3] == 3, "ranks");
    spawn(3, 16'hD, -1);
    // violation on PE1 and PE3: PE1 restarts, PE3 squashed
    @(negedge clk); vio[1] = 1; vio[3] = 1; #1;
    check(restart[1] && squash[3] && !restart[3] && !squash[2], "earliest violator restarts");
    @(negedge clk); vio[1] = 0; vio[3] = 0; state[3] = TS_IDLE;
    check(isl() == "021", $sformatf("squashed thread left the ISL (%s)", isl()));
    // sqush instruction from PE0 naming PE1's label
    @(negedge clk); squash_req[0] = 1; squash_label[0] = 16'hA; #1;
    check(squash_ack[0] && squash[1] && !squash[2], "sqush squashes the labelled thread");
    @(negedge clk); squash_req[0] = 0; state[1] = TS_IDLE;
    check(isl() == "02", $sformatf("ISL 02 (%s)", isl()));
    // verification of PE2 by the stable PE0
    state[0] = TS_SUBVERIFY; #1;
    check(verify_msg[2] && !verify_msg[1], "verification message to the successor");
    @(negedge clk); vfy_done[2] = 1; vfy_pass[2] = 1; #1;
    check(sub_done[0] && sub_pass[0], "pass reported to the stable thread");
    @(negedge clk); vfy_done[2] = 0; state[0] = TS_COMMIT; state[2] = TS_VERIFY;
    @(negedge clk); commit_done[0] = 1; #1;
    check(token[2], "stable token to the successor");
    @(negedge clk); commit_done[0] = 0; state[0] = TS_IDLE; state[2] = TS_STABLE;
    check(isl() == "2" && stable_pe == 2, $sformatf("PE2 is stable (%s)", isl()));
    // failed verification squashes all speculative threads
    spawn(2, 16'hE, 0);
    spawn(2, 16'hF, 1);
    state[2] = TS_SUBVERIFY; #1;
    check(verify_msg[1], "verify the nearest successor");
    @(negedge clk); vfy_done[1] = 1; vfy_pass[1] = 0; #1;
    check(sub_done[2] && !sub_pass[2] && squash[0] && squash[1], "failure squashes every successor");
    @(negedge clk); vfy_done[1] = 0;
    check(cnt == 1, "only the stable thread remains");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
