// central_spec_logic: the central speculation logic shared by all PEs.
//
// Keeps the logical order of the running threads as an Immediate Successor
// List (ISL): order[0] is the stable thread, order[1] its immediate
// successor, and so on up to the most speculative thread at order[cnt-1].
// For every PE it also keeps the parent pointer, the thread version and the
// thread's start address (label).
//   * Spawn by p: a free PE c is taken, inserted right after p (it inherits
//     all of p's successors), gets p as parent, p's thread version and the
//     spawn label; p's version is then increased by one.  spawn_go[c] is the
//     one-cycle initialisation pulse; copy_from[c] = p selects whose
//     registers are copied.  With no free PE the spawn is refused
//     (spawn_ok = 0) and p runs on.
//   * Verification: while the stable thread is in Sub thread verify,
//     verify_msg is held to order[1].  Its result is passed back with
//     sub_done/sub_pass; a failure squashes every speculative thread.
//   * Commit: when the stable thread reports commit_done it leaves the ISL
//     and the stable token (one-cycle pulse) goes to the new order[0].
//   * Violation: of the PEs reporting a RAW violation on a VioTest, the
//     earliest in order is restarted and all later threads are squashed.
//   * sqush instruction from p: the first later thread started at the given
//     label, and every thread after it, are squashed.
//   * start: PE 0 begins the program as the stable thread with version 1.
// Thread versions start at 1 ("a positive integer").  One event is handled
// per cycle in the order violation, commit, verification result, squash
// instruction, spawn; result pulses that lose are remembered and handled
// later.  All outputs are combinational from the registered ISL and the
// current requests; the ISL updates at the clock edge.  The ISL and the
// version rules follow the design; the event order, the refusal of a spawn
// with no free PE and the label match of sqush are this implementation's.
module central_spec_logic
  import prophet_pkg::*;
#(
  parameter int NPE = 4,
  localparam int PW = (NPE > 1) ? $clog2(NPE) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  tstate_e        state        [NPE],
  input  logic           spawn_req    [NPE],
  input  logic [LW-1:0]  spawn_label  [NPE],
  output logic           spawn_ack    [NPE],
  output logic           spawn_ok,
  input  logic           squash_req   [NPE],
  input  logic [LW-1:0]  squash_label [NPE],
  output logic           squash_ack   [NPE],
  input  logic           vfy_done     [NPE],
  input  logic           vfy_pass     [NPE],
  input  logic           commit_done  [NPE],
  input  logic           vio          [NPE],
  output logic           spawn_go     [NPE],
  output logic [PW-1:0]  copy_from    [NPE],
  output logic           start_stable [NPE],
  output logic [LW-1:0]  start_pc     [NPE],
  output logic [VW-1:0]  tv           [NPE],
  output logic           verify_msg   [NPE],
  output logic           sub_done     [NPE],
  output logic           sub_pass     [NPE],
  output logic           token        [NPE],
  output logic           squash       [NPE],
  output logic           restart      [NPE],
  output logic           has_succ     [NPE],
  output logic           active       [NPE],
  output logic [PW:0]    rank         [NPE],
  output logic [PW-1:0]  parent       [NPE],
  output logic [PW-1:0]  stable_pe,
  output logic [PW:0]    cnt
);

  logic [PW-1:0] order   [NPE];
  logic [PW-1:0] order_n [NPE];
  logic [PW:0]   cnt_n;
  logic [PW-1:0] parent_n [NPE];
  logic [VW-1:0] tv_n     [NPE];
  logic [LW-1:0] label_n  [NPE];
  logic [LW-1:0] label    [NPE];
  logic          pend_vfy, pend_pass, pend_commit;
  logic          pend_vfy_n, pend_pass_n, pend_commit_n;

  assign start_pc  = label;
  logic [PW-1:0] parent_r [NPE];
  assign parent    = parent_r;
  assign stable_pe = order[0];

  // ISL position of every PE
  always_comb begin
    for (int p = 0; p < NPE; p++) begin
      active[p] = 1'b0; rank[p] = '0;
      for (int i = 0; i < NPE; i++)
        if ((PW+1)'(i) < cnt && order[i] == PW'(p)) begin active[p] = 1'b1; rank[p] = (PW+1)'(i); end
      has_succ[p] = active[p] && (rank[p] + 1'b1 < cnt);
      verify_msg[p] = (cnt >= 2) && order[1] == PW'(p) && state[order[0]] == TS_SUBVERIFY;
    end
  end

  always_comb begin
    automatic logic          done = 1'b0;
    automatic logic          vf;
    automatic logic [PW:0]   k;
    automatic logic          found;
    automatic logic [PW-1:0] c;
    order_n = order; cnt_n = cnt; parent_n = parent_r; tv_n = tv; label_n = label;
    spawn_ok = 1'b0;
    for (int p = 0; p < NPE; p++) begin
      spawn_ack[p] = 1'b0; squash_ack[p] = 1'b0; spawn_go[p] = 1'b0;
      copy_from[p] = parent_r[p]; start_stable[p] = 1'b0; sub_done[p] = 1'b0;
      sub_pass[p] = 1'b0; token[p] = 1'b0; squash[p] = 1'b0; restart[p] = 1'b0;
    end
    pend_vfy_n    = pend_vfy    || (cnt >= 2 && vfy_done[order[1]]);
    pend_pass_n   = (cnt >= 2 && vfy_done[order[1]]) ? vfy_pass[order[1]] : pend_pass;
    pend_commit_n = pend_commit || (cnt >= 1 && commit_done[order[0]]);

    // start of the program
    if (start && cnt == '0) begin
      order_n[0] = '0; cnt_n = 1; tv_n[0] = 1; label_n[0] = '0; start_stable[0] = 1'b1;
      done = 1'b1;
    end

    // 1. violation: restart the earliest violating thread, squash the later ones
    found = 1'b0; k = '0;
    for (int i = NPE - 1; i >= 1; i--)
      if ((PW+1)'(i) < cnt && vio[order[i]] && state[order[i]] inside {TS_SPEXEC, TS_WAIT}) begin
        found = 1'b1; k = (PW+1)'(i);
      end
    if (!done && found) begin
      restart[order[PW'(k)]] = 1'b1;
      for (int i = 0; i < NPE; i++)
        if ((PW+1)'(i) > k && (PW+1)'(i) < cnt) squash[order[i]] = 1'b1;
      cnt_n = k + 1'b1;
      done = 1'b1;
    end

    // 2. commit of the stable thread: remove it, pass the stable token
    if (!done && pend_commit_n) begin
      for (int i = 0; i < NPE - 1; i++) order_n[i] = order[i+1];
      cnt_n = cnt - 1'b1;
      if (cnt >= 2) token[order[1]] = 1'b1;
      pend_commit_n = 1'b0;
      done = 1'b1;
    end

    // 3. verification result of order[1]
    if (!done && pend_vfy_n) begin
      vf = pend_pass_n;
      sub_done[order[0]] = 1'b1;
      sub_pass[order[0]] = vf;
      if (!vf) begin
        for (int i = 1; i < NPE; i++) if ((PW+1)'(i) < cnt) squash[order[i]] = 1'b1;
        cnt_n = 1;
      end
      pend_vfy_n = 1'b0;
      done = 1'b1;
    end

    // 4. sqush instruction
    for (int p = 0; p < NPE; p++) begin
      if (!done && squash_req[p]) begin
        squash_ack[p] = 1'b1;
        found = 1'b0; k = '0;
        for (int i = NPE - 1; i >= 0; i--)
          if ((PW+1)'(i) < cnt && (PW+1)'(i) > rank[p] && label[order[i]] == squash_label[p]) begin
            found = 1'b1; k = (PW+1)'(i);
          end
        if (active[p] && found) begin
          for (int i = 0; i < NPE; i++)
            if ((PW+1)'(i) >= k && (PW+1)'(i) < cnt) squash[order[i]] = 1'b1;
          cnt_n = k;
        end
        done = 1'b1;
      end
    end

    // 5. spawn
    for (int p = 0; p < NPE; p++) begin
      if (!done && spawn_req[p]) begin
        spawn_ack[p] = 1'b1;
        found = 1'b0; c = '0;
        for (int q = NPE - 1; q >= 0; q--)
          if (!active[q] && state[q] == TS_IDLE) begin found = 1'b1; c = PW'(q); end
        if (active[p] && found) begin
          spawn_ok     = 1'b1;
          spawn_go[c]  = 1'b1;
          copy_from[c] = PW'(p);
          parent_n[c]  = PW'(p);
          tv_n[c]      = tv[p];
          tv_n[p]      = tv[p] + 1'b1;
          label_n[c]   = spawn_label[p];
          for (int i = 0; i < NPE; i++) begin
            if ((PW+1)'(i) == rank[p] + 1'b1)    order_n[i] = c;
            else if ((PW+1)'(i) > rank[p] + 1'b1) order_n[i] = order[i-1];
          end
          cnt_n = cnt + 1'b1;
        end
        done = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0; pend_vfy <= 1'b0; pend_pass <= 1'b0; pend_commit <= 1'b0;
      for (int i = 0; i < NPE; i++) begin
        order[i] <= '0; parent_r[i] <= '0; tv[i] <= '0; label[i] <= '0;
      end
    end else begin
      cnt <= cnt_n; order <= order_n; parent_r <= parent_n; tv <= tv_n; label <= label_n;
      pend_vfy <= pend_vfy_n; pend_pass <= pend_pass_n; pend_commit <= pend_commit_n;
    end
  end

endmodule
