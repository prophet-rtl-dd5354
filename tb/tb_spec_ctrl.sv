// tb_spec_ctrl: self-checking test of the speculation controller.
//
// The memory cache is modelled by an array read through the walk port and
// the bus by a responder that answers every request after one wait cycle
// with the "stable thread's" value of the address.  Checks: verification
// reads exactly the PreEx/PreExO lines and passes when they all match, fails
// on one mismatch or on a register mismatch, and synchronises registers only
// on a pass; commit writes back exactly the newest modified lines (PreEx,
// SpShM, SpEx) and then invalidates; Squash and Restart invalidate; the walk
// takes one start cycle, one cycle per line and the bus wait of each transfer.
module tb_spec_ctrl;
  import prophet_pkg::*;
  localparam int ENTRIES = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  tstate_e       state = TS_SPEXEC;
  logic [2:0]    w_idx;
  mline_t        w_line, lines [ENTRIES];
  logic          inv_all, reg_fail = 0, reg_sync, sreq_valid, sreq_done, vfy_done, vfy_pass;
  logic          commit_done;
  bus_req_t      sreq;
  logic [DW-1:0] sreq_rdata;
  logic [DW-1:0] stable_val [AW];
  int checks = 0, failures = 0, nrd = 0, nwb = 0, wait_c = 0, syncs = 0, invs = 0;
  logic [AW-1:0] wb_addr [$];

  spec_ctrl #(.ENTRIES(ENTRIES)) dut (.*);

  assign w_line = lines[w_idx];
  assign sreq_done = sreq_valid && wait_c == 1;
  assign sreq_rdata = stable_val[sreq.addr[3:0]];
  always @(posedge clk) begin
    wait_c <= (sreq_valid && !sreq_done) ? wait_c + 1 : 0;
    if (sreq_done && sreq.cmd == BUS_RSP) nrd++;
    if (sreq_done && sreq.cmd == BUS_WB) begin nwb++; wb_addr.push_back(sreq.addr); end
    if (reg_sync) syncs++;
    if (inv_all) invs++;
  end

  function automatic mline_t L(logic rl, logic m, logic [VW-1:0] ver, logic o,
                               logic [AW-1:0] a, logic [DW-1:0] d);
    mline_t r; r.v = 1; r.rl = rl; r.m = m; r.ver = ver; r.o = o; r.tag = a; r.data = d;
    return r;
  endfunction

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(input tstate_e s, output logic pass, output int cyc);
    @(negedge clk); state = s; cyc = 0; pass = 0;
    while (!(vfy_done || commit_done) && cyc < 200) begin @(negedge clk); cyc++; end
    pass = vfy_pass;
    @(negedge clk); state = TS_SPEXEC;
    repeat (2) @(negedge clk);
  endtask

  initial begin
    #20000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic pass; int cyc;
    for (int i = 0; i < ENTRIES; i++) lines[i] = '0;
    for (int i = 0; i < AW; i++) stable_val[i] = 0;
    lines[0] = L(0, 1, 0, 0, 16'h1, 32'd5);    // PreEx
    lines[2] = L(0, 1, 0, 1, 16'h2, 32'd7);    // PreExO
    lines[3] = L(0, 1, 1, 0, 16'h3, 32'd9);    // SpEx
    lines[4] = L(1, 0, 1, 0, 16'h4, 32'd1);    // SpSh
    lines[5] = L(1, 1, 1, 0, 16'h5, 32'd2);    // SpShM
    lines[6] = L(0, 1, 1, 1, 16'h6, 32'd3);    // SpExO
    lines[7] = L(1, 0, 0, 1, 16'h7, 32'd4);    // PreSh
    stable_val[1] = 5; stable_val[2] = 7;
    repeat (2) @(negedge clk); rst_n = 1;
    run(TS_VERIFY, pass, cyc);
    check(pass && nrd == 2 && syncs == 1, $sformatf("verification passes (reads %0d)", nrd));
    check(cyc == 1 + ENTRIES + 2, $sformatf("one cycle per line plus bus time (%0d)", cyc));
    stable_val[2] = 8; nrd = 0;
    run(TS_VERIFY, pass, cyc);
    check(!pass && nrd == 2 && syncs == 1, "PreExO mismatch fails, no register sync");
    stable_val[2] = 7; reg_fail = 1;
    run(TS_VERIFY, pass, cyc);
    check(!pass, "register mismatch fails");
    reg_fail = 0; invs = 0;
    run(TS_COMMIT, pass, cyc);
    check(nwb == 3 && wb_addr.size() == 3 && wb_addr[0] == 1 && wb_addr[1] == 3 && wb_addr[2] == 5,
          $sformatf("commit writes back PreEx, SpEx, SpShM (%0d)", nwb));
    check(invs == 1, "cache invalidated after commit");
    @(negedge clk); state = TS_SQUASH; #1 check(inv_all, "squash invalidates");
    @(negedge clk); state = TS_RESTART; #1 check(inv_all, "restart invalidates");
    @(negedge clk); state = TS_SPEXEC; #1 check(!inv_all, "no invalidation while running");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
