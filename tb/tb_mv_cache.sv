// tb_mv_cache: self-checking test of the multi-version memory cache.
//
// Walks the line state machine: pre-computation writes and fills, the
// speculative write rules (in place, or old line plus new entry when the
// thread version has changed), version-filtered answers to a sub thread's
// RPrR, newest-version answers to RSpR, VioTest violation reporting, the
// full-cache condition and en-masse invalidation.  Expected values are
// written out by hand from the line state rules.
module tb_mv_cache;
  import prophet_pkg::*;

  localparam int ENTRIES = 8;
  localparam int IW = $clog2(ENTRIES);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [AW-1:0] l_addr = '0;
  lop_e          l_op = LOP_PRE_WR;
  logic          l_op_valid = 0;
  logic [DW-1:0] l_wdata = '0;
  logic [VW-1:0] tv = '0;
  logic          l_hit, l_can;
  logic [DW-1:0] l_data;
  lstate_e       l_state;
  logic          s_valid = 0, s_stm = 0;
  bus_cmd_e      s_cmd = BUS_RSP;
  logic [AW-1:0] s_addr = '0;
  logic [VW-1:0] s_ver = '0;
  logic          s_hit, s_vio;
  logic [DW-1:0] s_data;
  logic [IW-1:0] w_idx = '0;
  mline_t        w_line;
  logic          inv_all = 0;
  logic [IW:0]   used;

  int checks = 0, failures = 0;

  mv_cache #(.ENTRIES(ENTRIES)) dut (.*);

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic op(input lop_e o, input logic [AW-1:0] a, input logic [DW-1:0] d,
                    input logic [VW-1:0] v);
    @(negedge clk);
    l_op = o; l_addr = a; l_wdata = d; tv = v; l_op_valid = 1;
    @(negedge clk);
    l_op_valid = 0;
  endtask

  task automatic look(input logic [AW-1:0] a, input lstate_e st, input logic [DW-1:0] d,
                      input string what);
    l_addr = a; #1;
    check(l_hit == (st != LS_INVALID) && l_state == st && (st == LS_INVALID || l_data == d), what);
  endtask

  task automatic snoop(input bus_cmd_e c, input logic [AW-1:0] a, input logic [VW-1:0] v,
                       input logic stm, input logic hit, input logic [DW-1:0] d,
                       input logic vio, input string what);
    s_valid = 1; s_cmd = c; s_addr = a; s_ver = v; s_stm = stm; #1;
    check(s_hit == hit && (!hit || s_data == d) && s_vio == vio, what);
    s_valid = 0;
  endtask

  // count lines in a given state through the walk port
  function automatic int count_state(lstate_e st);
    int n = 0;
    for (int i = 0; i < ENTRIES; i++) if (line_state(dut.lines[i]) == st) n++;
    return n;
  endfunction

  initial begin
    #20000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    // pre-computation
    op(LOP_PRE_WR, 16'h10, 32'hA1, 8'd0);
    look(16'h10, LS_PREEX, 32'hA1, "LPrW miss -> PreEx");
    op(LOP_FILL_PRE, 16'h20, 32'hB1, 8'd0);
    look(16'h20, LS_PRESH, 32'hB1, "LPrR fill -> PreSh");
    w_idx = 1; #1;
    check(w_line.v && w_line.rl && !w_line.m && w_line.ver == 0 && w_line.o, "PreSh encoded 1 1 0 0 1");
    snoop(BUS_RSP, 16'h10, 8'd0, 0, 0, 0, 0, "PreEx does not answer RSpR");
    snoop(BUS_RPR, 16'h20, 8'd5, 1, 0, 0, 0, "PreSh does not answer RPrR");
    op(LOP_PRE_WR, 16'h20, 32'hB2, 8'd0);
    look(16'h20, LS_PREEX, 32'hB2, "LPrW on PreSh -> PreEx");
    op(LOP_FILL_PRE, 16'h28, 32'hD1, 8'd0);
    // speculation begins, thread version 1
    op(LOP_SP_WR, 16'h10, 32'hA2, 8'd1);
    look(16'h10, LS_SPEX, 32'hA2, "LSpW on PreEx -> new SpEx");
    check(count_state(LS_PREEXO) == 2 - 1 && used == 4, "PreEx kept as PreExO, new entry");
    op(LOP_SP_WR, 16'h28, 32'hD2, 8'd1);
    look(16'h28, LS_SPEX, 32'hD2, "LSpW on PreSh -> SpEx in place");
    check(used == 4, "PreSh converted in place");
    op(LOP_FILL_SP, 16'h30, 32'hC1, 8'd1);
    look(16'h30, LS_SPSH, 32'hC1, "LSpR fill -> SpSh");
    snoop(BUS_VIO, 16'h30, 8'd1, 0, 0, 0, 1, "VioTest on SpSh -> violation");
    snoop(BUS_VIO, 16'h10, 8'd1, 0, 0, 0, 0, "VioTest on SpEx -> no violation");
    snoop(BUS_RSP, 16'h30, 8'd0, 0, 1, 32'hC1, 0, "SpSh answers RSpR");
    op(LOP_SP_WR, 16'h30, 32'hC2, 8'd1);
    look(16'h30, LS_SPSHM, 32'hC2, "LSpW on SpSh -> SpShM");
    snoop(BUS_VIO, 16'h30, 8'd1, 0, 0, 0, 1, "VioTest on SpShM -> violation");
    op(LOP_SP_WR, 16'h30, 32'hC3, 8'd1);
    check(used == 5, "same version SpShM written in place");
    // a spawn raised the thread version to 2
    op(LOP_SP_WR, 16'h30, 32'hC4, 8'd2);
    look(16'h30, LS_SPEX, 32'hC4, "LSpW NTV on SpShM -> new entry");
    check(count_state(LS_SPSHO) == 1 && used == 6, "SpShM becomes SpShO");
    snoop(BUS_VIO, 16'h30, 8'd2, 0, 0, 0, 1, "VioTest on SpShO -> violation");
    op(LOP_SP_WR, 16'h10, 32'hA3, 8'd2);
    look(16'h10, LS_SPEX, 32'hA3, "LSpW NTV on SpEx -> new entry");
    check(count_state(LS_SPEXO) == 1 && used == 7, "SpEx becomes SpExO");
    // sub thread (version 1) reads in pre-computation: version filtered
    snoop(BUS_RPR, 16'h10, 8'd1, 1, 1, 32'hA2, 0, "RPrR from sub thread gets version 1");
    snoop(BUS_RPR, 16'h30, 8'd1, 1, 1, 32'hC3, 0, "RPrR from sub thread gets SpShO");
    snoop(BUS_RPR, 16'h10, 8'd3, 1, 1, 32'hA3, 0, "RPrR version 3 gets version 2");
    snoop(BUS_RPR, 16'h10, 8'd1, 0, 1, 32'hA3, 0, "RPrR not from sub thread gets newest");
    snoop(BUS_RSP, 16'h10, 8'd0, 0, 1, 32'hA3, 0, "RSpR gets newest");
    snoop(BUS_RSP, 16'h44, 8'd0, 0, 0, 0, 0, "miss");
    // fill the last entry, then the cache is full
    op(LOP_FILL_SP, 16'h50, 32'hE1, 8'd2);
    l_addr = 16'h60; l_op = LOP_FILL_SP; #1;
    check(!l_can, "full cache refuses a new entry");
    l_addr = 16'h50; l_op = LOP_SP_WR; tv = 8'd2; #1;
    check(l_can, "full cache accepts an in-place write");
    op(LOP_FILL_SP, 16'h60, 32'hF1, 8'd2);
    look(16'h60, LS_INVALID, 0, "refused fill leaves no line");
    // squash: invalidate en masse
    @(negedge clk); inv_all = 1; @(negedge clk); inv_all = 0; #1;
    check(used == 0, "inv_all clears every line");
    look(16'h10, LS_INVALID, 0, "no line after inv_all");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
