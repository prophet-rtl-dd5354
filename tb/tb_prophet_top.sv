// tb_prophet_top: end-to-end test of the Prophet CMP at its default size
// (4 PEs, 32-entry memory caches, 32 registers, 256-word L2).
//
// The testbench plays the cores: a script issues each thread's loads,
// stores, register accesses and speculation instructions on the PE ports,
// and a behavioural main memory sits behind the L2.  The script follows the
// program of the pre-computation example: thread 0 writes X = const1,
// spawns thread 1, then writes X = const2.  Thread 1 must read const1 while
// pre-computing and const2 while speculating.  On top of that it makes each
// mechanism happen and counts it:
//   spawn, versioned RPrR answered by the parent, RSpR answered by a
//   predecessor, VioTest RAW violation -> restart, sqush instruction ->
//   squash, verification pass -> commit -> stable token, register
//   synchronisation, verification failure -> squash, cache overflow stall,
//   L2 miss to main memory.
// A mechanism that never happened counts as a failure.  Values are checked
// against the numbers the script itself wrote.
module tb_prophet_top;
  import prophet_pkg::*;

  localparam int NPE = 4;
  localparam int RW  = 5;

  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;

  logic           creq_valid [NPE], creq_we [NPE], creq_ready [NPE];
  logic [AW-1:0]  creq_addr [NPE];
  logic [DW-1:0]  creq_wdata [NPE], creq_rdata [NPE];
  logic           rd_en [NPE], wr_en [NPE];
  logic [RW-1:0]  rd_addr [NPE], wr_addr [NPE];
  logic [DW-1:0]  rd_data [NPE], wr_data [NPE];
  logic           spi_valid [NPE], spi_ready [NPE];
  spi_e           spi_op [NPE];
  logic [LW-1:0]  spi_label [NPE], core_pc [NPE];
  logic           core_run [NPE], core_start [NPE], ovf_stall [NPE];
  tstate_e        thread_state [NPE];
  logic [2:0]     isl_len;
  logic           mem_req, mem_we, mem_ack;
  logic [AW-1:0]  mem_addr;
  logic [DW-1:0]  mem_wdata, mem_rdata;

  prophet_top dut (.*);

  mem_model u_mem (.clk, .req(mem_req), .we(mem_we), .addr(mem_addr), .wdata(mem_wdata),
                   .ack(mem_ack), .rdata(mem_rdata));

  int checks = 0, failures = 0;
  int n_spawn = 0, n_restart = 0, n_squash = 0, n_commit = 0, n_vfail = 0;
  int n_token = 0, n_ovf = 0, n_mem = 0, n_rpr_parent = 0, n_rsp_fwd = 0, n_vio = 0;
  int cycles = 0;

  // mechanism counters, observed on internal events
  always @(posedge clk) if (rst_n) begin
    cycles++;
    for (int p = 0; p < NPE; p++) begin
      if (dut.spawn_go[p]) n_spawn++;
      if (dut.restart[p]) n_restart++;
      if (dut.squash[p]) n_squash++;
      if (dut.commit_done[p]) n_commit++;
      if (dut.token[p]) n_token++;
      if (dut.sub_done[p] && !dut.sub_pass[p]) n_vfail++;
      if (dut.vio[p]) n_vio++;
      if (ovf_stall[p]) n_ovf++;
      if (dut.m_done[p] && dut.m_req[p].cmd == BUS_RPR && dut.u_bus.resp_found &&
          dut.u_bus.bst == 0) n_rpr_parent++;
      if (dut.m_done[p] && dut.m_req[p].cmd == BUS_RSP && dut.u_bus.resp_found &&
          dut.u_bus.bst == 0) n_rsp_fwd++;
    end
    if (mem_ack) n_mem++;
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wait_ready(input int p, ref logic rdy [NPE], input string what);
    int n = 0;
    #1;
    while (!rdy[p]) begin
      @(negedge clk); #1; n++;
      if (n > 3000) begin check(0, {what, ": no ready"}); return; end
    end
  endtask

  task automatic st(input int p, input logic [AW-1:0] a, input logic [DW-1:0] d);
    @(negedge clk);
    creq_valid[p] = 1; creq_we[p] = 1; creq_addr[p] = a; creq_wdata[p] = d;
    wait_ready(p, creq_ready, "store");
    @(posedge clk); #1 creq_valid[p] = 0;
  endtask

  task automatic ld(input int p, input logic [AW-1:0] a, output logic [DW-1:0] d);
    @(negedge clk);
    creq_valid[p] = 1; creq_we[p] = 0; creq_addr[p] = a;
    wait_ready(p, creq_ready, "load");
    d = creq_rdata[p];
    @(posedge clk); #1 creq_valid[p] = 0;
  endtask

  task automatic ld_check(input int p, input logic [AW-1:0] a, input logic [DW-1:0] exp,
                          input string what);
    logic [DW-1:0] d;
    ld(p, a, d);
    check(d == exp, $sformatf("%s: PE%0d read %h, expected %h", what, p, d, exp));
  endtask

  task automatic rwr(input int p, input int r, input logic [DW-1:0] d);
    @(negedge clk); wr_en[p] = 1; wr_addr[p] = RW'(r); wr_data[p] = d;
    @(negedge clk); wr_en[p] = 0;
  endtask

  task automatic rrd(input int p, input int r, output logic [DW-1:0] d);
    @(negedge clk); rd_en[p] = 1; rd_addr[p] = RW'(r); #1 d = rd_data[p];
    @(negedge clk); rd_en[p] = 0;
  endtask

  task automatic spi(input int p, input spi_e op, input logic [LW-1:0] lab);
    @(negedge clk);
    spi_valid[p] = 1; spi_op[p] = op; spi_label[p] = lab;
    wait_ready(p, spi_ready, op.name());
    @(posedge clk); #1 spi_valid[p] = 0;
  endtask

  task automatic wait_state(input int p, input tstate_e s, input string what);
    int n = 0;
    while (thread_state[p] != s && n < 3000) begin @(negedge clk); n++; end
    check(thread_state[p] == s, $sformatf("%s: PE%0d in %s", what, p, thread_state[p].name()));
  endtask

  localparam logic [AW-1:0] X = 16'h0200, Z = 16'h0300, Y = 16'h0400, W = 16'h0500,
                            Q = 16'h0600;
  localparam logic [LW-1:0] L1 = 16'h1000, L2 = 16'h2000, L3 = 16'h3000, L4 = 16'h4000;

  initial begin
    #20ms; failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [DW-1:0] d;
    int p1, p2, p3, k;
    for (int p = 0; p < NPE; p++) begin
      creq_valid[p] = 0; creq_we[p] = 0; creq_addr[p] = '0; creq_wdata[p] = '0;
      rd_en[p] = 0; wr_en[p] = 0; rd_addr[p] = '0; wr_addr[p] = '0; wr_data[p] = '0;
      spi_valid[p] = 0; spi_op[p] = SPI_PSLICE_ENTRY; spi_label[p] = '0;
    end
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    wait_state(0, TS_STABLE, "program start");

    // ---- thread 0: X = const1, spawn thread 1, X = const2 ----
    st(0, X, 32'd11);
    ld_check(0, W, 32'h5A5A_0000 ^ 32'(W), "stable miss to main memory");
    rwr(0, 5, 32'd11);
    spi(0, SPI_SPAWN, L1);
    p1 = 1;
    check(thread_state[p1] == TS_INIT || thread_state[p1] == TS_PRECOMP, "thread 1 spawned on PE1");
    check(core_pc[p1] == L1, "thread 1 starts at its label");
    check(dut.tv[0] == 2 && dut.tv[p1] == 1, "versions: parent 2, child 1");
    st(0, X, 32'd22);
    wait_state(p1, TS_PRECOMP, "thread 1 pre-computes");

    // ---- thread 1: p-slice Z = X sees const1 ----
    for (int pass = 0; pass < 2; pass++) begin
      spi(p1, SPI_PSLICE_ENTRY, L1);
      ld(p1, X, d);
      check(d == 32'd11, $sformatf("pre-computation reads const1 (got %0d)", d));
      st(p1, Z, d);
      rwr(p1, 5, d);
      spi(p1, SPI_PSLICE_EXIT, L1);
      wait_state(p1, TS_SPEXEC, "thread 1 speculates");
      ld_check(p1, X, 32'd22, "speculation reads const2");
      rrd(p1, 5, d);
      check(d == 32'd11, "register live-in from the p-slice");
      if (pass == 0) begin
        // exposed read of W, then thread 0 writes W: RAW violation
        ld_check(p1, W, 32'h5A5A_0000 ^ 32'(W), "speculative read of W");
        st(0, W, 32'd77);
        wait_state(p1, TS_PRECOMP, "violation restarts thread 1");
        check(dut.g_pe[1].u_pe.u_mc.used == 0, "restart discards the speculative lines");
      end else begin
        ld_check(p1, W, 32'd77, "re-executed read sees the new W");
      end
    end
    st(p1, Y, 32'd22);

    // ---- thread 1 spawns thread 2, then waits at its cqip ----
    spi(p1, SPI_SPAWN, L2);
    p2 = 2;
    check(thread_state[p2] == TS_INIT || thread_state[p2] == TS_PRECOMP, "thread 2 spawned");
    wait_state(p2, TS_PRECOMP, "thread 2 pre-computes");
    st(p1, Y, 32'd33);      // after the spawn: thread 1's version 2
    ld_check(p2, Y, 32'd22, "RPrR of thread 2 gets its parent's version-1 data");
    spi(p2, SPI_PSLICE_EXIT, L2);
    ld_check(p2, Y, 32'd33, "RSpR forwarded from thread 1");
    spi(p1, SPI_CQIP, L2);
    wait_state(p1, TS_WAIT, "thread 1 waits at its cqip");
    // thread 0 squashes thread 2 with the sqush instruction
    spi(0, SPI_SQUASH, L2);
    wait_state(p2, TS_IDLE, "sqush squashes thread 2");
    check(isl_len == 2, "two threads left");

    // ---- thread 0 reaches its cqip: verification passes, commit ----
    st(0, Z, 32'd11);       // the p-slice's prediction of Z was right
    rwr(0, 6, 32'd66);      // r6: never touched by thread 1 -> synchronised
    spi(0, SPI_CQIP, L1);
    wait_state(0, TS_IDLE, "thread 0 commits and quits");
    wait_state(p1, TS_STABLE, "thread 1 got the stable token");
    rrd(p1, 6, d);
    check(d == 32'd66, "Init register synchronised from the stable thread");
    check(u_mem.mem[X] == 32'd22 && u_mem.mem[W] == 32'd77 && u_mem.mem[Z] == 32'd11,
          "committed lines reached main memory");
    ld_check(p1, X, 32'd22, "stable thread reads committed X through L2");

    // ---- verification failure: wrong prediction of Q ----
    spi(p1, SPI_SPAWN, L3);
    p3 = 0;                  // lowest free PE
    wait_state(p3, TS_PRECOMP, "thread 3 pre-computes");
    st(p3, Q, 32'd5);
    spi(p3, SPI_PSLICE_EXIT, L3);
    st(p1, Q, 32'd6);
    spi(p1, SPI_CQIP, L3);
    wait_state(p3, TS_IDLE, "wrong prediction squashes thread 3");
    wait_state(p1, TS_STABLE, "stable thread continues after failed verification");

    // ---- overflow: a speculative thread fills its 32-entry cache ----
    spi(p1, SPI_SPAWN, L4);
    wait_state(0, TS_PRECOMP, "thread 4 pre-computes");
    spi(0, SPI_PSLICE_EXIT, L4);
    k = 0;
    while (k < 40 && !ovf_stall[0]) begin
      @(negedge clk);
      creq_valid[0] = 1; creq_we[0] = 1; creq_addr[0] = 16'h0800 + AW'(k); creq_wdata[0] = k;
      #1;
      if (!ovf_stall[0]) begin
        wait_ready(0, creq_ready, "fill store");
        @(posedge clk); #1 creq_valid[0] = 0;
        k++;
      end
    end
    repeat (5) @(negedge clk);
    check(ovf_stall[0] && !creq_ready[0] && k == 32, $sformatf("33rd new line stalls (k=%0d)", k));
    creq_valid[0] = 0;
    spi(p1, SPI_SQUASH, L4);
    wait_state(0, TS_IDLE, "overflowing thread squashed");
    ld_check(p1, 16'h0805, 32'h5A5A_0000 ^ 32'h0805, "squashed stores never reach memory");

    // ---- every mechanism must have happened ----
    check(n_spawn >= 4, $sformatf("spawns %0d", n_spawn));
    check(n_rpr_parent >= 2, $sformatf("RPrR answered by parent %0d", n_rpr_parent));
    check(n_rsp_fwd >= 2, $sformatf("RSpR answered by predecessor %0d", n_rsp_fwd));
    check(n_vio >= 1 && n_restart == 1, $sformatf("violations %0d restarts %0d", n_vio, n_restart));
    check(n_squash >= 3, $sformatf("squashes %0d", n_squash));
    check(n_commit == 1 && n_token == 1, $sformatf("commits %0d tokens %0d", n_commit, n_token));
    check(n_vfail == 1, $sformatf("failed verifications %0d", n_vfail));
    check(n_ovf >= 1, $sformatf("overflow stall cycles %0d", n_ovf));
    check(n_mem >= 3, $sformatf("main memory accesses %0d", n_mem));
    $display("mechanisms: spawn=%0d rpr_parent=%0d rsp_fwd=%0d vio=%0d restart=%0d squash=%0d commit=%0d token=%0d vfail=%0d ovf=%0d mem=%0d cycles=%0d",
             n_spawn, n_rpr_parent, n_rsp_fwd, n_vio, n_restart, n_squash, n_commit, n_token,
             n_vfail, n_ovf, n_mem, cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
