// tb_prophet_pe: self-checking test of one PE's speculation support.
//
// The testbench plays the core, the central speculation logic and the bus
// (which answers every request after one wait cycle, reads with a value
// derived from the address).  Scenario: the PE is spawned with a register
// copy, pre-computes a store (no bus) and a register write, leaves the
// p-slice, reads the register (Validate), stores speculatively (VioTest),
// reaches its cqip while having a successor (Wait), receives the
// verification message, verifies its PreEx line over the bus, receives the
// stable token and becomes stable; then spawns, and finally commits its
// lines with bus write-backs and returns to Idle.  A second spawn is
// restarted and then squashed.
module tb_prophet_pe;
  import prophet_pkg::*;
  localparam int NREG = 32;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic creq_valid = 0, creq_we = 0, creq_ready, rd_en = 0, wr_en = 0, spi_valid = 0, spi_ready;
  logic [AW-1:0] creq_addr = '0;
  logic [DW-1:0] creq_wdata = '0, creq_rdata, rd_data, wr_data = '0;
  logic [4:0] rd_addr = '0, wr_addr = '0;
  spi_e spi_op = SPI_PSLICE_ENTRY;
  logic [LW-1:0] spi_label = '0, spawn_label, squash_label;
  logic core_run, core_start, ovf_stall;
  tstate_e state;
  logic spawn_go = 0, start_stable = 0, verify_msg = 0, token = 0, sub_done = 0, sub_pass = 0;
  logic squash = 0, restart = 0, has_succ = 0, spawn_ack, squash_ack = 0;
  logic [NREG*DW-1:0] load_vals, sync_vals, reg_vals;
  logic [VW-1:0] tv = 8'd1;
  logic spawn_req, squash_req, vfy_done, vfy_pass, commit_done;
  rstate_e reg_state [NREG];
  logic m_valid, m_done, s_valid = 0, s_stm = 0, s_hit, s_vio;
  bus_req_t m_req, s_req = '0;
  logic [DW-1:0] m_rdata, s_data;
  int checks = 0, failures = 0, wait_c = 0, nvio = 0, nwb = 0, nrsp = 0;

  prophet_pe #(.ENTRIES(8), .NREG(NREG)) dut (.*);

  assign m_done = m_valid && wait_c == 1;
  assign m_rdata = (m_req.addr == 16'h30) ? 32'd5 : 32'hB000 + 32'(m_req.addr);
  assign spawn_ack = spawn_req;
  always @(posedge clk) begin
    wait_c <= (m_valid && !m_done) ? wait_c + 1 : 0;
    if (m_done && m_req.cmd == BUS_VIO) nvio++;
    if (m_done && m_req.cmd == BUS_WB) nwb++;
    if (m_done && m_req.cmd == BUS_RSP) nrsp++;
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (state %s)", what, state.name()); end
  endtask

  task automatic acc(input logic w, input logic [AW-1:0] a, input logic [DW-1:0] d,
                     output logic [DW-1:0] q);
    int n = 0;
    @(negedge clk); creq_valid = 1; creq_we = w; creq_addr = a; creq_wdata = d; #1;
    while (!creq_ready && n < 50) begin @(negedge clk); #1; n++; end
    q = creq_rdata;
    @(posedge clk); #1 creq_valid = 0;
  endtask

  task automatic spi(input spi_e op);
    int n = 0;
    @(negedge clk); spi_valid = 1; spi_op = op; spi_label = 16'h77; #1;
    while (!spi_ready && n < 50) begin @(negedge clk); #1; n++; end
    @(posedge clk); #1 spi_valid = 0;
  endtask

  task automatic pulse(ref logic s);
    @(negedge clk); s = 1; @(negedge clk); s = 0;
  endtask

  task automatic wait_state(input tstate_e s, input string what);
    int n = 0;
    while (state != s && n < 200) begin @(negedge clk); n++; end
    check(state == s, what);
  endtask

  initial begin
    #50000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [DW-1:0] q;
    for (int i = 0; i < NREG; i++) load_vals[i*DW +: DW] = 32'd200 + i;
    sync_vals = load_vals;
    sync_vals[7*DW +: DW] = 32'd777;
    repeat (2) @(negedge clk); rst_n = 1;
    pulse(spawn_go);
    check(state == TS_INIT, "spawn -> Initialization");
    wait_state(TS_PRECOMP, "pre-computation");
    @(negedge clk); rd_addr = 3; #1 check(rd_data == 203, "registers copied from the parent");
    acc(1, 16'h30, 32'd5, q);
    check(nvio == 0, "pre-computation store sends nothing");
    spi(SPI_PSLICE_EXIT);
    check(state == TS_SPEXEC, "p-slice exit -> Sp_execution");
    @(negedge clk); rd_en = 1; rd_addr = 3; @(negedge clk); rd_en = 0;
    check(reg_state[3] == RS_VALIDATE, "speculative register read -> Validate");
    acc(1, 16'h40, 32'd9, q);
    check(nvio == 1, "speculative store sends VioTest");
    acc(0, 16'h50, 0, q);
    check(q == 32'hB050 && nrsp == 1, "speculative miss -> RSpR");
    has_succ = 1;
    spi(SPI_CQIP);
    check(state == TS_WAIT && !core_run, "cqip -> Wait");
    @(negedge clk); verify_msg = 1;
    @(negedge clk); verify_msg = 0;
    check(state == TS_VERIFY, "verification message");
    while (!vfy_done) @(negedge clk);
    check(vfy_pass && nrsp == 2, "PreEx line verified over the bus");
    @(negedge clk);
    check(reg_vals[7*DW +: DW] == 32'd777 && reg_vals[3*DW +: DW] == 32'd203,
          "Init register synchronised, Validate register kept");
    pulse(token);
    check(state == TS_STABLE, "token -> Stable execution");
    @(negedge clk); #1 check(state == TS_SUBVERIFY, "pending cqip -> Sub thread verify");
    @(negedge clk); sub_done = 1; sub_pass = 1; @(negedge clk); sub_done = 0;
    check(state == TS_COMMIT, "sub thread passed -> Commit");
    wait_state(TS_IDLE, "commit finished");
    check(nwb == 2, $sformatf("two newest modified lines written back (%0d)", nwb));
    check(dut.u_mc.used == 0, "cache empty after commit");
    // restart and squash
    has_succ = 0;
    pulse(spawn_go);
    wait_state(TS_PRECOMP, "second spawn");
    acc(1, 16'h60, 32'd1, q);
    spi(SPI_PSLICE_EXIT);
    @(negedge clk); wr_en = 1; wr_addr = 4; wr_data = 32'd44; @(negedge clk); wr_en = 0;
    pulse(restart);
    check(state == TS_RESTART, "violation -> Restart");
    wait_state(TS_PRECOMP, "restarted thread re-runs its p-slice");
    check(dut.u_mc.used == 0 && reg_vals[4*DW +: DW] == 32'd204, "lines dropped, registers restored");
    pulse(squash);
    wait_state(TS_IDLE, "squash -> Idle");
    check(reg_state[0] == RS_INVALID, "squash frees the registers");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
