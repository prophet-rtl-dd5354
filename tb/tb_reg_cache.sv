// tb_reg_cache: self-checking test of the register cache.
//
// Loads registers as at a spawn, writes during pre-computation (no state
// change), leaves pre-computation (all Init), then drives speculative reads
// and writes through Init -> Validate -> VaandMC and Init -> MCommit, checks
// register verification against a stable thread's values (only registers
// read before written count), synchronisation of Init registers, restore on
// restart and invalidation.  Expected states follow the register cache rules.
module tb_reg_cache;
  import prophet_pkg::*;

  localparam int NREG = 32;
  localparam int RW = $clog2(NREG);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic spec = 0, rd_en = 0, wr_en = 0, load = 0, pslice_done = 0, restore = 0, inv = 0;
  logic sync_apply = 0, sync_fail;
  logic [RW-1:0] rd_addr = '0, wr_addr = '0;
  logic [DW-1:0] rd_data, wr_data = '0;
  logic [NREG*DW-1:0] load_vals, sync_vals, vals;
  rstate_e st [NREG];

  int checks = 0, failures = 0;

  reg_cache #(.NREG(NREG)) dut (.*);

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic pulse(ref logic s);
    @(negedge clk); s = 1; @(negedge clk); s = 0;
  endtask

  task automatic rd(input int r);
    @(negedge clk); rd_addr = RW'(r); rd_en = 1; @(negedge clk); rd_en = 0;
  endtask

  task automatic wr(input int r, input logic [DW-1:0] d);
    @(negedge clk); wr_addr = RW'(r); wr_data = d; wr_en = 1; @(negedge clk); wr_en = 0;
  endtask

  initial begin
    #20000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < NREG; i++) begin
      load_vals[i*DW +: DW] = 100 + i;
      sync_vals[i*DW +: DW] = 100 + i;
    end
    repeat (2) @(negedge clk); rst_n = 1;
    check(st[0] == RS_INVALID, "invalid after reset");
    pulse(load);
    check(st[5] == RS_INIT && vals[5*DW +: DW] == 105, "spawn copy -> Init");
    // pre-computation: direct access, no state change
    wr(1, 32'd7);
    rd_addr = 1; #1;
    check(rd_data == 7 && st[1] == RS_INIT, "WP keeps state");
    rd(2);
    check(st[2] == RS_INIT, "RP keeps state");
    pulse(pslice_done);
    check(st[1] == RS_INIT, "pslice exit -> Init");
    // speculation
    spec = 1;
    rd(2);  check(st[2] == RS_VALIDATE, "RS: Init -> Validate");
    rd(2);  check(st[2] == RS_VALIDATE, "RS: Validate stays");
    wr(2, 32'd55); check(st[2] == RS_VAANDMC, "WS: Validate -> VaandMC");
    wr(3, 32'd66); check(st[3] == RS_MCOMMIT, "WS: Init -> MCommit");
    rd(3);  check(st[3] == RS_MCOMMIT, "RS: MCommit stays");
    rd(1);  check(st[1] == RS_VALIDATE, "RS on r1 -> Validate");
    wr(1, 32'd8); rd(2); check(st[2] == RS_VAANDMC, "VaandMC stays");
    // verification against the stable thread
    sync_vals[1*DW +: DW] = 7;     // r1 was pre-computed as 7
    #1 check(!sync_fail, "all read-first registers match");
    sync_vals[3*DW +: DW] = 999;   // r3 written first: does not need validation
    sync_vals[9*DW +: DW] = 909;   // r9 in Init: synchronised, not validated
    #1 check(!sync_fail, "MCommit and Init registers are not validated");
    sync_vals[2*DW +: DW] = 1;     // r2 read first, pre-computed 102
    #1 check(sync_fail, "mismatch on a VaandMC register detected");
    sync_vals[2*DW +: DW] = 102;
    sync_vals[1*DW +: DW] = 3;
    #1 check(sync_fail, "mismatch on a Validate register detected");
    sync_vals[1*DW +: DW] = 7;
    pulse(sync_apply);
    check(vals[9*DW +: DW] == 909, "Init register takes the stable value");
    check(vals[3*DW +: DW] == 66 && vals[2*DW +: DW] == 55 && vals[1*DW +: DW] == 8,
          "modified registers keep their own values");
    // restart restores the spawn-time copy
    pulse(restore);
    check(vals[1*DW +: DW] == 101 && vals[3*DW +: DW] == 103 && st[3] == RS_INIT,
          "restore returns to spawn values in Init");
    pulse(inv);
    check(st[0] == RS_INVALID && st[31] == RS_INVALID, "squash invalidates");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
