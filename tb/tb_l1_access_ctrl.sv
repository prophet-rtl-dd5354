// tb_l1_access_ctrl: self-checking test of the L1 cache access controller,
// connected to a 4-entry multi-version cache and a bus responder that
// answers after one wait cycle with a value derived from the address.
// Checks: a pre-computation miss sends RPrR with the thread version and
// fills PreSh; a hit is served in the request cycle without the bus; a
// pre-computation store uses no bus; a speculative read of a PreSh line goes
// to the bus as RSpR; a speculative store sends VioTest with its data and
// writes the cache when the bus takes it; speculation controller requests
// win the bus; a full cache stalls a miss; nothing happens while the thread
// may not access memory.
module tb_l1_access_ctrl;
  import prophet_pkg::*;
  localparam int ENTRIES = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic creq_valid = 0, creq_we = 0, creq_ready, acc_en = 1, pre = 1, ovf_stall;
  logic [AW-1:0] creq_addr = '0, l_addr;
  logic [DW-1:0] creq_wdata = '0, creq_rdata, l_wdata, l_data, sreq_rdata, m_rdata;
  logic [VW-1:0] tv = 8'd3;
  lop_e l_op; logic l_op_valid, l_hit, l_can; lstate_e l_state;
  logic sreq_valid = 0, sreq_done, m_valid, m_done;
  bus_req_t sreq = '0, m_req;
  logic s_hit, s_vio; logic [DW-1:0] s_data; mline_t w_line; logic [2:0] used;
  int checks = 0, failures = 0, wait_c = 0, nbus = 0;
  bus_req_t last;

  l1_access_ctrl dut (.*);
  mv_cache #(.ENTRIES(ENTRIES)) u_mc (.clk, .rst_n, .l_addr, .l_op, .l_op_valid, .l_wdata,
    .tv, .l_hit, .l_data, .l_state, .l_can, .s_valid(1'b0), .s_cmd(BUS_RSP), .s_addr('0),
    .s_ver('0), .s_stm(1'b0), .s_hit, .s_data, .s_vio, .w_idx(2'd0), .w_line,
    .inv_all(1'b0), .used);

  assign m_done  = m_valid && wait_c == 1;
  assign m_rdata = 32'hB000 + 32'(m_req.addr);
  always @(posedge clk) begin
    wait_c <= (m_valid && !m_done) ? wait_c + 1 : 0;
    if (m_done) begin nbus++; last <= m_req; end
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic acc(input logic w, input logic [AW-1:0] a, input logic [DW-1:0] d,
                     output logic [DW-1:0] q, output int lat);
    @(negedge clk); creq_valid = 1; creq_we = w; creq_addr = a; creq_wdata = d; lat = 0;
    #1;
    while (!creq_ready && lat < 20) begin @(negedge clk); #1; lat++; end
    q = creq_rdata;
    @(posedge clk); #1 creq_valid = 0;
  endtask

  initial begin
    #10000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [DW-1:0] q; int lat, n0;
    repeat (2) @(negedge clk); rst_n = 1;
    acc(0, 16'h10, 0, q, lat);
    check(q == 32'hB010 && lat == 1 && last.cmd == BUS_RPR && last.ver == 3, "LPrR miss -> RPrR");
    creq_addr = 16'h10; #1 check(l_hit && l_state == LS_PRESH, "filled PreSh");
    n0 = nbus;
    acc(0, 16'h10, 0, q, lat);
    check(q == 32'hB010 && lat == 0 && nbus == n0, "hit served without the bus");
    acc(1, 16'h20, 32'h55, q, lat);
    check(lat == 0 && nbus == n0, "LPrW needs no bus");
    pre = 0;
    acc(0, 16'h10, 0, q, lat);
    check(q == 32'hB010 && last.cmd == BUS_RSP && nbus == n0 + 1, "LSpR on PreSh -> RSpR");
    creq_addr = 16'h10; #1 check(l_state == LS_SPSH, "PreSh became SpSh");
    acc(1, 16'h10, 32'h77, q, lat);
    check(lat == 1 && last.cmd == BUS_VIO && last.data == 32'h77 && last.addr == 16'h10,
          "LSpW sends VioTest");
    creq_addr = 16'h10; #1 check(l_state == LS_SPSHM && l_data == 32'h77, "written after VioTest");
    // speculation controller first
    @(negedge clk); sreq_valid = 1; sreq.cmd = BUS_WB; sreq.addr = 16'h99;
    creq_valid = 1; creq_we = 0; creq_addr = 16'h30; #1;
    check(m_valid && m_req.cmd == BUS_WB && !creq_ready, "speculation controller wins the bus");
    @(negedge clk); #1 check(sreq_done, "its request completes");
    @(posedge clk); #1 sreq_valid = 0; creq_valid = 0;
    // fill the cache: 0x10, 0x20 used; two more lines then full
    acc(0, 16'h30, 0, q, lat);
    acc(0, 16'h40, 0, q, lat);
    @(negedge clk); creq_valid = 1; creq_we = 0; creq_addr = 16'h50; #1;
    check(ovf_stall && !m_valid && !creq_ready, "full cache stalls a miss");
    creq_we = 1; creq_addr = 16'h40; creq_wdata = 1; #1;
    check(!ovf_stall && m_valid, "in-place store still proceeds");
    @(posedge clk); #1 creq_valid = 0;
    repeat (3) @(negedge clk);
    acc_en = 0; @(negedge clk); creq_valid = 1; creq_we = 1; #1;
    check(!m_valid && !creq_ready && !l_op_valid, "no access outside a running state");
    creq_valid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
