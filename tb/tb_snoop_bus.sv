// tb_snoop_bus: self-checking test of the snoopy bus.
//
// Four PEs in thread order 0,1,2,3 with parents 1->0, 2->1, 3->0.  The
// snooping caches are modelled by hit and violation masks.  Checks: RSpR is
// answered by the nearest hitting predecessor in the grant cycle; RPrR only
// sees the requester's parent and its predecessors and marks the parent with
// s_stm; a read nobody answers goes to the L2 and completes on its ack;
// VioTest reports only later threads; write-back goes to the L2; two
// simultaneous requests are served one after the other, round-robin.
module tb_snoop_bus;
  import prophet_pkg::*;
  localparam int NPE = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          m_valid [NPE], m_done [NPE];
  bus_req_t      m_req [NPE];
  logic [DW-1:0] m_rdata;
  logic          s_valid;
  bus_req_t      s_req;
  logic [1:0]    s_src;
  logic          s_stm [NPE], s_hit [NPE], s_vio [NPE], active [NPE], vio [NPE];
  logic [DW-1:0] s_data [NPE];
  logic [2:0]    rank [NPE];
  logic [1:0]    parent [NPE];
  logic          l2_req, l2_we, l2_ack;
  logic [AW-1:0] l2_addr;
  logic [DW-1:0] l2_wdata, l2_rdata;
  logic [NPE-1:0] hitmask = '0, viomask = '0;
  int checks = 0, failures = 0, l2cnt = 0, l2writes = 0;

  snoop_bus #(.NPE(NPE)) dut (.*);

  always_comb for (int p = 0; p < NPE; p++) begin
    s_hit[p] = hitmask[p]; s_vio[p] = viomask[p]; s_data[p] = 32'd100 + p;
    active[p] = 1'b1; rank[p] = 3'(p);
  end
  assign parent[0] = 0, parent[1] = 0, parent[2] = 1, parent[3] = 0;

  // L2 model: ack two cycles after the request appears
  assign l2_ack = l2_req && l2cnt == 2;
  assign l2_rdata = 32'hD0 ^ 32'(l2_addr);
  always @(posedge clk) begin
    l2cnt <= (l2_req && !l2_ack) ? l2cnt + 1 : 0;
    if (l2_ack && l2_we) l2writes++;
  end

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic req(input int p, input bus_cmd_e c, input logic [AW-1:0] a,
                     output logic [DW-1:0] d, output int lat);
    @(negedge clk);
    m_valid[p] = 1; m_req[p] = '0; m_req[p].cmd = c; m_req[p].addr = a; m_req[p].ver = 8'd1;
    lat = 0; #1;
    while (!m_done[p]) begin @(negedge clk); #1; lat++; if (lat > 50) break; end
    d = m_rdata;
    @(posedge clk); #1 m_valid[p] = 0;
  endtask

  initial begin
    #10000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [DW-1:0] d; int lat; int order_seen [$];
    for (int p = 0; p < NPE; p++) begin m_valid[p] = 0; m_req[p] = '0; end
    repeat (2) @(negedge clk); rst_n = 1;
    hitmask = 4'b0111;
    req(3, BUS_RSP, 16'h40, d, lat);
    check(d == 102 && lat == 0, "RSpR answered by the nearest predecessor in one cycle");
    req(3, BUS_RPR, 16'h40, d, lat);
    check(d == 100 && lat == 0, "RPrR of PE3 sees only its parent PE0");
    req(2, BUS_RPR, 16'h40, d, lat);
    check(d == 101 && lat == 0, "RPrR of PE2 answered by its parent PE1");
    hitmask = 4'b1000;
    req(1, BUS_RSP, 16'h44, d, lat);
    check(d == (32'hD0 ^ 32'h44) && lat == 3, $sformatf("later threads never answer; L2 (lat %0d)", lat));
    hitmask = 4'b0000;
    // s_stm is given to the parent of the requester
    @(negedge clk); m_valid[3] = 1; m_req[3].cmd = BUS_RPR; #1;
    check(s_valid && s_stm[0] && !s_stm[1] && !s_stm[2], "s_stm marks the parent");
    m_valid[3] = 0;
    repeat (6) @(negedge clk);
    // VioTest
    viomask = 4'b1111;
    @(negedge clk); m_valid[1] = 1; m_req[1].cmd = BUS_VIO; #1;
    check(m_done[1] && !vio[0] && !vio[1] && vio[2] && vio[3], "VioTest reports later threads only");
    @(posedge clk); #1 m_valid[1] = 0; viomask = '0;
    req(0, BUS_WB, 16'h50, d, lat);
    check(l2writes == 1 && lat == 3, "write-back reaches L2");
    // two requests at once: both served, round-robin
    hitmask = 4'b0001;
    @(negedge clk);
    m_valid[2] = 1; m_req[2].cmd = BUS_RSP; m_valid[3] = 1; m_req[3].cmd = BUS_RSP;
    for (int c = 0; c < 6 && order_seen.size() < 2; c++) begin
      #1;
      for (int p = 2; p < 4; p++) if (m_done[p]) begin order_seen.push_back(p); end
      @(posedge clk); #1;
      foreach (order_seen[i]) m_valid[order_seen[i]] = 0;
      @(negedge clk);
    end
    check(order_seen.size() == 2 && order_seen[0] != order_seen[1], "both requests served once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
