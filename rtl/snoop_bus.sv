// snoop_bus: the single snoopy bus shared by the PEs, the L2 cache and the
// central speculation logic.
//
// Masters are the PEs' L1 access controllers.  One transaction is on the bus
// at a time; a round-robin arbiter picks among the pending requests.
//   * RPrR / RSpR: the request is broadcast to every L1 in the cycle it is
//     granted.  Among the PEs that hit and are visible to the requester the
//     one nearest to it in thread order answers, in the same cycle.  Visible
//     are, for RSpR, all logically earlier threads; for RPrR, the
//     requester's parent and the parent's predecessors (a pre-computing
//     thread must not see data of threads spawned after it).  s_stm tells
//     each L1 whether the requester is its own sub thread.  If nobody
//     answers, the word is read from the L2 and the bus stays busy until the
//     L2 acknowledges.
//   * VioTest: broadcast for one cycle; vio[p] reports a PE that is later in
//     thread order than the writer and holds an exposed read of the address.
//   * Write-back: written to the L2; done on the L2 acknowledge.
// The bus protocol, its timing and the arbitration are this implementation's
// choices; the design fixes only that a single snoopy bus carries these
// messages.  m_done is a one-cycle pulse to the granted master; m_rdata is
// valid with it.
// The Verilator lint may report UNOPTFLAT (circular logic) on the snoop answers
// s_hit/s_vio/s_data.  It stands because it is not a real loop: Verilator
// treats each unpacked array as one signal; the answers depend on the
// granted request only, and no request depends on an answer.
module snoop_bus
  import prophet_pkg::*;
#(
  parameter int NPE = 4,
  localparam int PW = (NPE > 1) ? $clog2(NPE) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  // masters
  input  logic            m_valid [NPE],
  input  bus_req_t        m_req   [NPE],
  output logic            m_done  [NPE],
  output logic [DW-1:0]   m_rdata,
  // snoop broadcast and responses
  output logic            s_valid,
  output bus_req_t        s_req,
  output logic [PW-1:0]   s_src,
  output logic            s_stm   [NPE],
  input  logic            s_hit   [NPE],
  input  logic [DW-1:0]   s_data  [NPE],
  input  logic            s_vio   [NPE],
  // thread order from the central speculation logic
  input  logic            active  [NPE],
  input  logic [PW:0]     rank    [NPE],
  input  logic [PW-1:0]   parent  [NPE],
  output logic            vio     [NPE],
  // L2 port
  output logic            l2_req,
  output logic            l2_we,
  output logic [AW-1:0]   l2_addr,
  output logic [DW-1:0]   l2_wdata,
  input  logic            l2_ack,
  input  logic [DW-1:0]   l2_rdata
);

  typedef enum logic [1:0] {B_IDLE, B_L2RD, B_L2WR} bst_e;
  bst_e          bst;
  logic [PW-1:0] rr, g, cur;
  logic          gvalid;
  bus_req_t      lreq;

  // round-robin choice
  always_comb begin
    gvalid = 1'b0; g = '0;
    for (int k = 0; k < NPE; k++) begin
      automatic int j = (int'(rr) + k) % NPE;
      if (!gvalid && m_valid[j]) begin gvalid = 1'b1; g = PW'(j); end
    end
  end

  // visibility and responder choice
  logic          resp_found;
  logic [PW-1:0] resp;
  always_comb begin
    automatic logic [PW:0] best = '0;
    resp_found = 1'b0; resp = '0;
    s_valid = (bst == B_IDLE) && gvalid;
    s_req   = m_req[g];
    s_src   = g;
    for (int p = 0; p < NPE; p++) begin
      automatic logic visible;
      s_stm[p] = active[g] && active[p] && parent[g] == PW'(p) && rank[p] < rank[g];
      if (s_req.cmd == BUS_RSP)
        visible = active[p] && rank[p] < rank[g];
      else
        visible = active[p] && active[parent[g]] && rank[parent[g]] < rank[g] &&
                  rank[p] <= rank[parent[g]];
      if (s_valid && s_req.cmd inside {BUS_RSP, BUS_RPR} && visible && s_hit[p] &&
          (!resp_found || rank[p] > best)) begin
        resp_found = 1'b1; resp = PW'(p); best = rank[p];
      end
      vio[p] = s_valid && s_req.cmd == BUS_VIO && s_vio[p] && active[p] &&
               active[g] && rank[p] > rank[g];
    end
  end

  always_comb begin
    for (int p = 0; p < NPE; p++) m_done[p] = 1'b0;
    m_rdata = resp_found ? s_data[resp] : l2_rdata;
    if (bst == B_IDLE && gvalid) begin
      if (s_req.cmd == BUS_VIO || resp_found) m_done[g] = 1'b1;
    end else if (bst != B_IDLE && l2_ack) begin
      m_done[cur] = 1'b1;
    end
  end

  assign l2_req   = (bst != B_IDLE);
  assign l2_we    = (bst == B_L2WR);
  assign l2_addr  = lreq.addr;
  assign l2_wdata = lreq.data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bst <= B_IDLE; rr <= '0; cur <= '0; lreq <= '0;
    end else begin
      unique case (bst)
        B_IDLE: if (gvalid) begin
                  cur  <= g;
                  lreq <= s_req;
                  if (s_req.cmd == BUS_WB) bst <= B_L2WR;
                  else if (s_req.cmd != BUS_VIO && !resp_found) bst <= B_L2RD;
                  else rr <= (g == PW'(NPE - 1)) ? '0 : g + 1'b1;
                end
        default: if (l2_ack) begin
                   bst <= B_IDLE;
                   rr  <= (cur == PW'(NPE - 1)) ? '0 : cur + 1'b1;
                 end
      endcase
    end
  end

endmodule
