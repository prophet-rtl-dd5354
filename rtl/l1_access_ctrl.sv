// l1_access_ctrl: L1 cache access controller of one PE.
//
// Serves the core's loads and stores from the multi-version memory cache and
// is the PE's single master on the snoopy bus.  It is combinational: a
// request is held by its source until the matching done/ready.
//   load, hit          -> (a PreSh line counts as a miss in speculation)
//                         creq_ready in the same cycle with the cache data
//   load, miss         -> bus RPrR (pre-computation, carrying the thread
//                         version) or RSpR (speculation); when the bus answers
//                         the line is filled (PreSh / SpSh) and the core gets
//                         the data in that cycle
//   store, pre-comp.   -> LPrW applied to the cache, no bus message
//   store, speculation -> VioTest on the bus; the cache is written (LSpW) in
//                         the cycle the bus takes the VioTest
// The speculation controller's bus requests (verification reads, commit
// write-backs) go first; they only occur while the core is stopped.  When an
// access needs a new cache entry and none is free, the access waits and
// ovf_stall is high (the design does not say how a full cache is handled;
// this implementation simply stalls).  The pre/spec choice comes from
// thread_ctrl: pre = Pre-compute, acc_en = a state in which the core runs.
module l1_access_ctrl
  import prophet_pkg::*;
(
  // core side
  input  logic           creq_valid,
  input  logic           creq_we,
  input  logic [AW-1:0]  creq_addr,
  input  logic [DW-1:0]  creq_wdata,
  output logic           creq_ready,
  output logic [DW-1:0]  creq_rdata,
  input  logic           acc_en,
  input  logic           pre,
  input  logic [VW-1:0]  tv,
  output logic           ovf_stall,
  // memory cache local port
  output logic [AW-1:0]  l_addr,
  output lop_e           l_op,
  output logic           l_op_valid,
  output logic [DW-1:0]  l_wdata,
  input  logic           l_hit,
  input  lstate_e        l_state,
  input  logic [DW-1:0]  l_data,
  input  logic           l_can,
  // speculation controller requests
  input  logic           sreq_valid,
  input  bus_req_t       sreq,
  output logic           sreq_done,
  output logic [DW-1:0]  sreq_rdata,
  // bus master port
  output logic           m_valid,
  output bus_req_t       m_req,
  input  logic           m_done,
  input  logic [DW-1:0]  m_rdata
);

  always_comb begin
    creq_ready = 1'b0; creq_rdata = l_data; ovf_stall = 1'b0;
    l_addr = creq_addr; l_op = LOP_PRE_WR; l_op_valid = 1'b0; l_wdata = creq_wdata;
    m_valid = 1'b0; m_req = '0;
    sreq_done = 1'b0; sreq_rdata = m_rdata;
    if (sreq_valid) begin
      m_valid   = 1'b1;
      m_req     = sreq;
      sreq_done = m_done;
    end else if (creq_valid && acc_en) begin
      if (!creq_we) begin
        if (l_hit && (pre || l_state != LS_PRESH)) begin
          creq_ready = 1'b1;
        end else begin
          l_op = pre ? LOP_FILL_PRE : LOP_FILL_SP;
          if (!l_can) ovf_stall = 1'b1;
          else begin
            m_valid    = 1'b1;
            m_req.cmd  = pre ? BUS_RPR : BUS_RSP;
            m_req.addr = creq_addr;
            m_req.ver  = tv;
            l_wdata    = m_rdata;
            l_op_valid = m_done;
            creq_ready = m_done;
            creq_rdata = m_rdata;
          end
        end
      end else if (pre) begin
        l_op = LOP_PRE_WR;
        if (!l_can) ovf_stall = 1'b1;
        else begin l_op_valid = 1'b1; creq_ready = 1'b1; end
      end else begin
        l_op = LOP_SP_WR;
        if (!l_can) ovf_stall = 1'b1;
        else begin
          m_valid    = 1'b1;
          m_req.cmd  = BUS_VIO;
          m_req.addr = creq_addr;
          m_req.data = creq_wdata;
          m_req.ver  = tv;
          l_op_valid = m_done;
          creq_ready = m_done;
        end
      end
    end
  end

endmodule
