// mv_cache: multi-version L1 memory data cache of one PE.
//
// Each line is {V, RL, M, Ver, O, tag, data} as in the design's line format;
// the named states (PreSh, PreEx, PreExO, SpSh, SpShM, SpShO, SpEx, SpExO,
// Invalid) are decoded from those bits by prophet_pkg::line_state.  A line
// holds one word and the cache is fully associative (both choices of this
// implementation: the design gives no line size, capacity or organisation).
//
// Local side (used by l1_access_ctrl).  l_addr is looked up combinationally;
// l_hit/l_data/l_state describe the single "readable" line of that address
// (PreSh, PreEx, SpSh, SpShM or SpEx: the newest version visible to the
// thread).  l_can tells whether operation l_op at l_addr can be applied now;
// it is low only when the operation needs a new entry and none is free.  An
// operation is applied at the clock edge when l_op_valid is high:
//   LOP_PRE_WR  (LPrW)  Invalid/PreSh/PreEx -> PreEx, in place or new entry
//   LOP_SP_WR   (LSpW)  PreSh -> SpEx and SpSh -> SpShM in place; PreEx ->
//               PreExO plus a new SpEx entry; SpShM/SpEx written in place when
//               the line's version equals the thread version, otherwise the
//               line becomes SpShO/SpExO and a new SpEx entry is written (the
//               "new thread version / write to new entry" rule); miss -> SpEx
//   LOP_FILL_PRE (LPrR miss) new PreSh line; LOP_FILL_SP (LSpR miss) new SpSh,
//               or the PreSh line of the address turned into SpSh in place
// A PreSh line was read from the predecessors' pre-spawn view; a speculative
// read must see their newest data, so l1_access_ctrl treats PreSh as a miss
// for LSpR (the line diagram has no LSpR arc on PreSh; this is the reading
// that gives the pre-computation example its intended result).
// New Sp lines carry the thread version tv; Pre lines carry version 0.
//
// Snoop side (combinational, driven by the snoopy bus).  RSpR, and RPrR from
// a thread that is not this thread's child, hit the newest speculative line
// (SpSh, SpShM, SpEx).  RPrR from this thread's own sub thread (s_stm) hits
// the speculative line, old or not, with the largest version not above the
// requester's version.  VioTest reports s_vio when a line of the address was
// read from a predecessor in speculation (SpSh, SpShM, SpShO).  Pre lines
// never answer remote messages.
//
// Walk port: w_idx selects an entry whose contents appear on w_line (used by
// the verification and commit sequences).  inv_all invalidates every line in
// one cycle (squash, restart, end of commit).
// The Verilator lint may report UNOPTFLAT (circular logic) on the snoop answers
// s_hit/s_vio/s_data.  It stands because it is not a real loop: Verilator
// treats each unpacked array as one signal; the answers depend on the
// granted request only, and no request depends on an answer.
module mv_cache
  import prophet_pkg::*;
#(
  parameter int ENTRIES = 32,
  localparam int IW = (ENTRIES > 1) ? $clog2(ENTRIES) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  // local access
  input  logic [AW-1:0]  l_addr,
  input  lop_e           l_op,
  input  logic           l_op_valid,
  input  logic [DW-1:0]  l_wdata,
  input  logic [VW-1:0]  tv,
  output logic           l_hit,
  output logic [DW-1:0]  l_data,
  output lstate_e        l_state,
  output logic           l_can,
  // snoop
  input  logic           s_valid,
  input  bus_cmd_e       s_cmd,
  input  logic [AW-1:0]  s_addr,
  input  logic [VW-1:0]  s_ver,
  input  logic           s_stm,
  output logic           s_hit,
  output logic [DW-1:0]  s_data,
  output logic           s_vio,
  // walk / invalidate
  input  logic [IW-1:0]  w_idx,
  output mline_t         w_line,
  input  logic           inv_all,
  output logic [IW:0]    used
);

  mline_t lines [ENTRIES];

  // ---------------- local lookup ----------------
  logic [IW-1:0] hit_idx, free_idx;
  logic          free_found;
  always_comb begin
    l_hit = 1'b0; hit_idx = '0; free_found = 1'b0; free_idx = '0; used = '0;
    for (int i = 0; i < ENTRIES; i++) begin
      automatic lstate_e st = line_state(lines[i]);
      if (lines[i].v) used = used + 1'b1;
      if (!l_hit && lines[i].v && lines[i].tag == l_addr &&
          st inside {LS_PRESH, LS_PREEX, LS_SPSH, LS_SPSHM, LS_SPEX}) begin
        l_hit = 1'b1; hit_idx = IW'(i);
      end
      if (!free_found && !lines[i].v) begin
        free_found = 1'b1; free_idx = IW'(i);
      end
    end
    l_data  = lines[hit_idx].data;
    l_state = l_hit ? line_state(lines[hit_idx]) : LS_INVALID;
  end

  // does the requested operation need a new entry?
  logic need_new;
  always_comb begin
    need_new = 1'b0;
    unique case (l_op)
      LOP_PRE_WR:   need_new = !l_hit;
      LOP_SP_WR:    need_new = !l_hit || (l_state == LS_PREEX) ||
                               ((l_state inside {LS_SPSHM, LS_SPEX}) && lines[hit_idx].ver != tv);
      LOP_FILL_PRE: need_new = 1'b1;
      LOP_FILL_SP:  need_new = !l_hit;
      default:      need_new = 1'b0;
    endcase
    l_can = !need_new || free_found;
  end

  // ---------------- snoop ----------------
  always_comb begin
    automatic logic [VW-1:0] best = '0;
    s_hit = 1'b0; s_data = '0; s_vio = 1'b0;
    for (int i = 0; i < ENTRIES; i++) begin
      automatic lstate_e st = line_state(lines[i]);
      if (s_valid && lines[i].v && lines[i].tag == s_addr) begin
        unique case (s_cmd)
          BUS_RSP, BUS_RPR: begin
            if (s_cmd == BUS_RPR && s_stm) begin
              if (lines[i].ver != '0 && lines[i].ver <= s_ver &&
                  (!s_hit || lines[i].ver > best)) begin
                s_hit = 1'b1; best = lines[i].ver; s_data = lines[i].data;
              end
            end else if (st inside {LS_SPSH, LS_SPSHM, LS_SPEX}) begin
              s_hit = 1'b1; s_data = lines[i].data;
            end
          end
          BUS_VIO:
            if (st inside {LS_SPSH, LS_SPSHM, LS_SPSHO}) s_vio = 1'b1;
          default: ;
        endcase
      end
    end
  end

  assign w_line = lines[w_idx];

  // ---------------- update ----------------
  function automatic mline_t mk(logic rl, logic m, logic [VW-1:0] ver, logic o,
                                logic [AW-1:0] tag, logic [DW-1:0] d);
    mline_t r;
    r.v = 1'b1; r.rl = rl; r.m = m; r.ver = ver; r.o = o; r.tag = tag; r.data = d;
    return r;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) lines[i] <= '0;
    end else if (inv_all) begin
      for (int i = 0; i < ENTRIES; i++) lines[i].v <= 1'b0;
    end else if (l_op_valid && l_can) begin
      unique case (l_op)
        LOP_PRE_WR:
          if (l_hit) lines[hit_idx] <= mk(1'b0, 1'b1, '0, 1'b0, l_addr, l_wdata);
          else       lines[free_idx] <= mk(1'b0, 1'b1, '0, 1'b0, l_addr, l_wdata);
        LOP_SP_WR: begin
          if (!l_hit) lines[free_idx] <= mk(1'b0, 1'b1, tv, 1'b0, l_addr, l_wdata);
          else begin
            unique case (l_state)
              LS_PRESH: lines[hit_idx] <= mk(1'b0, 1'b1, tv, 1'b0, l_addr, l_wdata);
              LS_SPSH:  lines[hit_idx] <= mk(1'b1, 1'b1, tv, 1'b0, l_addr, l_wdata);
              LS_PREEX: begin
                lines[hit_idx].o <= 1'b1;
                lines[free_idx]  <= mk(1'b0, 1'b1, tv, 1'b0, l_addr, l_wdata);
              end
              default: // SpShM, SpEx
                if (lines[hit_idx].ver == tv) lines[hit_idx].data <= l_wdata;
                else begin
                  lines[hit_idx].o <= 1'b1;
                  lines[free_idx]  <= mk(1'b0, 1'b1, tv, 1'b0, l_addr, l_wdata);
                end
            endcase
          end
        end
        LOP_FILL_PRE: lines[free_idx] <= mk(1'b1, 1'b0, '0, 1'b1, l_addr, l_wdata);
        LOP_FILL_SP:
          if (l_hit) lines[hit_idx]  <= mk(1'b1, 1'b0, tv, 1'b0, l_addr, l_wdata);
          else       lines[free_idx] <= mk(1'b1, 1'b0, tv, 1'b0, l_addr, l_wdata);
        default: ;
      endcase
    end
  end

endmodule
