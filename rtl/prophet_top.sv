// prophet_top: Prophet speculative multithreading chip multiprocessor.
//
// NPE processing elements (four, as drawn in the design's block diagram),
// each with its speculation support (prophet_pe), share one snoopy bus
// (snoop_bus), the central speculation logic (central_spec_logic) and an L2
// cache (l2_cache) in front of main memory.  The cores themselves and main
// memory are outside this module: each PE's core ports and the main memory
// port are top-level ports, as arrays indexed by PE.
//
// Register transfers between PEs go over dedicated paths: at spawn the child
// loads the parent's registers in the spawn cycle (the design assumes
// spawning takes one cycle), and while a thread is verified it compares with,
// and is synchronised from, the stable thread's registers.  Memory traffic
// between PEs goes over the snoopy bus.
//
// Use: pulse start for one cycle after reset; PE 0 then runs the program as
// the stable thread (core_start[0] pulses, core_pc[0] = 0).  A core must keep
// a memory or speculation-instruction request asserted until its ready.
// Status outputs: thread_state and ovf_stall per PE, and the ISL length.
// The Verilator lint may report UNOPTFLAT (circular logic) on the snoop answers
// s_hit/s_vio/s_data.  It stands because it is not a real loop: Verilator
// treats each unpacked array as one signal; the answers depend on the
// granted request only, and no request depends on an answer.
module prophet_top
  import prophet_pkg::*;
#(
  parameter int NPE      = 4,
  parameter int ENTRIES  = 32,
  parameter int NREG     = 32,
  parameter int L2_LINES = 256,
  localparam int PW = (NPE > 1) ? $clog2(NPE) : 1,
  localparam int RW = $clog2(NREG)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  // per-PE core ports
  input  logic           creq_valid  [NPE],
  input  logic           creq_we     [NPE],
  input  logic [AW-1:0]  creq_addr   [NPE],
  input  logic [DW-1:0]  creq_wdata  [NPE],
  output logic           creq_ready  [NPE],
  output logic [DW-1:0]  creq_rdata  [NPE],
  input  logic           rd_en       [NPE],
  input  logic [RW-1:0]  rd_addr     [NPE],
  output logic [DW-1:0]  rd_data     [NPE],
  input  logic           wr_en       [NPE],
  input  logic [RW-1:0]  wr_addr     [NPE],
  input  logic [DW-1:0]  wr_data     [NPE],
  input  logic           spi_valid   [NPE],
  input  spi_e           spi_op      [NPE],
  input  logic [LW-1:0]  spi_label   [NPE],
  output logic           spi_ready   [NPE],
  output logic           core_run    [NPE],
  output logic           core_start  [NPE],
  output logic [LW-1:0]  core_pc     [NPE],
  output tstate_e        thread_state[NPE],
  output logic           ovf_stall   [NPE],
  output logic [PW:0]    isl_len,
  // main memory port
  output logic           mem_req,
  output logic           mem_we,
  output logic [AW-1:0]  mem_addr,
  output logic [DW-1:0]  mem_wdata,
  input  logic           mem_ack,
  input  logic [DW-1:0]  mem_rdata
);

  // central logic <-> PEs
  logic           spawn_go [NPE], start_stable [NPE], verify_msg [NPE], token [NPE];
  logic           sub_done [NPE], sub_pass [NPE], squash [NPE], restart [NPE];
  logic           has_succ [NPE], active [NPE];
  logic           spawn_req [NPE], spawn_ack [NPE], squash_req [NPE], squash_ack [NPE];
  logic           vfy_done [NPE], vfy_pass [NPE], commit_done [NPE], vio [NPE];
  logic [LW-1:0]  spawn_label [NPE], squash_label [NPE];
  logic [PW-1:0]  copy_from [NPE], parent [NPE], stable_pe;
  logic [PW:0]    rank [NPE];
  logic [VW-1:0]  tv [NPE];
  logic           spawn_ok;
  logic [NREG*DW-1:0] reg_vals [NPE];
  rstate_e        reg_state [NPE][NREG];

  // bus
  logic           m_valid [NPE], m_done [NPE];
  bus_req_t       m_req [NPE];
  logic [DW-1:0]  m_rdata;
  logic           s_valid;
  bus_req_t       s_req;
  logic [PW-1:0]  s_src;
  logic           s_stm [NPE], s_hit [NPE], s_vio [NPE];
  logic [DW-1:0]  s_data [NPE];
  logic           l2_req, l2_we, l2_ack;
  logic [AW-1:0]  l2_addr;
  logic [DW-1:0]  l2_wdata, l2_rdata;

  for (genvar p = 0; p < NPE; p++) begin : g_pe
    prophet_pe #(.ENTRIES(ENTRIES), .NREG(NREG)) u_pe (
      .clk, .rst_n,
      .creq_valid(creq_valid[p]), .creq_we(creq_we[p]), .creq_addr(creq_addr[p]),
      .creq_wdata(creq_wdata[p]), .creq_ready(creq_ready[p]), .creq_rdata(creq_rdata[p]),
      .rd_en(rd_en[p]), .rd_addr(rd_addr[p]), .rd_data(rd_data[p]),
      .wr_en(wr_en[p]), .wr_addr(wr_addr[p]), .wr_data(wr_data[p]),
      .spi_valid(spi_valid[p]), .spi_op(spi_op[p]), .spi_label(spi_label[p]),
      .spi_ready(spi_ready[p]), .core_run(core_run[p]), .core_start(core_start[p]),
      .state(thread_state[p]), .ovf_stall(ovf_stall[p]),
      .spawn_go(spawn_go[p]), .start_stable(start_stable[p]),
      .load_vals(reg_vals[copy_from[p]]), .sync_vals(reg_vals[stable_pe]),
      .tv(tv[p]), .verify_msg(verify_msg[p]), .token(token[p]),
      .sub_done(sub_done[p]), .sub_pass(sub_pass[p]), .squash(squash[p]),
      .restart(restart[p]), .has_succ(has_succ[p]),
      .spawn_req(spawn_req[p]), .spawn_label(spawn_label[p]), .spawn_ack(spawn_ack[p]),
      .squash_req(squash_req[p]), .squash_label(squash_label[p]), .squash_ack(squash_ack[p]),
      .vfy_done(vfy_done[p]), .vfy_pass(vfy_pass[p]), .commit_done(commit_done[p]),
      .reg_vals(reg_vals[p]), .reg_state(reg_state[p]),
      .m_valid(m_valid[p]), .m_req(m_req[p]), .m_done(m_done[p]), .m_rdata(m_rdata),
      .s_valid(s_valid), .s_req(s_req), .s_stm(s_stm[p]),
      .s_hit(s_hit[p]), .s_data(s_data[p]), .s_vio(s_vio[p])
    );
  end

  central_spec_logic #(.NPE(NPE)) u_csl (
    .clk, .rst_n, .start, .state(thread_state), .spawn_req, .spawn_label, .spawn_ack,
    .spawn_ok, .squash_req, .squash_label, .squash_ack, .vfy_done, .vfy_pass,
    .commit_done, .vio, .spawn_go, .copy_from, .start_stable, .start_pc(core_pc),
    .tv, .verify_msg, .sub_done, .sub_pass, .token, .squash, .restart, .has_succ,
    .active, .rank, .parent, .stable_pe, .cnt(isl_len)
  );

  snoop_bus #(.NPE(NPE)) u_bus (
    .clk, .rst_n, .m_valid, .m_req, .m_done, .m_rdata, .s_valid, .s_req, .s_src,
    .s_stm, .s_hit, .s_data, .s_vio, .active, .rank, .parent, .vio,
    .l2_req, .l2_we, .l2_addr, .l2_wdata, .l2_ack, .l2_rdata
  );

  l2_cache #(.L2_LINES(L2_LINES)) u_l2 (
    .clk, .rst_n, .req(l2_req), .we(l2_we), .addr(l2_addr), .wdata(l2_wdata),
    .ack(l2_ack), .rdata(l2_rdata), .mem_req, .mem_we, .mem_addr, .mem_wdata,
    .mem_ack, .mem_rdata
  );

endmodule
