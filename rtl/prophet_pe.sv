// prophet_pe: the speculation support of one processing element.
//
// Groups the parts that the design adds to an ordinary core: the thread
// state controller, the speculation controller, the L1 cache access
// controller, the multi-version memory data cache and the register cache.
// The core itself (fetch, decode, execute) is outside; it connects through
//   * a memory request port (creq_*: valid/ready, held until ready),
//   * the register file ports (rd_* combinational read, wr_* written at the
//     clock edge),
//   * a speculation instruction port (spi_*: valid/ready) carrying the
//     decoded spawn, cqip, sqush, pslice_entry and pslice_exit instructions
//     with their label,
//   * core_run / core_start telling it when to execute and when to begin at
//     the thread's start address.
// Towards the central speculation logic and the snoopy bus the PE exchanges
// the event and bus signals described in those modules.  spawn and sqush
// wait for the central logic's acknowledge; cqip and the p-slice markers are
// accepted at once.  A spawn is only acted on in Sp_execution or Stable
// execution, a cqip only while the core runs outside pre-computation (this
// implementation's reading of the model).
module prophet_pe
  import prophet_pkg::*;
#(
  parameter int ENTRIES = 32,
  parameter int NREG    = 32,
  localparam int RW = $clog2(NREG)
) (
  input  logic               clk,
  input  logic               rst_n,
  // core: memory
  input  logic               creq_valid,
  input  logic               creq_we,
  input  logic [AW-1:0]      creq_addr,
  input  logic [DW-1:0]      creq_wdata,
  output logic               creq_ready,
  output logic [DW-1:0]      creq_rdata,
  // core: registers
  input  logic               rd_en,
  input  logic [RW-1:0]      rd_addr,
  output logic [DW-1:0]      rd_data,
  input  logic               wr_en,
  input  logic [RW-1:0]      wr_addr,
  input  logic [DW-1:0]      wr_data,
  // core: speculation instructions
  input  logic               spi_valid,
  input  spi_e               spi_op,
  input  logic [LW-1:0]      spi_label,
  output logic               spi_ready,
  output logic               core_run,
  output logic               core_start,
  output tstate_e            state,
  output logic               ovf_stall,
  // central speculation logic
  input  logic               spawn_go,
  input  logic               start_stable,
  input  logic [NREG*DW-1:0] load_vals,
  input  logic [NREG*DW-1:0] sync_vals,
  input  logic [VW-1:0]      tv,
  input  logic               verify_msg,
  input  logic               token,
  input  logic               sub_done,
  input  logic               sub_pass,
  input  logic               squash,
  input  logic               restart,
  input  logic               has_succ,
  output logic               spawn_req,
  output logic [LW-1:0]      spawn_label,
  input  logic               spawn_ack,
  output logic               squash_req,
  output logic [LW-1:0]      squash_label,
  input  logic               squash_ack,
  output logic               vfy_done,
  output logic               vfy_pass,
  output logic               commit_done,
  output logic [NREG*DW-1:0] reg_vals,
  output rstate_e            reg_state [NREG],
  // snoopy bus
  output logic               m_valid,
  output bus_req_t           m_req,
  input  logic               m_done,
  input  logic [DW-1:0]      m_rdata,
  input  logic               s_valid,
  input  bus_req_t           s_req,
  input  logic               s_stm,
  output logic               s_hit,
  output logic [DW-1:0]      s_data,
  output logic               s_vio
);

  localparam int IW = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  logic spec_mode, at_cqip, pre;
  logic cqip_ev, pslice_exit;

  // speculation instruction handling
  always_comb begin
    spawn_req = 1'b0; squash_req = 1'b0; cqip_ev = 1'b0; pslice_exit = 1'b0;
    spi_ready = 1'b0;
    spawn_label = spi_label; squash_label = spi_label;
    if (spi_valid && core_run) begin
      unique case (spi_op)
        SPI_SPAWN:       if (state inside {TS_SPEXEC, TS_STABLE}) begin
                           spawn_req = 1'b1; spi_ready = spawn_ack;
                         end else spi_ready = 1'b1;
        SPI_SQUASH:      begin squash_req = 1'b1; spi_ready = squash_ack; end
        SPI_CQIP:        begin cqip_ev = (state != TS_PRECOMP); spi_ready = 1'b1; end
        SPI_PSLICE_EXIT: begin pslice_exit = (state == TS_PRECOMP); spi_ready = 1'b1; end
        default:         spi_ready = 1'b1;   // pslice_entry: marker only
      endcase
    end
  end

  thread_ctrl u_tc (
    .clk, .rst_n, .spawn_go, .start_stable, .pslice_exit, .cqip(cqip_ev),
    .has_succ, .verify_msg, .token, .sub_done, .sub_pass, .commit_done,
    .squash, .restart, .state, .at_cqip, .core_run, .core_start, .spec_mode
  );

  assign pre = (state == TS_PRECOMP);

  // memory cache and its access controller
  logic [AW-1:0] l_addr;
  lop_e          l_op;
  logic          l_op_valid, l_hit, l_can, inv_all;
  logic [DW-1:0] l_wdata, l_data;
  lstate_e       l_state;
  logic [IW-1:0] w_idx;
  mline_t        w_line;
  logic [IW:0]   used;
  logic          sreq_valid, sreq_done;
  bus_req_t      sreq;
  logic [DW-1:0] sreq_rdata;
  logic          reg_fail, reg_sync;

  mv_cache #(.ENTRIES(ENTRIES)) u_mc (
    .clk, .rst_n, .l_addr, .l_op, .l_op_valid, .l_wdata, .tv, .l_hit, .l_data,
    .l_state, .l_can, .s_valid, .s_cmd(s_req.cmd), .s_addr(s_req.addr),
    .s_ver(s_req.ver), .s_stm, .s_hit, .s_data, .s_vio, .w_idx, .w_line,
    .inv_all, .used
  );

  l1_access_ctrl u_l1 (
    .creq_valid, .creq_we, .creq_addr, .creq_wdata, .creq_ready, .creq_rdata,
    .acc_en(core_run), .pre, .tv, .ovf_stall, .l_addr, .l_op, .l_op_valid,
    .l_wdata, .l_hit, .l_state, .l_data, .l_can, .sreq_valid, .sreq, .sreq_done,
    .sreq_rdata, .m_valid, .m_req, .m_done, .m_rdata
  );

  spec_ctrl #(.ENTRIES(ENTRIES)) u_sc (
    .clk, .rst_n, .state, .w_idx, .w_line, .inv_all, .reg_fail, .reg_sync,
    .sreq_valid, .sreq, .sreq_done, .sreq_rdata, .vfy_done, .vfy_pass,
    .commit_done
  );

  reg_cache #(.NREG(NREG)) u_rc (
    .clk, .rst_n, .spec(spec_mode), .rd_en(rd_en && core_run), .rd_addr, .rd_data,
    .wr_en(wr_en && core_run), .wr_addr, .wr_data, .load(spawn_go), .load_vals,
    .pslice_done(pslice_exit), .restore(state == TS_RESTART),
    .inv(state == TS_SQUASH), .sync_vals, .sync_apply(reg_sync),
    .sync_fail(reg_fail), .vals(reg_vals), .st(reg_state)
  );

endmodule
