// spec_ctrl: speculation controller of one PE.
//
// Runs the two sequences that touch every line of the PE's memory cache:
//   * Verification (thread state Verification): every line left by
//     pre-computation in PreEx or PreExO is checked against the stable
//     thread's value of the same address.  The value is fetched with an RSpR
//     read on the bus, which the immediate predecessor (the stable thread)
//     answers from its L1 or, failing that, the L2.  After the walk the
//     register cache's sync_fail (pre-computed live-ins read before written
//     differ from the stable thread's registers) is added.  The result is a
//     one-cycle vfy_done pulse with vfy_pass; on a pass reg_sync is pulsed so
//     that registers still in Init take the stable thread's values.
//   * Commit (thread state Commit): every newest modified line (PreEx, SpShM,
//     SpEx) is written back to L2 with a bus write-back; then the cache is
//     invalidated and commit_done is pulsed.
// The design says the stable thread verifies its successor; here the walk is
// run by the successor's own controller, reading the stable thread's data
// over the bus, which is this implementation's choice.  inv_all is also held
// in the Squash and Restart states so that all speculative lines are dropped.
// Each walk step takes one cycle, plus the bus time for a line that needs a
// bus transfer.
module spec_ctrl
  import prophet_pkg::*;
#(
  parameter int ENTRIES = 32,
  localparam int IW = (ENTRIES > 1) ? $clog2(ENTRIES) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  tstate_e        state,
  output logic [IW-1:0]  w_idx,
  input  mline_t         w_line,
  output logic           inv_all,
  input  logic           reg_fail,
  output logic           reg_sync,
  output logic           sreq_valid,
  output bus_req_t       sreq,
  input  logic           sreq_done,
  input  logic [DW-1:0]  sreq_rdata,
  output logic           vfy_done,
  output logic           vfy_pass,
  output logic           commit_done
);

  typedef enum logic [2:0] {SC_IDLE, SC_VWALK, SC_VEND, SC_CWALK, SC_CEND, SC_HOLD} sc_e;
  sc_e           sc;
  logic [IW-1:0] idx;
  logic          fail;
  lstate_e       ls;

  assign w_idx = idx;
  assign ls    = line_state(w_line);

  logic need;
  always_comb begin
    need = 1'b0; sreq = '0;
    if (sc == SC_VWALK && ls inside {LS_PREEX, LS_PREEXO}) begin
      need = 1'b1; sreq.cmd = BUS_RSP; sreq.addr = w_line.tag;
    end else if (sc == SC_CWALK && ls inside {LS_PREEX, LS_SPSHM, LS_SPEX}) begin
      need = 1'b1; sreq.cmd = BUS_WB; sreq.addr = w_line.tag; sreq.data = w_line.data;
    end
    sreq_valid = need;
  end

  wire last    = (idx == IW'(ENTRIES - 1));
  wire step_ok = !need || sreq_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sc <= SC_IDLE; idx <= '0; fail <= 1'b0;
    end else begin
      unique case (sc)
        SC_IDLE: begin
          idx <= '0; fail <= 1'b0;
          if (state == TS_VERIFY) sc <= SC_VWALK;
          else if (state == TS_COMMIT) sc <= SC_CWALK;
        end
        SC_VWALK: if (state != TS_VERIFY) sc <= SC_IDLE;
                  else if (step_ok) begin
                    if (need && sreq_rdata != w_line.data) fail <= 1'b1;
                    if (last) sc <= SC_VEND; else idx <= idx + 1'b1;
                  end
        SC_VEND:  sc <= SC_HOLD;
        SC_CWALK: if (state != TS_COMMIT) sc <= SC_IDLE;
                  else if (step_ok) begin
                    if (last) sc <= SC_CEND; else idx <= idx + 1'b1;
                  end
        SC_CEND:  sc <= SC_HOLD;
        SC_HOLD:  if (!(state inside {TS_VERIFY, TS_COMMIT})) sc <= SC_IDLE;
        default:  sc <= SC_IDLE;
      endcase
    end
  end

  assign vfy_done    = (sc == SC_VEND);
  assign vfy_pass    = vfy_done && !fail && !reg_fail;
  assign reg_sync    = vfy_pass;
  assign commit_done = (sc == SC_CEND);
  assign inv_all     = (sc == SC_CEND) || state inside {TS_SQUASH, TS_RESTART};

endmodule
