// reg_cache: multi-version register file ("register cache") of one PE.
//
// Every register carries the state bits {V, L, M} of the design's register
// cache line: Init = 100, Validate = 110, MCommit = 101, VaandMC = 111,
// Invalid = 0xx.  Transitions follow the register cache mechanism:
//   * during pre-computation (spec = 0) reads and writes access the value
//     directly and leave the state unchanged (RP/WP);
//   * leaving pre-computation (pslice_done) saves every value and puts every
//     register in Init;
//   * in speculation a read (RS) moves Init -> Validate; a write (WS) moves
//     Init -> MCommit and Validate -> VaandMC; MCommit and VaandMC stay.
// Beyond the single data field of the line format, each register keeps two
// further copies (a choice of this implementation): pval, the value at the
// end of pre-computation, which is what a Validate/VaandMC register must be
// checked against even after it has been overwritten, and snap, the value
// copied from the parent at spawn, which a restart restores.
//
// Synchronisation with the stable thread (sync_vals = the stable thread's
// registers): sync_fail is high when any register read before written
// (L = 1) holds a pre-computed value different from the stable value.
// sync_apply copies the stable value into every register still in Init.
// load copies a parent's registers in one cycle (spawn), restore returns to
// the snapshot (restart), inv invalidates all registers (squash).
// Reads are combinational; all updates take effect at the clock edge.
module reg_cache
  import prophet_pkg::*;
#(
  parameter int NREG = 32,
  localparam int RW = $clog2(NREG)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                spec,        // 1: speculation/stable, 0: pre-computation
  input  logic                rd_en,
  input  logic [RW-1:0]       rd_addr,
  output logic [DW-1:0]       rd_data,
  input  logic                wr_en,
  input  logic [RW-1:0]       wr_addr,
  input  logic [DW-1:0]       wr_data,
  input  logic                load,
  input  logic [NREG*DW-1:0]  load_vals,
  input  logic                pslice_done,
  input  logic                restore,
  input  logic                inv,
  input  logic [NREG*DW-1:0]  sync_vals,
  input  logic                sync_apply,
  output logic                sync_fail,
  output logic [NREG*DW-1:0]  vals,
  output rstate_e             st [NREG]
);

  logic [DW-1:0] data [NREG];
  logic [DW-1:0] pval [NREG];
  logic [DW-1:0] snap [NREG];
  logic          v [NREG], l [NREG], m [NREG];

  assign rd_data = data[rd_addr];

  always_comb begin
    sync_fail = 1'b0;
    for (int i = 0; i < NREG; i++) begin
      vals[i*DW +: DW] = data[i];
      if (v[i] && l[i] && pval[i] != sync_vals[i*DW +: DW]) sync_fail = 1'b1;
      if (!v[i])              st[i] = RS_INVALID;
      else if (!l[i] && !m[i]) st[i] = RS_INIT;
      else if (l[i] && !m[i])  st[i] = RS_VALIDATE;
      else if (!l[i] && m[i])  st[i] = RS_MCOMMIT;
      else                     st[i] = RS_VAANDMC;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NREG; i++) begin
        data[i] <= '0; pval[i] <= '0; snap[i] <= '0;
        v[i] <= 1'b0; l[i] <= 1'b0; m[i] <= 1'b0;
      end
    end else if (inv) begin
      for (int i = 0; i < NREG; i++) v[i] <= 1'b0;
    end else if (load) begin
      for (int i = 0; i < NREG; i++) begin
        data[i] <= load_vals[i*DW +: DW]; snap[i] <= load_vals[i*DW +: DW];
        v[i] <= 1'b1; l[i] <= 1'b0; m[i] <= 1'b0;
      end
    end else if (restore) begin
      for (int i = 0; i < NREG; i++) begin
        data[i] <= snap[i]; v[i] <= 1'b1; l[i] <= 1'b0; m[i] <= 1'b0;
      end
    end else if (pslice_done) begin
      for (int i = 0; i < NREG; i++) begin
        pval[i] <= data[i]; v[i] <= 1'b1; l[i] <= 1'b0; m[i] <= 1'b0;
      end
    end else if (sync_apply) begin
      for (int i = 0; i < NREG; i++)
        if (v[i] && !l[i] && !m[i]) data[i] <= sync_vals[i*DW +: DW];
    end else begin
      // speculative read: Init -> Validate (a register written first stays MC)
      if (spec && rd_en && v[rd_addr] && !m[rd_addr]) l[rd_addr] <= 1'b1;
      if (wr_en) begin
        data[wr_addr] <= wr_data;
        if (spec) m[wr_addr] <= 1'b1;
        if (!spec) v[wr_addr] <= 1'b1;
      end
    end
  end

endmodule
