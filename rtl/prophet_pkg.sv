// prophet_pkg: shared widths, state encodings and message types of the
// Prophet speculative multithreading CMP.
//
// The thread states follow the states the Prophet execution model names for a
// thread's life cycle; the memory-cache line states and their V/RL/M/Ver/O
// bit encoding, the register-cache states and their V/L/M encoding, and the
// bus message kinds (RPrR, RSpR, VioTest) follow the design's tables.  The
// address, data and version widths are not given by the design and are this
// implementation's choice: a 16-bit word address, 32-bit data words and an
// 8-bit thread version.  Cache lines hold one word.
package prophet_pkg;

  localparam int AW = 16;   // word address width (choice)
  localparam int DW = 32;   // data word width (choice)
  localparam int VW = 8;    // thread version width (choice)
  localparam int LW = 16;   // label (thread start address) width (choice)

  // Thread states of the execution model.
  typedef enum logic [3:0] {
    TS_IDLE, TS_INIT, TS_PRECOMP, TS_SPEXEC, TS_WAIT, TS_VERIFY,
    TS_STABLE, TS_SUBVERIFY, TS_COMMIT, TS_SQUASH, TS_RESTART
  } tstate_e;

  // Decoded memory cache line state.
  typedef enum logic [3:0] {
    LS_INVALID, LS_PRESH, LS_PREEX, LS_PREEXO,
    LS_SPSH, LS_SPSHM, LS_SPSHO, LS_SPEX, LS_SPEXO
  } lstate_e;

  // One memory cache line: state bits, address tag and data.
  typedef struct packed {
    logic          v;    // valid
    logic          rl;   // remote loaded
    logic          m;    // modified
    logic [VW-1:0] ver;  // version (0 = pre-computation)
    logic          o;    // old
    logic [AW-1:0] tag;
    logic [DW-1:0] data;
  } mline_t;

  // Decode the state bits of a line into its named state.
  function automatic lstate_e line_state(mline_t l);
    if (!l.v) return LS_INVALID;
    if (l.ver == '0) begin
      if (l.rl && !l.m)        return LS_PRESH;
      if (!l.rl && l.m && !l.o) return LS_PREEX;
      if (!l.rl && l.m && l.o)  return LS_PREEXO;
      return LS_INVALID;
    end
    if (l.rl && !l.m && !l.o)  return LS_SPSH;
    if (l.rl && l.m && !l.o)   return LS_SPSHM;
    if (l.rl && l.m && l.o)    return LS_SPSHO;
    if (!l.rl && l.m && !l.o)  return LS_SPEX;
    if (!l.rl && l.m && l.o)   return LS_SPEXO;
    return LS_INVALID;
  endfunction

  // Local operations applied to the memory cache by the access controller.
  typedef enum logic [1:0] {
    LOP_PRE_WR,    // LPrW
    LOP_SP_WR,     // LSpW
    LOP_FILL_PRE,  // line returned for an LPrR miss -> PreSh
    LOP_FILL_SP    // line returned for an LSpR miss -> SpSh
  } lop_e;

  // Bus commands.
  typedef enum logic [1:0] {
    BUS_RPR,  // RPrR: read by a pre-computing successor (carries its version)
    BUS_RSP,  // RSpR: read by a speculating successor
    BUS_VIO,  // VioTest: speculative/stable write, violation detection
    BUS_WB    // commit write-back of a line to L2
  } bus_cmd_e;

  typedef struct packed {
    bus_cmd_e      cmd;
    logic [AW-1:0] addr;
    logic [DW-1:0] data;
    logic [VW-1:0] ver;
  } bus_req_t;

  // Speculation instructions as delivered by the core's decoder.
  typedef enum logic [2:0] {
    SPI_SPAWN, SPI_CQIP, SPI_SQUASH, SPI_PSLICE_ENTRY, SPI_PSLICE_EXIT
  } spi_e;

  // Register cache states.
  typedef enum logic [2:0] {
    RS_INVALID, RS_INIT, RS_VALIDATE, RS_MCOMMIT, RS_VAANDMC
  } rstate_e;

endpackage
