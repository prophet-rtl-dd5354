// l2_cache: shared L2 cache between the snoopy bus and main memory.
//
// The design only places an L2 between the bus and main memory.  This
// implementation makes it the simplest cache that does that job: direct
// mapped, one word per line, write-through with allocate on both read and
// write.  Committed data therefore reaches main memory at once, and main
// memory always holds the architectural (non-speculative) state.
// Timing: a read hit is acknowledged in the cycle the request is seen; a read
// miss is acknowledged in the cycle main memory acknowledges, with the memory
// word on rdata; a write is acknowledged when main memory acknowledges it.
// The requester holds req (and its fields) until ack.
module l2_cache
  import prophet_pkg::*;
#(
  parameter int L2_LINES = 256,
  localparam int XW = $clog2(L2_LINES)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           req,
  input  logic           we,
  input  logic [AW-1:0]  addr,
  input  logic [DW-1:0]  wdata,
  output logic           ack,
  output logic [DW-1:0]  rdata,
  // main memory port
  output logic           mem_req,
  output logic           mem_we,
  output logic [AW-1:0]  mem_addr,
  output logic [DW-1:0]  mem_wdata,
  input  logic           mem_ack,
  input  logic [DW-1:0]  mem_rdata
);

  logic [DW-1:0]    data  [L2_LINES];
  logic [AW-XW-1:0] tags  [L2_LINES];
  logic             valid [L2_LINES];

  wire [XW-1:0]    idx = addr[XW-1:0];
  wire [AW-XW-1:0] tg  = addr[AW-1:XW];
  wire             hit = valid[idx] && tags[idx] == tg;

  typedef enum logic [1:0] {L2_IDLE, L2_MEM} l2st_e;
  l2st_e st;

  assign mem_req   = (st == L2_MEM);
  assign mem_we    = we;
  assign mem_addr  = addr;
  assign mem_wdata = wdata;
  assign ack   = (st == L2_IDLE && req && !we && hit) || (st == L2_MEM && mem_ack);
  assign rdata = (st == L2_MEM) ? mem_rdata : data[idx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= L2_IDLE;
      for (int i = 0; i < L2_LINES; i++) valid[i] <= 1'b0;
    end else begin
      unique case (st)
        L2_IDLE: if (req && (we || !hit)) st <= L2_MEM;
        default: if (mem_ack) begin
                   st         <= L2_IDLE;
                   valid[idx] <= 1'b1;
                   tags[idx]  <= tg;
                   data[idx]  <= we ? wdata : mem_rdata;
                 end
      endcase
    end
  end

endmodule
