// mem_model: behavioural model of main memory for simulation only.
//
// One word per address.  Word a starts as INIT_XOR ^ a, so that every
// address has a known, distinct value.  A request (held until ack) is
// acknowledged LAT cycles after it is first seen; a write updates the word
// on the acknowledge.  Not synthesizable as a product part: it stands in for
// the off-chip memory behind the L2 cache.
module mem_model
  import prophet_pkg::*;
#(
  parameter int          LAT      = 3,
  parameter logic [31:0] INIT_XOR = 32'h5A5A_0000
) (
  input  logic          clk,
  input  logic          req,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  logic [DW-1:0] wdata,
  output logic          ack,
  output logic [DW-1:0] rdata
);
  logic [DW-1:0] mem [2**AW];
  int            cnt = 0;
  int unsigned   writes = 0;

  initial for (int i = 0; i < 2**AW; i++) mem[i] = INIT_XOR ^ DW'(i);

  assign rdata = mem[addr];
  assign ack   = req && cnt == LAT;

  always @(posedge clk) begin
    if (!req || ack) cnt <= 0; else cnt <= cnt + 1;
    if (ack && we) begin mem[addr] <= wdata; writes <= writes + 1; end
  end
endmodule
