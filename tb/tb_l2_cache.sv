// tb_l2_cache: self-checking test of the L2 cache with a behavioural main
// memory of latency 3.  Checks a read miss (data from memory, ack after the
// memory latency), a read hit (ack in the cycle of the request), a
// write-through (memory updated, line allocated), a conflict miss that
// replaces a line, and random reads against a reference copy.
module tb_l2_cache;
  import prophet_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req = 0, we = 0, ack, mem_req, mem_we, mem_ack;
  logic [AW-1:0] addr = '0, mem_addr;
  logic [DW-1:0] wdata = '0, rdata, mem_wdata, mem_rdata;
  int checks = 0, failures = 0;
  logic [DW-1:0] ref_mem [logic [AW-1:0]];

  l2_cache #(.L2_LINES(256)) dut (.*);
  mem_model #(.LAT(3)) u_mem (.clk, .req(mem_req), .we(mem_we), .addr(mem_addr),
                              .wdata(mem_wdata), .ack(mem_ack), .rdata(mem_rdata));

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [DW-1:0] refv(input logic [AW-1:0] a);
    return ref_mem.exists(a) ? ref_mem[a] : (32'h5A5A_0000 ^ DW'(a));
  endfunction

  // one access; returns the number of cycles until ack
  task automatic acc(input logic w, input logic [AW-1:0] a, input logic [DW-1:0] d,
                     output logic [DW-1:0] q, output int lat);
    @(negedge clk); req = 1; we = w; addr = a; wdata = d; lat = 0;
    #1;
    while (!ack) begin @(negedge clk); #1; lat++; if (lat > 100) break; end
    q = rdata;
    @(posedge clk); #1 req = 0;
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [DW-1:0] q; int lat;
    repeat (2) @(negedge clk); rst_n = 1;
    acc(0, 16'h0012, 0, q, lat);
    check(q == refv(16'h0012) && lat == 4, $sformatf("read miss from memory (lat %0d)", lat));
    acc(0, 16'h0012, 0, q, lat);
    check(q == refv(16'h0012) && lat == 0, "read hit in the same cycle");
    acc(1, 16'h0034, 32'hCAFE, q, lat); ref_mem[16'h0034] = 32'hCAFE;
    check(u_mem.mem[16'h0034] == 32'hCAFE && lat == 4, "write-through reaches memory");
    acc(0, 16'h0034, 0, q, lat);
    check(q == 32'hCAFE && lat == 0, "written line allocated");
    acc(0, 16'h0134, 0, q, lat);
    check(q == refv(16'h0134) && lat == 4, "conflict miss");
    acc(0, 16'h0034, 0, q, lat);
    check(q == 32'hCAFE && lat == 4, "replaced line re-read from memory");
    for (int i = 0; i < 200; i++) begin
      automatic logic [AW-1:0] a = AW'($urandom_range(0, 1023));
      if ($urandom_range(0, 3) == 0) begin
        automatic logic [DW-1:0] d = $urandom;
        acc(1, a, d, q, lat); ref_mem[a] = d;
      end else begin
        acc(0, a, 0, q, lat);
        check(q == refv(a), "random read");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
