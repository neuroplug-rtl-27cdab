// tb_onchip_buffer: writes a pseudo-random pattern over the whole of a
// full-size (182 kB) buffer, reads it back in another order, checks the
// one-cycle read latency, that a read without re keeps the last data, and
// that a simultaneous write and read of one address returns the old value.
module tb_onchip_buffer;
  localparam int unsigned DEPTH = 182 * 1024;
  localparam int unsigned AW = $clog2(DEPTH);
  logic clk = 0, we = 0, re = 0;
  logic [AW-1:0] waddr, raddr;
  logic [7:0] wdata, rdata;
  int checks = 0, failures = 0;

  onchip_buffer dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [7:0] pat(input int unsigned a, input int unsigned k);
    return 8'((a * 2654435761) >> 13) ^ 8'(k);
  endfunction

  initial begin
    @(negedge clk);
    for (int unsigned a = 0; a < DEPTH; a++) begin
      we = 1; waddr = AW'(a); wdata = pat(a, 0);
      @(negedge clk);
    end
    we = 0;
    // read back, stepping by a stride co-prime with DEPTH
    for (int unsigned i = 0; i < DEPTH; i += 7) begin
      int unsigned a;
      a = (i * 997) % DEPTH;
      re = 1; raddr = AW'(a);
      @(negedge clk);
      checks++;
      if (rdata != pat(a, 0)) begin failures++; if (failures < 5) $display("addr %0d got %h", a, rdata); end
    end
    // hold: no re, data kept
    re = 0; raddr = 0;
    @(negedge clk);
    checks++;
    if (rdata != pat(((DEPTH - 1) / 7 * 7 * 997) % DEPTH, 0)) begin failures++; $display("hold %h", rdata); end
    // read-during-write of the same address returns the old value
    we = 1; re = 1; waddr = AW'(5); raddr = AW'(5); wdata = 8'hA5;
    @(negedge clk);
    we = 0;
    checks++;
    if (rdata != pat(5, 0)) begin failures++; $display("rdw %h", rdata); end
    @(negedge clk);
    checks++;
    if (rdata != 8'hA5) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
