// onchip_buffer: an on-chip SRAM with one write port and one read port.
//
// The NPU holds two 182 kB buffers inside the trusted boundary: the global
// buffer, which keeps decompressed tiles for the compute engine, and the
// compression buffer, in which bins are assembled before they leave the chip
// (three 60 kB bins fit in it). Both are instances of this module; the size
// is the design's, the organisation (byte wide, one write and one read port,
// read data one cycle after the address) is this implementation's choice. It
// is written as an array so that synthesis maps it to an SRAM macro.
module onchip_buffer #(
  parameter int unsigned DEPTH = 182 * 1024,   // bytes
  parameter int unsigned WIDTH = 8,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

  assert property (@(posedge clk) we |-> 32'(waddr) < DEPTH);
  assert property (@(posedge clk) re |-> 32'(raddr) < DEPTH);

endmodule
