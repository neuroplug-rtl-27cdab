// bin_rx_buffer: takes whole bins from memory at a fixed rate and hands them
// on to the bin reader at whatever pace the decompression side allows.
//
// How it works. Two bin slots sit in one on-chip SRAM. A slot that is free
// accepts a whole bin, one byte per cycle, and is then marked full; the
// reader side drains full slots in turn through a two-entry queue that hides
// the SRAM's one-cycle read latency. Once a bin has started arriving,
// in_ready stays high until its last byte: the time a bin occupies the memory
// bus therefore does not depend on how much of it is payload and how much is
// empty space, which the bit-serial decoder behind it would otherwise reveal.
//
// Interface and timing.
//   in_*  : valid/ready bytes from memory (after decryption). in_ready is
//           high while the slot being filled is free; it changes only
//           between bins. in_bin_done pulses with the last byte of a bin.
//   out_* : valid/ready bytes of the oldest full bin, in order.
//
// Follows the paper: a bin is read in one go and every bin takes the same
// time. Two slots, their SRAM organisation and the handshake are this
// implementation's own choices.
//
// Lint note: Verilator reports rst_n as used both asynchronously and
// synchronously. The synchronous use is only the 'disable iff' of the
// handshake assertion; the logic itself resets asynchronously.
module bin_rx_buffer
  import neuroplug_pkg::*;
#(
  parameter int unsigned BIN_SIZE = BIN_BYTES,
  localparam int unsigned AW      = $clog2(2 * BIN_SIZE),
  localparam int unsigned PW      = $clog2(BIN_SIZE)
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  output logic       in_ready,
  input  logic [7:0] in_data,
  output logic       in_bin_done,
  output logic       out_valid,
  input  logic       out_ready,
  output logic [7:0] out_data
);

  logic [1:0]    full_q;
  logic          wslot, rslot;
  logic [PW-1:0] wpos, rpos;

  // ---- fill side ----
  logic in_fire, w_end;
  assign in_ready    = !full_q[wslot];
  assign in_fire     = in_valid && in_ready;
  assign w_end       = 32'(wpos) == BIN_SIZE - 1;
  assign in_bin_done = in_fire && w_end;

  // ---- drain side: SRAM read issue and a two-entry queue ----
  logic [7:0] q_data [2];
  logic       q_wp, q_rp;
  logic [1:0] q_cnt;
  logic       inflight, issue, pop, r_end;
  logic [7:0] rdata;

  assign pop       = out_valid && out_ready;
  assign issue     = full_q[rslot] && (32'(q_cnt) + 32'(inflight) - 32'(pop)) < 2;
  assign r_end     = 32'(rpos) == BIN_SIZE - 1;
  assign out_valid = q_cnt != 0;
  assign out_data  = q_data[q_rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full_q   <= '0;
      wslot    <= 1'b0;
      rslot    <= 1'b0;
      wpos     <= '0;
      rpos     <= '0;
      inflight <= 1'b0;
      q_wp     <= 1'b0;
      q_rp     <= 1'b0;
      q_cnt    <= '0;
    end else begin
      if (in_fire) begin
        wpos <= w_end ? '0 : wpos + 1'b1;
        if (w_end) begin
          full_q[wslot] <= 1'b1;
          wslot         <= ~wslot;
        end
      end
      if (issue) begin
        rpos <= r_end ? '0 : rpos + 1'b1;
        if (r_end) begin
          full_q[rslot] <= 1'b0;
          rslot         <= ~rslot;
        end
      end
      inflight <= issue;
      if (inflight) q_wp <= ~q_wp;
      if (pop)      q_rp <= ~q_rp;
      q_cnt <= q_cnt + {1'b0, inflight} - {1'b0, pop};
    end
  end

  always_ff @(posedge clk) if (inflight) q_data[q_wp] <= rdata;

  onchip_buffer #(.DEPTH(2 * BIN_SIZE), .WIDTH(8)) u_rxbuf (
    .clk,
    .we(in_fire), .waddr(AW'(32'(wslot) * BIN_SIZE + 32'(wpos))), .wdata(in_data),
    .re(issue),   .raddr(AW'(32'(rslot) * BIN_SIZE + 32'(rpos))), .rdata(rdata)
  );

  assert property (@(posedge clk) disable iff (!rst_n) q_cnt <= 2);

endmodule
