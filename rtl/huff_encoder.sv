// huff_encoder: compression unit. Huffman-codes the bytes of each tile.
//
// The design compresses every tile before binning, with pruning followed by
// Huffman coding in the manner of Deep Compression; the code table belongs to
// the model and is written by the host through the configuration port. How
// the coder is built is this implementation's choice: a 256-entry table of
// {length, code} (codes up to HUFF_MAX_LEN = 16 bits, MSB sent first) and a
// 32-bit bit accumulator.
//
// Each compressed tile starts on a byte boundary; its last byte is padded
// with zeros. The first output byte of a tile carries tile_first and the last
// one out_last, so a tile can be found again in a bin.
//
// Timing: one input byte is taken per cycle while fewer than 17 bits wait in
// the accumulator, one output byte is produced per cycle; input and output use
// valid/ready handshakes. After the last byte of a tile the coder takes no
// input until the tile's last (padded) byte has left.
//
// Lint note: Verilator reports rst_n as used both asynchronously and
// synchronously. The synchronous use is only the 'disable iff' of the
// handshake assertions; the logic itself resets asynchronously.
module huff_encoder
  import neuroplug_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  // code table
  input  logic       cfg_we,
  input  logic [7:0] cfg_sym,
  input  huff_code_t cfg_code,
  // uncompressed tile bytes
  input  logic       in_valid,
  output logic       in_ready,
  input  logic [7:0] in_data,
  input  logic       in_last,
  // compressed bytes
  output logic       out_valid,
  input  logic       out_ready,
  output tile_byte_t out_data,
  output logic       out_last
);

  huff_code_t table_q [NSYM];

  logic [31:0] acc, acc_n;
  logic [5:0]  cnt, cnt_n;
  logic        flush, flush_n;
  logic        first_q;

  huff_code_t  ent;
  logic [31:0] code_la;
  logic        pop, take;
  logic [31:0] acc_p;
  logic [5:0]  cnt_p;

  always_ff @(posedge clk) begin
    if (cfg_we) table_q[cfg_sym] <= cfg_code;
  end

  assign ent       = table_q[in_data];
  assign code_la   = (ent.len == 0) ? '0 : (32'(ent.code) << (6'd32 - 6'(ent.len)));
  assign out_valid = (cnt >= 6'd8) || (flush && cnt != 0);
  assign out_data  = '{tile_first: first_q, data: acc[31:24]};
  assign out_last  = flush && (cnt <= 6'd8);
  assign in_ready  = !flush && (cnt <= 6'd16);
  assign pop       = out_valid && out_ready;
  assign take      = in_valid && in_ready;

  always_comb begin
    acc_p = pop ? (acc << 8) : acc;
    cnt_p = pop ? ((cnt >= 6'd8) ? cnt - 6'd8 : 6'd0) : cnt;
    acc_n = acc_p;
    cnt_n = cnt_p;
    flush_n = flush;
    if (take) begin
      acc_n = acc_p | (code_la >> cnt_p);
      cnt_n = cnt_p + 6'(ent.len);
      if (in_last) flush_n = 1'b1;
    end
    if (flush && ((pop && out_last) || cnt == 0)) flush_n = 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc     <= '0;
      cnt     <= '0;
      flush   <= 1'b0;
      first_q <= 1'b1;
    end else begin
      acc   <= acc_n;
      cnt   <= cnt_n;
      flush <= flush_n;
      if (pop) first_q <= out_last;
    end
  end

  // The accumulator never overflows: input is taken only below 17 bits.
  assert property (@(posedge clk) disable iff (!rst_n) cnt <= 6'd32);

endmodule
