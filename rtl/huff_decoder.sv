// huff_decoder: decompression unit. Turns Huffman-coded tiles back into bytes.
//
// The decoder uses the canonical form of the code the encoder was given:
// the host writes, for each length L = 1..16, the number of codes of that
// length, and the list of symbols sorted by (code length, symbol value).
// First codes and first indices per length are derived here:
//   first_code[1] = 0, first_code[L+1] = (first_code[L] + count[L]) << 1.
// Decoding is bit-serial: one code bit per cycle; a code of length L is
// recognised when code - first_code[L] < count[L].
//
// A tile holds tile_bytes symbols; the bits left in its last byte are padding
// and are dropped, so the next tile starts on a byte boundary, as the encoder
// writes it. The canonical-code decoding and the bit-serial rate are choices
// of this implementation; the design only states that tiles are decompressed
// on chip.
//
// Interface: valid/ready byte stream in (tile_first is not needed, the tile
// length is), valid/ready symbol stream out with out_last on a tile's last
// symbol. err pulses when 16 bits match no code.
//
// Lint note: bit 8 of in_data (the tile-start flag) is unused, as said
// above, and bit 16 of the code register only catches an overrun past the
// longest code length, so Verilator lists both as unused bits.
module huff_decoder
  import neuroplug_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // canonical code description
  input  logic        cfg_cnt_we,
  input  logic [4:0]  cfg_len,
  input  logic [8:0]  cfg_cnt,
  input  logic        cfg_sym_we,
  input  logic [7:0]  cfg_idx,
  input  logic [7:0]  cfg_sym,
  input  logic [31:0] tile_bytes,
  // compressed bytes
  input  logic        in_valid,
  output logic        in_ready,
  input  tile_byte_t  in_data,
  // decoded bytes
  output logic        out_valid,
  input  logic        out_ready,
  output logic [7:0]  out_data,
  output logic        out_last,
  output logic        err
);

  logic [8:0]  count_q [1:HUFF_MAX_LEN];
  logic [7:0]  sym_q   [NSYM];
  logic [16:0] first_code  [1:HUFF_MAX_LEN];
  logic [8:0]  first_index [1:HUFF_MAX_LEN];

  always_ff @(posedge clk) begin
    if (cfg_cnt_we && cfg_len >= 5'd1 && cfg_len <= 5'(HUFF_MAX_LEN)) count_q[cfg_len] <= cfg_cnt;
    if (cfg_sym_we) sym_q[cfg_idx] <= cfg_sym;
  end

  always_comb begin
    logic [16:0] c;
    logic [8:0]  idx;
    c   = '0;
    idx = '0;
    for (int l = 1; l <= HUFF_MAX_LEN; l++) begin
      first_code[l]  = c;
      first_index[l] = idx;
      c   = (c + 17'(count_q[l])) << 1;
      idx = idx + count_q[l];
    end
  end

  logic [7:0]  sreg;
  logic [3:0]  nbits;
  logic [16:0] code;
  logic [4:0]  clen;
  logic [31:0] nsym;

  logic        step;
  logic        bit_in;
  logic [16:0] code_n;
  logic [4:0]  len_n;
  logic [16:0] off;
  logic        hit;
  logic        tile_end;

  assign step     = (nbits != 0) && (!out_valid || out_ready);
  assign bit_in   = sreg[7];
  assign code_n   = {code[15:0], bit_in};
  assign len_n    = clen + 5'd1;
  assign off      = code_n - first_code[len_n];
  assign hit      = step && (len_n <= 5'(HUFF_MAX_LEN)) && (off < 17'(count_q[len_n]));
  assign tile_end = hit && (nsym + 32'd1 >= tile_bytes);
  assign in_ready = (nbits == 0) || (nbits == 4'd1 && step);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sreg      <= '0;
      nbits     <= '0;
      code      <= '0;
      clen      <= '0;
      nsym      <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
      out_last  <= 1'b0;
      err       <= 1'b0;
    end else begin
      err <= 1'b0;
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (step) begin
        sreg  <= sreg << 1;
        nbits <= nbits - 4'd1;
        if (hit) begin
          out_valid <= 1'b1;
          out_data  <= sym_q[8'(first_index[len_n] + 9'(off))];
          out_last  <= tile_end;
          code      <= '0;
          clen      <= '0;
          if (tile_end) begin
            nsym  <= '0;
            nbits <= '0;           // drop the padding bits of the last byte
          end else begin
            nsym  <= nsym + 32'd1;
          end
        end else if (len_n >= 5'(HUFF_MAX_LEN)) begin
          err  <= 1'b1;
          code <= '0;
          clen <= '0;
        end else begin
          code <= code_n;
          clen <= len_n;
        end
      end
      if (in_valid && in_ready) begin
        sreg  <= in_data.data;
        nbits <= 4'd8;
      end
    end
  end

endmodule
