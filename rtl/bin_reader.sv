// bin_reader: unpacks bins read back from memory.
//
// It is the inverse of the binning logic. A bin arrives whole, BIN_SIZE bytes
// in order. The first bytes are its Bin Table (number of tiles that start in
// the bin, end of payload, start offset of each tile; layout in
// neuroplug_pkg); they are kept in registers and not forwarded. Payload bytes
// are passed on, with tile_first set on every byte whose offset is listed in
// the table, so the decompression unit sees one continuous stream of
// compressed tiles again, including tiles that were split across bins. The
// empty bytes after the payload (the noise N) are read and dropped.
//
// The design says only that the Bin Table gives each tile's start; this
// reader, its table layout and the hdr_err check (tile count above
// MAX_TILES, payload end outside the bin, offsets not increasing) are this
// implementation's.
//
// Interface: valid/ready byte stream of bins in, valid/ready stream of
// compressed tile bytes out. No storage: payload bytes go through in the same
// cycle (in_ready follows out_ready), table and noise bytes are taken one
// per cycle.
module bin_reader
  import neuroplug_pkg::*;
#(
  parameter int unsigned BIN_SIZE  = BIN_BYTES,
  parameter int unsigned MAX_TILES = KAPPA,
  localparam int unsigned HDR      = 4 + 2 * MAX_TILES,
  localparam int unsigned IW       = (MAX_TILES > 1) ? $clog2(MAX_TILES) : 1
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  output logic       in_ready,
  input  logic [7:0] in_data,
  output logic       out_valid,
  input  logic       out_ready,
  output tile_byte_t out_data,
  output logic       hdr_err,
  output logic       ev_bin_done
);

  logic [15:0] a;                       // byte index inside the bin
  logic [15:0] ntiles, pend;
  logic [15:0] off [MAX_TILES];
  logic [15:0] ti;                      // next table entry to match
  logic        payload;
  logic        first_hit;
  logic        take;

  assign payload   = (a >= 16'(HDR)) && (a < pend);
  assign first_hit = (ti < ntiles) && (ti < 16'(MAX_TILES)) && (off[IW'(ti)] == a);
  assign out_valid = in_valid && payload;
  assign out_data  = '{tile_first: first_hit, data: in_data};
  assign in_ready  = payload ? out_ready : 1'b1;
  assign take      = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a           <= '0;
      ntiles      <= '0;
      pend        <= '0;
      ti          <= '0;
      hdr_err     <= 1'b0;
      ev_bin_done <= 1'b0;
      for (int i = 0; i < MAX_TILES; i++) off[i] <= '0;
    end else begin
      hdr_err     <= 1'b0;
      ev_bin_done <= 1'b0;
      if (take) begin
        a <= (a == 16'(BIN_SIZE - 1)) ? '0 : a + 16'd1;
        if (a == 16'(BIN_SIZE - 1)) ev_bin_done <= 1'b1;
        unique case (a)
          16'd0: begin ntiles[7:0] <= in_data; ti <= '0; end
          16'd1: ntiles[15:8] <= in_data;
          16'd2: pend[7:0]    <= in_data;
          16'd3: begin
            pend[15:8] <= in_data;
            if (ntiles > 16'(MAX_TILES) || {in_data, pend[7:0]} < 16'(HDR) ||
                {in_data, pend[7:0]} > 16'(BIN_SIZE))
              hdr_err <= 1'b1;
          end
          default: begin
            if (a < 16'(HDR)) begin
              if (a[0] == 1'b0) off[IW'((a - 16'd4) >> 1)][7:0]  <= in_data;
              else              off[IW'((a - 16'd4) >> 1)][15:8] <= in_data;
            end
          end
        endcase
        if (a == 16'(HDR - 1)) begin
          for (int i = 1; i < MAX_TILES; i++)
            if (16'(i) < ntiles && (i == MAX_TILES - 1 ? {in_data, off[i][7:0]} : off[i]) <= off[i-1])
              hdr_err <= 1'b1;
        end
        if (payload && first_hit) ti <= ti + 16'd1;
      end
    end
  end

endmodule
