// halo_buffer: keeps the halo pixels that a tile needs from its western and
// northern neighbours while a layer is walked tile by tile.
//
// How it works. Tiles are processed row by row, west to east, starting at the
// north-west corner. While a tile is in flight, the compute side writes two
// edges of it into this buffer: its east edge (needed by the tile to its
// east) and its south edge (needed by the tile below it, one row later).
// When the next tile starts, it reads its west halo (the east edge just
// written) and its north halo (the south edge written one row earlier in the
// same column).
//   * West store: two banks of EDGE_V pixels, used alternately by column
//     parity, so a tile can write its east edge while it still reads its own
//     west halo.
//   * North store: two sets of MAX_COLS slots of EDGE_H pixels, used
//     alternately by row parity, plus one staging slot.
//   * Overflow: if a row has more than MAX_COLS tiles, the south edges of
//     columns MAX_COLS and up do not fit. They are sent out on the spill
//     stream (in the order they are written) to be stored in memory as an
//     SFC. In the next row, when such a column starts, the buffer first
//     pulls the same number of pixels back from the spill-in stream into the
//     staging slot and only then raises halo_ready.
//
// Interface and timing.
//   start/n_cols  : begin a layer whose rows have n_cols tiles (row 0, col 0).
//   tile_done     : the current tile is finished; move to the next one.
//   cur_row/col, has_west, has_north : position of the current tile and
//                   which halos exist (none at the west and north border).
//   halo_ready    : the current tile's halos can be read and its edges written.
//   wr_*          : valid/ready write of one pixel of the current tile's east
//                   (wr_edge=0) or south (wr_edge=1) edge, index wr_idx.
//                   For spilled columns the south edge must be written in
//                   index order 0..EDGE_H-1.
//   rd_en/rd_edge/rd_idx : read one pixel of the west (rd_edge=0) or north
//                   (rd_edge=1) halo; rd_data is valid the next cycle.
//   spill_out_* / spill_in_* : valid/ready byte streams to and from memory.
//
// Follows the paper: the north-west start and west-to-east, row-by-row
// order; halos from the western and northern neighbours; the south-edge
// pixels of a row kept in an on-chip buffer for the next row; on overflow
// they are written out as an SFC and read back in the same order.
// This implementation's own choices (the paper gives no sizes): halo width,
// tile and edge sizes, MAX_COLS, the double banking, the port protocol, and
// leaving the north-west corner pixels to the caller (they can be included
// in the east edge by making EDGE_V cover the halo rows as well).
//
// Lint note: Verilator reports rst_n as used both asynchronously and
// synchronously. The synchronous use is only the 'disable iff' of the
// handshake assertions; the logic itself resets asynchronously.
module halo_buffer #(
  parameter int unsigned PW       = 8,          // pixel width
  parameter int unsigned HALO     = 2,          // halo width: R-1 for a 3x3 filter
  parameter int unsigned TILE_H   = 16,         // tile height (pixels)
  parameter int unsigned TILE_W   = 16,         // tile width (pixels)
  parameter int unsigned TILE_C   = 16,         // channels per deep tile
  parameter int unsigned MAX_COLS = 14,         // tiles per row kept on chip
  localparam int unsigned EDGE_V  = HALO * TILE_H * TILE_C,
  localparam int unsigned EDGE_H  = HALO * TILE_W * TILE_C,
  localparam int unsigned EIW     = $clog2(EDGE_V > EDGE_H ? EDGE_V : EDGE_H),
  localparam int unsigned NSLOT   = 2 * MAX_COLS + 1,
  localparam int unsigned WDEPTH  = 2 * EDGE_V,
  localparam int unsigned NDEPTH  = NSLOT * EDGE_H,
  localparam int unsigned WAW     = $clog2(WDEPTH),
  localparam int unsigned NAW     = $clog2(NDEPTH)
) (
  input  logic           clk,
  input  logic           rst_n,

  input  logic           start,
  input  logic [15:0]    n_cols,
  input  logic           tile_done,
  output logic [15:0]    cur_row,
  output logic [15:0]    cur_col,
  output logic           has_west,
  output logic           has_north,
  output logic           halo_ready,

  input  logic           wr_valid,
  output logic           wr_ready,
  input  logic           wr_edge,
  input  logic [EIW-1:0] wr_idx,
  input  logic [PW-1:0]  wr_data,

  input  logic           rd_en,
  input  logic           rd_edge,
  input  logic [EIW-1:0] rd_idx,
  output logic [PW-1:0]  rd_data,

  output logic           spill_out_valid,
  input  logic           spill_out_ready,
  output logic [PW-1:0]  spill_out_data,
  input  logic           spill_in_valid,
  output logic           spill_in_ready,
  input  logic [PW-1:0]  spill_in_data
);

  localparam int unsigned SLW = $clog2(NSLOT);
  localparam logic [SLW-1:0] STAGE = SLW'(NSLOT - 1);

  logic [15:0]    row_q, col_q, ncols_q;
  logic           fetching;
  logic [EIW-1:0] fetch_cnt;

  // A column at or past MAX_COLS keeps its south edge off chip.
  logic col_spilled;
  assign col_spilled = 32'(col_q) >= MAX_COLS;

  assign cur_row    = row_q;
  assign cur_col    = col_q;
  assign has_west   = col_q != 0;
  assign has_north  = row_q != 0;
  assign halo_ready = !fetching;

  // ---- position and spill refill ----
  logic need_fetch_next;     // the tile after this one needs a refill
  logic [15:0] nrow, ncol;
  always_comb begin
    ncol = col_q + 16'd1;
    nrow = row_q;
    if (ncol == ncols_q) begin
      ncol = '0;
      nrow = row_q + 16'd1;
    end
    need_fetch_next = nrow != 0 && 32'(ncol) >= MAX_COLS;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row_q     <= '0;
      col_q     <= '0;
      ncols_q   <= 16'd1;
      fetching  <= 1'b0;
      fetch_cnt <= '0;
    end else if (start) begin
      row_q     <= '0;
      col_q     <= '0;
      ncols_q   <= (n_cols == 0) ? 16'd1 : n_cols;
      fetching  <= 1'b0;
      fetch_cnt <= '0;
    end else begin
      if (tile_done) begin
        row_q     <= nrow;
        col_q     <= ncol;
        fetching  <= need_fetch_next;
        fetch_cnt <= '0;
      end else if (fetching && spill_in_valid) begin
        fetch_cnt <= fetch_cnt + 1'b1;
        if (32'(fetch_cnt) == EDGE_H - 1) fetching <= 1'b0;
      end
    end
  end

  assign spill_in_ready = fetching;

  // ---- writes ----
  logic wr_spill;
  assign wr_spill        = wr_edge && col_spilled;
  assign wr_ready        = !fetching && (!wr_spill || spill_out_ready);
  assign spill_out_valid = wr_valid && !fetching && wr_spill;
  assign spill_out_data  = wr_data;

  logic wr_fire;
  assign wr_fire = wr_valid && wr_ready;

  // North slot of a column in a given row parity.
  function automatic logic [SLW-1:0] slot_of(logic par, logic [15:0] col);
    return SLW'(par ? 32'(MAX_COLS) + 32'(col) : 32'(col));
  endfunction

  logic           w_we, n_we;
  logic [WAW-1:0] w_waddr, w_raddr;
  logic [NAW-1:0] n_waddr, n_raddr;
  logic [PW-1:0]  n_wdata, w_rdata, n_rdata;
  logic [SLW-1:0] n_wslot, n_rslot;

  always_comb begin
    w_we    = wr_fire && !wr_edge;
    w_waddr = WAW'(32'(col_q[0]) * EDGE_V + 32'(wr_idx));
    if (fetching) begin
      n_we    = spill_in_valid;
      n_wslot = STAGE;
      n_waddr = NAW'(32'(STAGE) * EDGE_H + 32'(fetch_cnt));
      n_wdata = spill_in_data;
    end else begin
      n_we    = wr_fire && wr_edge && !col_spilled;
      n_wslot = slot_of(row_q[0], col_q);
      n_waddr = NAW'(32'(n_wslot) * EDGE_H + 32'(wr_idx));
      n_wdata = wr_data;
    end
  end

  // ---- reads ----
  always_comb begin
    w_raddr = WAW'(32'(~col_q[0]) * EDGE_V + 32'(rd_idx));
    n_rslot = col_spilled ? STAGE : slot_of(~row_q[0], col_q);
    n_raddr = NAW'(32'(n_rslot) * EDGE_H + 32'(rd_idx));
  end

  logic rd_edge_q;
  always_ff @(posedge clk) if (rd_en) rd_edge_q <= rd_edge;
  assign rd_data = rd_edge_q ? n_rdata : w_rdata;

  onchip_buffer #(.DEPTH(WDEPTH), .WIDTH(PW)) u_west (
    .clk, .we(w_we), .waddr(w_waddr), .wdata(wr_data),
    .re(rd_en && !rd_edge), .raddr(w_raddr), .rdata(w_rdata)
  );

  onchip_buffer #(.DEPTH(NDEPTH), .WIDTH(PW)) u_north (
    .clk, .we(n_we), .waddr(n_waddr), .wdata(n_wdata),
    .re(rd_en && rd_edge), .raddr(n_raddr), .rdata(n_rdata)
  );

  assert property (@(posedge clk) disable iff (!rst_n)
                   wr_valid && !wr_edge |-> 32'(wr_idx) < EDGE_V);
  assert property (@(posedge clk) disable iff (!rst_n)
                   wr_valid && wr_edge |-> 32'(wr_idx) < EDGE_H);

endmodule
