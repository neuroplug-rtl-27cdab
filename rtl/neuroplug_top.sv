// neuroplug_top: the NeuroPlug secure data path of an NPU.
//
// Between the compute engine and off-chip memory, every layer's data travels
// along a space filling curve as fixed-size, fixed-time bins:
//
//   write path: ofmap tiles from the compute engine -> compression unit
//               (Huffman) -> binning logic (bins assembled in the compression
//               buffer, Bin Table, tiles split across bins, key-dependent empty
//               space N from the noise generator) -> whole bins out, at bin
//               addresses from the ofmap SFC walker;
//   read path:  whole bins in, at bin addresses from the ifmap/filter SFC
//               walker -> receive buffer (two bins; a bin always arrives
//               in BIN_SIZE cycles) -> bin reader (Bin Table parsed, empty space dropped)
//               -> decompression unit -> global buffer, which the compute
//               engine reads;
//   halo path:  the halo buffer keeps the edge pixels a tile needs from its
//               western and northern neighbours as the read walk moves row
//               by row; the south edges of a row that does not fit spill to
//               memory as a separate stream and come back in the same order.
//
// An observer of the memory bus sees only whole bins at consecutive
// addresses; the number of bins of a layer is C*X + N rather than X, with C
// the compression ratio of the data and N the key-dependent empty space.
// That block structure is the design's. The compute engine (a systolic PE
// array), the encryption engine and the DRAM controller sit outside this
// module and are reached through its ports: the bin streams here are
// plaintext, to be encrypted and authenticated on their way to memory.
//
// The host writes the model key (noise parameters), the Huffman tables, the
// tile length and the walkers' sizes through a 32-bit configuration port
// (address map in neuroplug_pkg); the map and port are this
// implementation's choice.
//
// Timing: byte-serial streams with valid/ready everywhere; one byte per
// cycle through compression and binning, one code bit per cycle through
// decompression; a bin leaves in BIN_SIZE cycles when the memory side is
// always ready.
//
// Lint note: Verilator reports rst_n as used both asynchronously and
// synchronously. The synchronous use is only the 'disable iff' of the
// handshake assertions inside the sub-blocks; the logic itself resets asynchronously.
module neuroplug_top
  import neuroplug_pkg::*;
#(
  parameter int unsigned BIN_SIZE  = BIN_BYTES,    // 60 kB
  parameter int unsigned MAX_TILES = KAPPA,
  parameter int unsigned CBUF_SIZE = CBUF_BYTES,   // 182 kB
  parameter int unsigned GLB_SIZE  = GLB_BYTES,    // 182 kB
  parameter int unsigned DW        = 12,
  parameter int unsigned AW        = 40,
  parameter int unsigned HALO      = 2,            // halo buffer sizes
  parameter int unsigned TILE_H    = 16,
  parameter int unsigned TILE_W    = 16,
  parameter int unsigned TILE_C    = 16,
  parameter int unsigned HALO_COLS = 14,
  localparam int unsigned GW       = $clog2(GLB_SIZE),
  localparam int unsigned HEW      = $clog2(HALO * (TILE_H > TILE_W ? TILE_H : TILE_W) * TILE_C)
) (
  input  logic          clk,
  input  logic          rst_n,
  // host configuration (secure channel)
  input  logic          cfg_we,
  input  logic [11:0]   cfg_addr,
  input  logic [31:0]   cfg_wdata,
  // compute engine: ofmap tile bytes in
  input  logic          ce_ofm_valid,
  output logic          ce_ofm_ready,
  input  logic [7:0]    ce_ofm_data,
  input  logic          ce_ofm_tile_last,
  input  logic          ce_ofm_layer_last,
  // compute engine: tile order of the read walk
  output logic          ce_rd_tile_valid,
  input  logic          ce_rd_tile_ready,
  output logic [DW-1:0] ce_rd_tile_h,
  output logic [DW-1:0] ce_rd_tile_w,
  output logic [DW-1:0] ce_rd_tile_c,
  output logic [DW-1:0] ce_rd_tile_k,
  output logic          ce_rd_tile_layer2,
  output logic          ce_rd_tile_last,
  // compute engine: tile order of the ofmap walk
  output logic          ce_wr_tile_valid,
  input  logic          ce_wr_tile_ready,
  output logic [DW-1:0] ce_wr_tile_h,
  output logic [DW-1:0] ce_wr_tile_w,
  output logic [DW-1:0] ce_wr_tile_k,
  output logic          ce_wr_tile_last,
  // compute engine: global buffer read port
  input  logic          ce_glb_re,
  input  logic [GW-1:0] ce_glb_raddr,
  output logic [7:0]    ce_glb_rdata,
  output logic [GW-1:0] glb_wptr,
  output logic          glb_tile_done,   // a whole tile has been decompressed
  output logic          rd_walk_done,
  output logic          wr_walk_done,
  // memory side: bins out (to the encryption engine)
  output logic          mw_valid,
  input  logic          mw_ready,
  output logic [7:0]    mw_data,
  output logic          mw_bin_first,
  output logic          mw_bin_last,
  output logic [AW-1:0] mw_addr,
  // memory side: bins in (from the decryption engine)
  input  logic          mr_valid,
  output logic          mr_ready,
  input  logic [7:0]    mr_data,
  output logic [AW-1:0] mr_addr,
  // compute engine: halo pixels (row width = the read walk's n_w tiles)
  input  logic          ce_halo_tile_done,
  output logic [15:0]   ce_halo_row,
  output logic [15:0]   ce_halo_col,
  output logic          ce_halo_has_west,
  output logic          ce_halo_has_north,
  output logic          ce_halo_ready,
  input  logic          ce_halo_wr_valid,
  output logic          ce_halo_wr_ready,
  input  logic          ce_halo_wr_edge,
  input  logic [HEW-1:0] ce_halo_wr_idx,
  input  logic [7:0]    ce_halo_wr_data,
  input  logic          ce_halo_rd_en,
  input  logic          ce_halo_rd_edge,
  input  logic [HEW-1:0] ce_halo_rd_idx,
  output logic [7:0]    ce_halo_rd_data,
  // memory side: halo pixels that overflow the halo buffer (an SFC of their own)
  output logic          hs_out_valid,
  input  logic          hs_out_ready,
  output logic [7:0]    hs_out_data,
  input  logic          hs_in_valid,
  output logic          hs_in_ready,
  input  logic [7:0]    hs_in_data,
  // events
  output np_events_t    ev
);

  // receive buffer -> bin reader
  logic       rx_valid, rx_ready, rx_bin_done;
  logic [7:0] rx_data;

  // ------------------------------------------------------------ configuration
  noise_key_t  key;
  logic        seed_load;
  logic [31:0] tile_len;
  logic        enc_we, dcnt_we, dsym_we;

  typedef struct packed {
    sfc_mode_e     mode;
    logic [DW-1:0] nh, nw, nc, nk, nk2, nrep;
    logic [63:0]   base;
  } walk_cfg_t;
  walk_cfg_t rd_cfg, wr_cfg;
  logic      rd_start, wr_start;

  assign enc_we  = cfg_we && cfg_addr[11:8] == CFG_PAGE_ENC;
  assign dcnt_we = cfg_we && cfg_addr[11:8] == CFG_PAGE_DCNT;
  assign dsym_we = cfg_we && cfg_addr[11:8] == CFG_PAGE_DSYM;

  function automatic walk_cfg_t walk_write(input walk_cfg_t c, input logic [3:0] r, input logic [31:0] d);
    walk_cfg_t n = c;
    unique case (r)
      WK_MODE:    n.mode = sfc_mode_e'(d[1:0]);
      WK_NH:      n.nh   = DW'(d);
      WK_NW:      n.nw   = DW'(d);
      WK_NC:      n.nc   = DW'(d);
      WK_NK:      n.nk   = DW'(d);
      WK_NK2:     n.nk2  = DW'(d);
      WK_NREP:    n.nrep = DW'(d);
      WK_BASE_LO: n.base[31:0]  = d;
      WK_BASE_HI: n.base[63:32] = d;
      default: ;
    endcase
    return n;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      key       <= '0;
      seed_load <= 1'b0;
      tile_len  <= 32'd1;
      rd_cfg    <= '{mode: SFC_IFMAP, nh: 1, nw: 1, nc: 1, nk: 1, nk2: 1, nrep: 1, base: '0};
      wr_cfg    <= '{mode: SFC_OFMAP, nh: 1, nw: 1, nc: 1, nk: 1, nk2: 1, nrep: 1, base: '0};
      rd_start  <= 1'b0;
      wr_start  <= 1'b0;
    end else begin
      seed_load <= 1'b0;
      rd_start  <= 1'b0;
      wr_start  <= 1'b0;
      if (cfg_we) begin
        unique case (cfg_addr)
          CFG_ALPHA:    key.alpha     <= cfg_wdata[15:0];
          CFG_RANGE:    key.range_r   <= cfg_wdata[15:0];
          CFG_SIGMA:    key.sigma_max <= cfg_wdata[15:0];
          CFG_SEED:     begin key.seed <= cfg_wdata; seed_load <= 1'b1; end
          CFG_TILE_LEN: tile_len      <= cfg_wdata;
          default: ;
        endcase
        if (cfg_addr[11:4] == CFG_RD_WALK[11:4]) begin
          rd_cfg <= walk_write(rd_cfg, cfg_addr[3:0], cfg_wdata);
          if (cfg_addr[3:0] == WK_START) rd_start <= 1'b1;
        end
        if (cfg_addr[11:4] == CFG_WR_WALK[11:4]) begin
          wr_cfg <= walk_write(wr_cfg, cfg_addr[3:0], cfg_wdata);
          if (cfg_addr[3:0] == WK_START) wr_start <= 1'b1;
        end
      end
    end
  end

  // ----------------------------------------------------------------- walkers
  logic [DW-1:0] wr_c_unused;
  logic          wr_l2_unused;

  sfc_addr_gen #(.DW(DW), .AW(AW), .BIN_SIZE(BIN_SIZE)) u_rd_walk (
    .clk, .rst_n, .start(rd_start), .mode(rd_cfg.mode),
    .n_h(rd_cfg.nh), .n_w(rd_cfg.nw), .n_c(rd_cfg.nc), .n_k(rd_cfg.nk), .n_k2(rd_cfg.nk2),
    .n_rep(rd_cfg.nrep), .base(AW'(rd_cfg.base)),
    .out_valid(ce_rd_tile_valid), .out_ready(ce_rd_tile_ready),
    .out_h(ce_rd_tile_h), .out_w(ce_rd_tile_w), .out_c(ce_rd_tile_c), .out_k(ce_rd_tile_k),
    .out_layer2(ce_rd_tile_layer2), .out_last(ce_rd_tile_last), .done(rd_walk_done),
    .bin_step(rx_bin_done), .bin_addr(mr_addr)
  );

  sfc_addr_gen #(.DW(DW), .AW(AW), .BIN_SIZE(BIN_SIZE)) u_wr_walk (
    .clk, .rst_n, .start(wr_start), .mode(wr_cfg.mode),
    .n_h(wr_cfg.nh), .n_w(wr_cfg.nw), .n_c(wr_cfg.nc), .n_k(wr_cfg.nk), .n_k2(wr_cfg.nk2),
    .n_rep(wr_cfg.nrep), .base(AW'(wr_cfg.base)),
    .out_valid(ce_wr_tile_valid), .out_ready(ce_wr_tile_ready),
    .out_h(ce_wr_tile_h), .out_w(ce_wr_tile_w), .out_c(wr_c_unused), .out_k(ce_wr_tile_k),
    .out_layer2(wr_l2_unused), .out_last(ce_wr_tile_last), .done(wr_walk_done),
    .bin_step(mw_valid && mw_ready && mw_bin_last), .bin_addr(mw_addr)
  );

  // --------------------------------------------------------------- write path
  logic       enc_valid, enc_ready, enc_last;
  tile_byte_t enc_data;
  logic       layer_end_pending;
  logic       noise_req, noise_valid;
  logic [15:0] noise;

  huff_encoder u_compr (
    .clk, .rst_n,
    .cfg_we(enc_we), .cfg_sym(cfg_addr[7:0]),
    .cfg_code('{len: cfg_wdata[20:16], code: cfg_wdata[15:0]}),
    .in_valid(ce_ofm_valid), .in_ready(ce_ofm_ready), .in_data(ce_ofm_data),
    .in_last(ce_ofm_tile_last || ce_ofm_layer_last),
    .out_valid(enc_valid), .out_ready(enc_ready), .out_data(enc_data), .out_last(enc_last)
  );

  // the layer's last tile closes the open bin once its last compressed byte is in
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) layer_end_pending <= 1'b0;
    else begin
      if (ce_ofm_valid && ce_ofm_ready && ce_ofm_layer_last) layer_end_pending <= 1'b1;
      else if (enc_valid && enc_ready && enc_last)           layer_end_pending <= 1'b0;
    end
  end

  noise_gen u_noise (
    .clk, .rst_n, .key, .seed_load, .req(noise_req), .valid(noise_valid), .noise
  );

  bin_packer #(.BIN_SIZE(BIN_SIZE), .MAX_TILES(MAX_TILES), .CBUF_SIZE(CBUF_SIZE)) u_binning (
    .clk, .rst_n,
    .in_valid(enc_valid), .in_ready(enc_ready), .in_data(enc_data),
    .in_layer_last(enc_last && layer_end_pending),
    .noise_req, .noise_valid, .noise,
    .out_valid(mw_valid), .out_ready(mw_ready), .out_data(mw_data),
    .out_bin_first(mw_bin_first), .out_bin_last(mw_bin_last),
    .ev_bin_closed(ev.bin_closed), .ev_close_kappa(ev.close_kappa), .ev_close_full(ev.close_full),
    .ev_close_layer(ev.close_layer), .ev_split(ev.split_tile), .ev_slots_full(ev.slots_full)
  );

  // ---------------------------------------------------------------- read path
  logic       rdr_valid, rdr_ready;
  tile_byte_t rdr_data;
  logic       dec_valid, dec_last;
  logic [7:0] dec_data;

  // Whole bins are taken from memory at one byte per cycle, whatever their
  // payload, and parsed from the receive buffer at the decoder's pace.
  bin_rx_buffer #(.BIN_SIZE(BIN_SIZE)) u_rx (
    .clk, .rst_n,
    .in_valid(mr_valid), .in_ready(mr_ready), .in_data(mr_data), .in_bin_done(rx_bin_done),
    .out_valid(rx_valid), .out_ready(rx_ready), .out_data(rx_data)
  );

  bin_reader #(.BIN_SIZE(BIN_SIZE), .MAX_TILES(MAX_TILES)) u_bin_reader (
    .clk, .rst_n,
    .in_valid(rx_valid), .in_ready(rx_ready), .in_data(rx_data),
    .out_valid(rdr_valid), .out_ready(rdr_ready), .out_data(rdr_data),
    .hdr_err(ev.hdr_err), .ev_bin_done(ev.bin_read)
  );

  huff_decoder u_decompr (
    .clk, .rst_n,
    .cfg_cnt_we(dcnt_we), .cfg_len(cfg_addr[4:0]), .cfg_cnt(cfg_wdata[8:0]),
    .cfg_sym_we(dsym_we), .cfg_idx(cfg_addr[7:0]), .cfg_sym(cfg_wdata[7:0]),
    .tile_bytes(tile_len),
    .in_valid(rdr_valid), .in_ready(rdr_ready), .in_data(rdr_data),
    .out_valid(dec_valid), .out_ready(1'b1), .out_data(dec_data), .out_last(dec_last),
    .err(ev.decode_err)
  );

  assign glb_tile_done = dec_valid && dec_last;

  // decompressed tiles fill the global buffer in curve order
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) glb_wptr <= '0;
    else if (cfg_we && cfg_addr == CFG_GLB_PTR) glb_wptr <= GW'(cfg_wdata);
    else if (dec_valid) glb_wptr <= (32'(glb_wptr) == GLB_SIZE - 1) ? '0 : glb_wptr + 1'b1;
  end

  onchip_buffer #(.DEPTH(GLB_SIZE), .WIDTH(8)) u_glb (
    .clk, .we(dec_valid), .waddr(glb_wptr), .wdata(dec_data),
    .re(ce_glb_re), .raddr(ce_glb_raddr), .rdata(ce_glb_rdata)
  );


  // ------------------------------------------------------------ halo pixels
  halo_buffer #(.PW(8), .HALO(HALO), .TILE_H(TILE_H), .TILE_W(TILE_W), .TILE_C(TILE_C),
                .MAX_COLS(HALO_COLS)) u_halo (
    .clk, .rst_n,
    .start(rd_start), .n_cols(16'(rd_cfg.nw)), .tile_done(ce_halo_tile_done),
    .cur_row(ce_halo_row), .cur_col(ce_halo_col),
    .has_west(ce_halo_has_west), .has_north(ce_halo_has_north), .halo_ready(ce_halo_ready),
    .wr_valid(ce_halo_wr_valid), .wr_ready(ce_halo_wr_ready), .wr_edge(ce_halo_wr_edge),
    .wr_idx(ce_halo_wr_idx), .wr_data(ce_halo_wr_data),
    .rd_en(ce_halo_rd_en), .rd_edge(ce_halo_rd_edge), .rd_idx(ce_halo_rd_idx),
    .rd_data(ce_halo_rd_data),
    .spill_out_valid(hs_out_valid), .spill_out_ready(hs_out_ready), .spill_out_data(hs_out_data),
    .spill_in_valid(hs_in_valid), .spill_in_ready(hs_in_ready), .spill_in_data(hs_in_data)
  );

endmodule
