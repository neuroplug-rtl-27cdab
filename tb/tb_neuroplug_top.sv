// tb_neuroplug_top: end-to-end test of the secure data path at its default
// sizes (60 kB bins, 182 kB buffers, kappa = 8).
//
// The testbench plays the host, the compute engine and the memory:
//   1. it writes the key, the Huffman tables and the walkers' sizes;
//   2. as the compute engine it produces one layer of ofmap tiles of 12 kB
//      (sparse ones, which compress well, and dense ones, which do not) in
//      the order the ofmap walker hands out, and checks that order;
//   3. as the memory it stores each bin at the address the walker gives,
//      first with a slow memory side (5% ready: the compression buffer fills
//      up and holds the compute engine off), then
//      always ready (each bin must then take exactly BIN cycles);
//   4. it checks the memory image independently: bins back to back, every
//      Bin Table consistent, the payloads together equal the reference
//      Huffman encoding of the tiles, at least alpha bytes empty in bins
//      closed because they were full;
//   5. it feeds the bins back through the read path and checks every
//      decompressed tile in the global buffer against the original.
// It counts how often each mechanism happened (close on kappa, on a full
// bin, at layer end, a tile split across bins, input held off because all
// slots were full, input stalls at the compute-engine port, bins read back,
// halo pixels spilled to memory and refilled) and fails if one never did.
// Finally it walks a 3 x 16 tile layer through the halo buffer, which holds
// 14 columns on chip, checking every west and north halo pixel.
module tb_neuroplug_top;
  import neuroplug_pkg::*;
  import tb_huff_pkg::*;

  localparam int unsigned BIN   = BIN_BYTES;
  localparam int unsigned HDR   = BIN_HDR_BYTES;
  localparam int unsigned TILE  = 12 * 1024;
  localparam int unsigned NH = 2, NW = 3, NK = 4;
  localparam int unsigned NT = NH * NW * NK;
  localparam int unsigned ALPHA = 100;
  localparam int unsigned GW = $clog2(GLB_BYTES);
  localparam longint unsigned BASE = 64'h0_4000_0000;

  logic clk = 0, rst_n = 1;
  logic cfg_we = 0;
  logic [11:0] cfg_addr;
  logic [31:0] cfg_wdata;
  logic ce_ofm_valid = 0, ce_ofm_ready, ce_ofm_tile_last = 0, ce_ofm_layer_last = 0;
  logic [7:0] ce_ofm_data;
  logic ce_rd_tile_valid, ce_rd_tile_ready = 1, ce_rd_tile_layer2, ce_rd_tile_last;
  logic [11:0] ce_rd_tile_h, ce_rd_tile_w, ce_rd_tile_c, ce_rd_tile_k;
  logic ce_wr_tile_valid, ce_wr_tile_ready = 0, ce_wr_tile_last;
  logic [11:0] ce_wr_tile_h, ce_wr_tile_w, ce_wr_tile_k;
  logic ce_glb_re = 0;
  logic [GW-1:0] ce_glb_raddr = '0, glb_wptr;
  logic [7:0] ce_glb_rdata;
  logic glb_tile_done, rd_walk_done, wr_walk_done;
  logic mw_valid, mw_ready = 0, mw_bin_first, mw_bin_last;
  logic [7:0] mw_data;
  logic [39:0] mw_addr, mr_addr;
  logic mr_valid = 0, mr_ready;
  logic [7:0] mr_data;
  np_events_t ev;
  int checks = 0, failures = 0;
  // halo buffer ports (default sizes: 2-pixel halo, 16x16x16 tiles, 14 columns)
  localparam int HALO_EDGE = 2 * 16 * 16, HALO_COLS = 14, HEW = $clog2(HALO_EDGE);
  logic ce_halo_tile_done = 0, ce_halo_has_west, ce_halo_has_north, ce_halo_ready;
  logic [15:0] ce_halo_row, ce_halo_col;
  logic ce_halo_wr_valid = 0, ce_halo_wr_ready, ce_halo_wr_edge = 0;
  logic [HEW-1:0] ce_halo_wr_idx = '0, ce_halo_rd_idx = '0;
  logic [7:0] ce_halo_wr_data = '0, ce_halo_rd_data;
  logic ce_halo_rd_en = 0, ce_halo_rd_edge = 0;
  logic hs_out_valid, hs_out_ready = 0, hs_in_valid = 0, hs_in_ready;
  logic [7:0] hs_out_data, hs_in_data = '0;

  neuroplug_top dut (.*);
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // a falling edge, so that the asynchronous reset acts at once

  initial begin
    repeat (4_000_000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfg(input logic [11:0] a, input logic [31:0] d);
    @(negedge clk) cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk) cfg_we = 0;
  endtask

  // ------------------------------------------------------------ mechanism counts
  int n_kappa = 0, n_full = 0, n_layer = 0, n_split = 0, n_slots = 0, n_closed = 0;
  int n_rd_fixed = 0, rd_stalls = 0;
  int n_read = 0, n_hdr_err = 0, n_dec_err = 0, n_ce_stall = 0;
  always @(negedge clk) begin
    n_kappa   += int'(ev.close_kappa);
    n_full    += int'(ev.close_full);
    n_layer   += int'(ev.close_layer);
    n_split   += int'(ev.split_tile);
    n_slots   += int'(ev.slots_full);
    n_closed  += int'(ev.bin_closed);
    n_read    += int'(ev.bin_read);
    n_hdr_err += int'(ev.hdr_err);
    n_dec_err += int'(ev.decode_err);
    n_ce_stall += int'(ce_ofm_valid && !ce_ofm_ready);
  end

  // ------------------------------------------------------------ memory model
  byte unsigned dram [longint unsigned];
  int mem_ready_pct = 5;
  int bins_written = 0, bin_pos = 0, bin_cycles = 0, timed_bins = 0;
  bit bin_stalled = 0, addr_moved = 0;
  longint unsigned cur_bin_addr;
  initial begin
    forever begin
      @(negedge clk);
      mw_ready = ($urandom_range(99) < mem_ready_pct);
      #1;
      if (bin_pos != 0) begin
        bin_cycles++;
        if (!(mw_valid && mw_ready)) bin_stalled = 1;
      end
      if (mw_valid && mw_ready) begin
        if (bin_pos == 0) begin
          cur_bin_addr = mw_addr;
          bin_cycles = 0; bin_stalled = 0;
          checks++;
          if (!mw_bin_first || longint'(mw_addr) != BASE + longint'(bins_written) * BIN) begin
            failures++; $display("bin %0d at %h, first %0b", bins_written, mw_addr, mw_bin_first);
          end
        end
        else if (mw_addr != cur_bin_addr) addr_moved = 1;   // address must hold for the whole bin
        dram[cur_bin_addr + bin_pos] = mw_data;
        bin_pos++;
        if (bin_pos == BIN) begin
          checks++;
          if (!mw_bin_last) failures++;
          checks++;
          if (addr_moved) begin failures++; $display("bin %0d: address changed within the bin", bins_written); end
          addr_moved = 0;
          if (!bin_stalled) begin
            timed_bins++;
            checks++;
            if (bin_cycles != BIN - 1) begin failures++; $display("bin took %0d cycles", bin_cycles + 1); end
          end
          bin_pos = 0;
          bins_written++;
        end
      end
    end
  end

  // ------------------------------------------------------------ halo spill memory
  logic [7:0] halo_q[$];
  int n_halo_spill = 0, n_halo_refill = 0;
  initial forever begin
    @(negedge clk);
    hs_out_ready = $urandom_range(99) < 80;
    hs_in_valid  = halo_q.size() != 0 && $urandom_range(99) < 80;
    if (halo_q.size() != 0) hs_in_data = halo_q[0];
    #1;
    if (hs_in_valid && hs_in_ready) begin void'(halo_q.pop_front()); n_halo_refill++; end
    if (hs_out_valid && hs_out_ready) begin halo_q.push_back(hs_out_data); n_halo_spill++; end
  end

  // Edge pixel i of tile (r, c); east edge e = 0, south edge e = 1.
  function automatic logic [7:0] halo_px(input int r, input int c, input int e, input int i);
    return 8'((r * 131 + c * 31 + i * 7 + e * 89) ^ (i >> 3));
  endfunction

  task automatic halo_write(input bit e, input int i, input logic [7:0] d);
    bit hs;
    ce_halo_wr_valid = 1; ce_halo_wr_edge = e; ce_halo_wr_idx = HEW'(i); ce_halo_wr_data = d;
    forever begin
      #1 hs = ce_halo_wr_ready;
      @(negedge clk);
      if (hs) break;
    end
    ce_halo_wr_valid = 0;
  endtask

  // One layer of nr x nc tiles through the halo buffer: every tile reads
  // its west and north halos and checks them, then writes its own edges.
  task automatic halo_layer(input int nr, input int nc);
    for (int r = 0; r < nr; r++)
      for (int c = 0; c < nc; c++) begin
        int guard = 0;
        forever begin
          bit hr;
          #1 hr = ce_halo_ready;
          @(negedge clk);
          if (hr || guard++ > 100000) break;
        end
        checks++;
        if (ce_halo_row != 16'(r) || ce_halo_col != 16'(c) ||
            ce_halo_has_west != (c != 0) || ce_halo_has_north != (r != 0)) begin
          failures++; $display("halo position %0d,%0d", ce_halo_row, ce_halo_col);
        end
        for (int e = 0; e < 2; e++) begin
          if ((e == 0 && c == 0) || (e == 1 && r == 0)) continue;
          for (int i = 0; i < HALO_EDGE; i++) begin
            ce_halo_rd_en = 1; ce_halo_rd_edge = e[0]; ce_halo_rd_idx = HEW'(i);
            @(negedge clk) ce_halo_rd_en = 0;
            checks++;
            if (ce_halo_rd_data != (e == 0 ? halo_px(r, c - 1, 0, i) : halo_px(r - 1, c, 1, i))) begin
              failures++;
              if (failures < 10) $display("halo %0d,%0d edge %0d px %0d", r, c, e, i);
            end
          end
        end
        for (int i = 0; i < HALO_EDGE; i++) halo_write(0, i, halo_px(r, c, 0, i));
        for (int i = 0; i < HALO_EDGE; i++) halo_write(1, i, halo_px(r, c, 1, i));
        @(negedge clk) ce_halo_tile_done = 1;
        @(negedge clk) ce_halo_tile_done = 0;
      end
  endtask

  // ------------------------------------------------------------ tiles
  bytes_q_t tiles [NT];
  lens_t lens;
  codes_t codes;

  task automatic send_tile(input int t);
    foreach (tiles[t][i]) begin
      ce_ofm_valid = 1; ce_ofm_data = tiles[t][i];
      ce_ofm_tile_last  = (i == TILE - 1);
      ce_ofm_layer_last = (i == TILE - 1) && (t == NT - 1);
      forever begin
        bit hs;
        #1 hs = ce_ofm_ready;
        @(negedge clk);
        if (hs) break;
      end
    end
    ce_ofm_valid = 0; ce_ofm_tile_last = 0; ce_ofm_layer_last = 0;
  endtask

  // ------------------------------------------------------------ read-back check
  int tiles_checked = 0;
  initial begin
    forever begin
      @(negedge clk);
      #2;
      if (glb_tile_done) begin
        int t;
        int unsigned start;
        t = tiles_checked;
        start = (t * TILE) % GLB_BYTES;
        // read the tile through the compute engine's port
        for (int unsigned i = 0; i <= TILE; i++) begin
          @(negedge clk);
          if (i > 0) begin
            checks++;
            if (ce_glb_rdata != tiles[t][i-1]) begin
              failures++;
              if (failures < 10) $display("tile %0d byte %0d: got %h exp %h", t, i - 1, ce_glb_rdata, tiles[t][i-1]);
            end
          end
          if (i < TILE) begin
            ce_glb_re = 1; ce_glb_raddr = GW'((start + i) % GLB_BYTES);
          end else ce_glb_re = 0;
        end
        tiles_checked++;
      end
    end
  end

  // ------------------------------------------------------------ main
  initial begin
    int t;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // key
    cfg(CFG_ALPHA, ALPHA);
    cfg(CFG_RANGE, 8000);
    cfg(CFG_SIGMA, 6000);
    cfg(CFG_SEED, 32'h5EED_1234);
    cfg(CFG_TILE_LEN, TILE);
    // Huffman tables
    lens = sparse_lens();
    codes = canon(lens);
    for (int s = 0; s < 256; s++) cfg({CFG_PAGE_ENC, 8'(s)}, {11'b0, 5'(lens[s]), 16'(codes[s])});
    for (int l = 1; l <= 16; l++) cfg({CFG_PAGE_DCNT, 8'(l)}, count_len(lens, l));
    begin
      bytes_q_t ss;
      ss = sorted_syms(lens);
      foreach (ss[i]) cfg({CFG_PAGE_DSYM, 8'(i)}, 32'(ss[i]));
    end
    // tiles: the first twelve sparse, then dense ones
    for (int i = 0; i < NT; i++) tiles[i] = random_tile(TILE, (i < 12) ? 92 : ((i % 3 == 0) ? 60 : 5));
    // ofmap walker
    cfg({CFG_WR_WALK[11:4], WK_MODE}, SFC_OFMAP);
    cfg({CFG_WR_WALK[11:4], WK_NH}, NH);
    cfg({CFG_WR_WALK[11:4], WK_NW}, NW);
    cfg({CFG_WR_WALK[11:4], WK_NK}, NK);
    cfg({CFG_WR_WALK[11:4], WK_BASE_LO}, BASE[31:0]);
    cfg({CFG_WR_WALK[11:4], WK_BASE_HI}, BASE[63:32]);
    cfg({CFG_WR_WALK[11:4], WK_START}, 1);
    @(negedge clk);
    // compute engine: tiles in walker order
    t = 0;
    for (int h = 0; h < NH; h++)
      for (int w = 0; w < NW; w++)
        for (int k = 0; k < NK; k++) begin
          checks++;
          if (!ce_wr_tile_valid || ce_wr_tile_h != 12'(h) || ce_wr_tile_w != 12'(w) || ce_wr_tile_k != 12'(k) ||
              ce_wr_tile_last != (t == NT - 1)) begin
            failures++; $display("ofmap walk: got h%0d w%0d k%0d exp h%0d w%0d k%0d", ce_wr_tile_h, ce_wr_tile_w, ce_wr_tile_k, h, w, k);
          end
          ce_wr_tile_ready = 1;
          @(negedge clk) ce_wr_tile_ready = 0;
          if (t == 20) mem_ready_pct = 100;   // memory side speeds up
          send_tile(t);
          t++;
        end
    // wait for every bin to leave
    wait (n_layer >= 1);
    repeat (4 * BIN) @(negedge clk);
    wait (bin_pos == 0);
    checks++;
    if (bins_written != n_closed) begin failures++; $display("bins written %0d closed %0d", bins_written, n_closed); end
    check_image();
    // ---- read the layer back as the next layer's ifmap
    cfg(CFG_GLB_PTR, 0);
    cfg({CFG_RD_WALK[11:4], WK_MODE}, SFC_IFMAP);
    cfg({CFG_RD_WALK[11:4], WK_NH}, NH);
    cfg({CFG_RD_WALK[11:4], WK_NW}, NW);
    cfg({CFG_RD_WALK[11:4], WK_NC}, NK);
    cfg({CFG_RD_WALK[11:4], WK_BASE_LO}, BASE[31:0]);
    cfg({CFG_RD_WALK[11:4], WK_BASE_HI}, BASE[63:32]);
    cfg({CFG_RD_WALK[11:4], WK_START}, 1);
    @(negedge clk);
    for (int b = 0; b < bins_written; b++) begin
      wait (n_read == b);
      repeat (2) @(negedge clk);
      checks++;
      if (longint'(mr_addr) != BASE + longint'(b) * BIN) begin failures++; $display("read bin %0d at %h", b, mr_addr); end
      rd_stalls = 0;
      for (int unsigned i = 0; i < BIN; i++) begin
        mr_valid = 1; mr_data = dram[BASE + longint'(b) * BIN + i];
        forever begin
          bit hs;
          #1 hs = mr_ready;
          @(negedge clk);
          if (hs) break;
          if (i > 0) rd_stalls++;
        end
      end
      mr_valid = 0;
      // once started, a bin is read in exactly BIN cycles
      checks++;
      if (rd_stalls != 0) begin failures++; $display("bin %0d read stalled %0d cycles", b, rd_stalls); end
      else n_rd_fixed++;
    end
    wait (tiles_checked == NT);
    repeat (5) @(negedge clk);
    // ---- halo pixels of a layer wider than the halo buffer holds
    cfg({CFG_RD_WALK[11:4], WK_NW}, HALO_COLS + 2);
    cfg({CFG_RD_WALK[11:4], WK_START}, 1);
    halo_layer(3, HALO_COLS + 2);
    $display("halo: %0d bytes spilled, %0d refilled", n_halo_spill, n_halo_refill);
    checks++;
    if (n_halo_spill != 3 * 2 * HALO_EDGE || n_halo_refill != 2 * 2 * HALO_EDGE) begin
      failures++; $display("halo spill counts wrong");
    end
    $display("bins %0d: kappa %0d full %0d layer %0d split %0d slots_full %0d ce_stall %0d read %0d timed %0d",
             n_closed, n_kappa, n_full, n_layer, n_split, n_slots, n_ce_stall, n_read, timed_bins);
    checks++; if (n_kappa == 0)    begin failures++; $display("no kappa close"); end
    checks++; if (n_full == 0)     begin failures++; $display("no full close"); end
    checks++; if (n_layer != 1)    begin failures++; $display("layer closes %0d", n_layer); end
    checks++; if (n_split == 0)    begin failures++; $display("no split tile"); end
    checks++; if (n_slots == 0)    begin failures++; $display("slots never full"); end
    checks++; if (n_ce_stall == 0) begin failures++; $display("no input stall"); end
    checks++; if (n_read != bins_written) begin failures++; $display("bins read %0d", n_read); end
    checks++; if (timed_bins == 0) begin failures++; $display("no bin timed"); end
    checks++; if (n_rd_fixed != bins_written) begin failures++; $display("fixed-time bin reads %0d", n_rd_fixed); end
    checks++; if (n_hdr_err != 0 || n_dec_err != 0) begin failures++; $display("errors %0d %0d", n_hdr_err, n_dec_err); end
    checks++; if (tiles_checked != NT) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ memory image
  task automatic check_image();
    bytes_q_t exp_stream, got_stream;
    int exp_firsts[$], got_firsts[$];
    foreach (tiles[t]) begin
      bytes_q_t c = encode(lens, codes, tiles[t]);
      exp_firsts.push_back(exp_stream.size());
      foreach (c[i]) exp_stream.push_back(c[i]);
    end
    for (int b = 0; b < bins_written; b++) begin
      longint unsigned a = BASE + longint'(b) * BIN;
      int unsigned nt, pend;
      nt   = {dram[a + 1], dram[a]};
      pend = {dram[a + 3], dram[a + 2]};
      checks++;
      if (nt > KAPPA || pend < HDR || pend > BIN) begin failures++; $display("bin %0d table: %0d tiles, end %0d", b, nt, pend); end
      for (int i = 0; i < nt; i++) got_firsts.push_back(got_stream.size() + int'({dram[a + 5 + 2*i], dram[a + 4 + 2*i]}) - int'(HDR));
      for (int unsigned i = HDR; i < pend && i < BIN; i++) got_stream.push_back(dram[a + i]);
    end
    checks++;
    if (got_stream.size() != exp_stream.size()) begin failures++; $display("payload %0d bytes, expected %0d", got_stream.size(), exp_stream.size()); end
    for (int i = 0; i < got_stream.size() && i < exp_stream.size(); i++)
      if (got_stream[i] != exp_stream[i]) begin
        checks++; failures++;
        if (failures < 10) $display("payload byte %0d differs", i);
      end
    checks++;
    if (got_firsts != exp_firsts) begin failures++; $display("tile starts differ (%0d vs %0d)", got_firsts.size(), exp_firsts.size()); end
    $display("raw %0d bytes, compressed %0d bytes, %0d bins of %0d bytes", NT * TILE, exp_stream.size(), bins_written, BIN);
  endtask
endmodule
