// tb_bin_packer: drives random compressed tiles into the binning logic (small
// bins so that many of them are made), answers its noise requests with
// random values, and compares every output byte with bins built by a
// reference packer written here from the rules: fixed bin size, Bin Table at
// the start, tiles split across bins, at most KAPPA tiles starting per bin,
// the last N bytes empty. It also checks that a bin leaves in BIN_SIZE
// consecutive cycles when the output is always ready, and that each of the
// mechanisms (close on kappa, on a full bin, at layer end, split tile,
// input stall on full slots) happened.
module tb_bin_packer;
  import neuroplug_pkg::*;

  localparam int unsigned BIN = 256;
  localparam int unsigned K   = 4;
  localparam int unsigned CB  = 3 * BIN + 17;
  localparam int unsigned HDR = 4 + 2 * K;

  logic clk = 0, rst_n = 1;
  logic in_valid = 0, in_ready, in_layer_last = 0;
  tile_byte_t in_data;
  logic noise_req, noise_valid = 0;
  logic [15:0] noise;
  logic out_valid, out_ready = 0, out_bin_first, out_bin_last;
  logic [7:0] out_data;
  logic ev_bin_closed, ev_close_kappa, ev_close_full, ev_close_layer, ev_split, ev_slots_full;
  int checks = 0, failures = 0;
  int stall_pct = 0;

  bin_packer #(.BIN_SIZE(BIN), .MAX_TILES(K), .CBUF_SIZE(CB)) dut (.*);
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // a falling edge, so that the asynchronous reset acts at once

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- noise responder: random value one to three cycles after a request
  int unsigned noise_log[$];
  initial begin
    forever begin
      @(negedge clk);
      #1;
      if (noise_req && rst_n) begin
        int unsigned n;
        n = ($urandom_range(3) == 0) ? $urandom_range(400) : $urandom_range(60);
        repeat ($urandom_range(2)) @(negedge clk);
        @(negedge clk) noise_valid = 1; noise = 16'(n);
        noise_log.push_back(n);
        @(negedge clk) noise_valid = 0;
      end
    end
  end

  // ---- stimulus record: bytes with tile_first / layer_last
  typedef struct { byte unsigned d; bit first; bit last; } ib_t;
  ib_t stream[$];

  // ---- reference packer
  byte unsigned exp_bytes[$];
  int exp_bins = 0;
  function automatic void ref_pack();
    int pos = 0, nb = 0;
    while (pos < stream.size()) begin
      int unsigned nz, cap, p, nt;
      int unsigned offs[K];
      byte unsigned bin[BIN];
      nz  = noise_log[nb];
      if (nz > BIN - HDR - 1) nz = BIN - HDR - 1;
      cap = BIN - nz;
      p = HDR; nt = 0;
      foreach (bin[i]) bin[i] = 0;
      while (1) begin
        if (stream[pos].first && nt == K) break;
        if (stream[pos].first) begin offs[nt] = p; nt++; end
        bin[p] = stream[pos].d;
        p++;
        pos++;
        if (stream[pos-1].last || p == cap) break;
      end
      bin[0] = 8'(nt); bin[1] = 0; bin[2] = 8'(p); bin[3] = 8'(p >> 8);
      for (int i = 0; i < K; i++) begin
        bin[4 + 2*i] = (i < nt) ? 8'(offs[i]) : 0;
        bin[5 + 2*i] = (i < nt) ? 8'(offs[i] >> 8) : 0;
      end
      foreach (bin[i]) exp_bytes.push_back(bin[i]);
      nb++;
    end
    exp_bins = nb;
  endfunction

  // ---- output capture
  byte unsigned got_bytes[$];
  int gaps_in_bin = 0, ctr_first = 0, ctr_last = 0;
  bit in_bin = 0;
  initial begin
    forever begin
      @(negedge clk);
      out_ready = ($urandom_range(99) >= stall_pct);
      if (in_bin && !(out_valid && out_ready)) gaps_in_bin++;
      if (out_valid && out_ready) begin
        got_bytes.push_back(out_data);
        if (out_bin_first != (got_bytes.size() % BIN == 1)) ctr_first++;
        if (out_bin_last != (got_bytes.size() % BIN == 0)) ctr_last++;
        if (out_bin_first) in_bin = 1;
        if (out_bin_last) in_bin = 0;
      end
    end
  end

  int n_kappa = 0, n_full = 0, n_layer = 0, n_split = 0, n_slots = 0, n_closed = 0;
  always @(negedge clk) begin
    n_kappa  += int'(ev_close_kappa);
    n_full   += int'(ev_close_full);
    n_layer  += int'(ev_close_layer);
    n_split  += int'(ev_split);
    n_slots  += int'(ev_slots_full);
    n_closed += int'(ev_bin_closed);
  end

  task automatic send(input ib_t b);
    stream.push_back(b);
    in_valid = 1; in_data = '{tile_first: b.first, data: b.d}; in_layer_last = b.last;
    forever begin
      bit hs;
      #1 hs = in_ready;
      @(negedge clk);
      if (hs) break;
    end
    in_valid = 0; in_layer_last = 0;
  endtask

  task automatic layer(input int ntiles, input int maxlen);
    for (int t = 0; t < ntiles; t++) begin
      int len;
      len = $urandom_range(maxlen, 1);
      for (int i = 0; i < len; i++)
        send('{d: byte'($urandom_range(255, 1)), first: (i == 0), last: (t == ntiles - 1 && i == len - 1)});
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // layer 1: out stalls, mixed tile sizes (small tiles -> kappa closes)
    stall_pct = 60;
    layer(60, 120);
    // layer 2: many tiny tiles
    layer(40, 6);
    // layer 3: big tiles, output always ready, timing check
    stall_pct = 0;
    layer(20, 400);
    repeat (3 * BIN + 50) @(negedge clk);
    ref_pack();
    checks++;
    if (got_bytes.size() != exp_bytes.size()) begin
      failures++;
      $display("bytes out %0d expected %0d", got_bytes.size(), exp_bytes.size());
    end
    for (int i = 0; i < exp_bytes.size() && i < got_bytes.size(); i++) begin
      checks++;
      if (got_bytes[i] != exp_bytes[i]) begin
        failures++;
        if (failures < 8) $display("bin %0d byte %0d: got %h exp %h", i / BIN, i % BIN, got_bytes[i], exp_bytes[i]);
      end
    end
    checks++; if (ctr_first + ctr_last != 0) begin failures++; $display("bin marks wrong %0d %0d", ctr_first, ctr_last); end
    checks++; if (n_closed != exp_bins) begin failures++; $display("closed %0d exp %0d", n_closed, exp_bins); end
    $display("events: kappa %0d full %0d layer %0d split %0d slots_full %0d", n_kappa, n_full, n_layer, n_split, n_slots);
    checks++; if (n_kappa == 0) failures++;
    checks++; if (n_full == 0) failures++;
    checks++; if (n_layer != 3) failures++;
    checks++; if (n_split == 0) failures++;
    checks++; if (n_slots == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // fixed bin time: once the output is always ready, no bubble inside a bin
  always @(negedge clk) if (stall_pct == 0 && in_bin && out_valid == 0) begin
    checks++; failures++; $display("bubble inside a bin at %0t", $time);
  end
endmodule
