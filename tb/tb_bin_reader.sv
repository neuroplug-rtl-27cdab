// tb_bin_reader: builds a stream of bins in the testbench from random tiles
// (Bin Table, tiles split across bins, at most KAPPA tiles per bin, random empty space
// filled with random bytes), streams them into the bin reader with random
// gaps and output stalls, and checks that exactly the tile bytes come out, in
// order, with tile_first on each tile's first byte. A bin with a corrupt
// table must raise hdr_err.
module tb_bin_reader;
  import neuroplug_pkg::*;

  localparam int unsigned BIN = 200;
  localparam int unsigned K   = 3;
  localparam int unsigned HDR = 4 + 2 * K;

  logic clk = 0, rst_n = 1;
  logic in_valid = 0, in_ready;
  logic [7:0] in_data;
  logic out_valid, out_ready = 0, hdr_err, ev_bin_done;
  tile_byte_t out_data;
  int checks = 0, failures = 0;

  bin_reader #(.BIN_SIZE(BIN), .MAX_TILES(K)) dut (.*);
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // a falling edge, so that the asynchronous reset acts at once

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { byte unsigned d; bit first; } tb_t;
  tb_t src[$];
  tb_t expq[$];
  byte unsigned bin_stream[$];
  int nbins = 0;

  // pack src into bin_stream (reference format)
  function automatic void pack();
    int pos = 0;
    while (pos < src.size()) begin
      byte unsigned bin[BIN];
      int unsigned offs[K];
      int unsigned nz, cap, p, nt;
      nz = $urandom_range(BIN - HDR - 1, 0);
      if ($urandom_range(1)) nz = $urandom_range(20);
      cap = BIN - nz; p = HDR; nt = 0;
      foreach (bin[i]) bin[i] = byte'($urandom);
      while (pos < src.size()) begin
        if (src[pos].first && nt == K) break;
        if (src[pos].first) begin offs[nt] = p; nt++; end
        bin[p] = src[pos].d; p++; pos++;
        if (p == cap) break;
      end
      bin[0] = 8'(nt); bin[1] = 0; bin[2] = 8'(p); bin[3] = 8'(p >> 8);
      for (int i = 0; i < K; i++) begin
        bin[4 + 2*i] = (i < nt) ? 8'(offs[i]) : 0;
        bin[5 + 2*i] = (i < nt) ? 8'(offs[i] >> 8) : 0;
      end
      foreach (bin[i]) bin_stream.push_back(bin[i]);
      nbins++;
    end
  endfunction

  int got = 0, errs = 0, done = 0;
  initial begin
    forever begin
      @(negedge clk);
      out_ready = ($urandom_range(99) >= 30);
      #1;
      if (hdr_err) errs++;
      if (ev_bin_done) done++;
      if (out_valid && out_ready) begin
        tb_t e;
        checks++;
        if (expq.size() == 0) begin failures++; $display("unexpected byte"); end
        else begin
          e = expq.pop_front();
          if (out_data.data != e.d || out_data.tile_first != e.first) begin
            failures++;
            if (failures < 8) $display("byte %0d: got %h/%0b exp %h/%0b", got, out_data.data, out_data.tile_first, e.d, e.first);
          end
        end
        got++;
      end
    end
  end

  task automatic feed(input byte unsigned b);
    while ($urandom_range(99) < 20) @(negedge clk);
    in_valid = 1; in_data = b;
    forever begin
      bit hs;
      #2 hs = in_ready;
      @(negedge clk);
      if (hs) break;
    end
    in_valid = 0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int t = 0; t < 80; t++) begin
      int len;
      len = (t % 5 == 0) ? $urandom_range(400, 150) : $urandom_range(40, 1);
      for (int i = 0; i < len; i++) src.push_back('{d: byte'($urandom), first: (i == 0)});
    end
    foreach (src[i]) expq.push_back(src[i]);
    pack();
    foreach (bin_stream[i]) feed(bin_stream[i]);
    repeat (10) @(negedge clk);
    checks++;
    if (expq.size() != 0 || got != src.size()) begin failures++; $display("left %0d got %0d of %0d", expq.size(), got, src.size()); end
    checks++;
    if (errs != 0 || done != nbins) begin failures++; $display("errs %0d bin_stream %0d/%0d", errs, done, nbins); end
    // corrupt table: more tiles than MAX_TILES
    feed(8'(K + 1));
    for (int i = 1; i < BIN; i++) feed(i == 2 ? 8'(HDR) : 8'h00);
    repeat (3) @(negedge clk);
    checks++;
    if (errs == 0) begin failures++; $display("hdr_err not raised (%0d)", errs); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
