// tb_sfc_addr_gen: for each walk (ifmap deep tiles, filters with repeats,
// ofmaps, fused filters) and random sizes, compares every coordinate the
// generator hands out, with random stalls, against nested loops written
// here from the curve's definition; checks last/done, the one-element-per-
// cycle rate without stalls, and the bin address stepping.
module tb_sfc_addr_gen;
  import neuroplug_pkg::*;
  localparam int DW = 12, AW = 40, BIN = 61440;

  logic clk = 0, rst_n = 1, start = 0;
  sfc_mode_e mode;
  logic [DW-1:0] n_h, n_w, n_c, n_k, n_k2, n_rep;
  logic [AW-1:0] base;
  logic out_valid, out_ready = 0, out_layer2, out_last, done, bin_step = 0;
  logic [DW-1:0] out_h, out_w, out_c, out_k;
  logic [AW-1:0] bin_addr;
  int checks = 0, failures = 0;

  sfc_addr_gen dut (.*);
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // a falling edge, so that the asynchronous reset acts at once

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { int h, w, c, k, l2; } co_t;
  co_t expq[$];

  function automatic void build(input sfc_mode_e m, input int nh, nw, nc, nk, nk2, nrep);
    expq.delete();
    case (m)
      SFC_IFMAP:  for (int h = 0; h < nh; h++) for (int w = 0; w < nw; w++) for (int c = 0; c < nc; c++)
                    expq.push_back('{h, w, c, 0, 0});
      SFC_OFMAP:  for (int h = 0; h < nh; h++) for (int w = 0; w < nw; w++) for (int k = 0; k < nk; k++)
                    expq.push_back('{h, w, 0, k, 0});
      SFC_FILTER: for (int r = 0; r < nrep; r++) for (int k = 0; k < nk; k++) for (int c = 0; c < nc; c++)
                    expq.push_back('{0, 0, c, k, 0});
      SFC_FUSED:  for (int r = 0; r < nrep; r++) begin
                    for (int k = 0; k < nk; k++) for (int c = 0; c < nc; c++) expq.push_back('{0, 0, c, k, 0});
                    for (int k = 0; k < nk2; k++) for (int c = 0; c < nk; c++) expq.push_back('{0, 0, c, k, 1});
                  end
    endcase
  endfunction

  task automatic run(input sfc_mode_e m, input int nh, nw, nc, nk, nk2, nrep, input int stall);
    int n, cyc, ndone;
    co_t e;
    build(m, nh, nw, nc, nk, nk2, nrep);
    n = expq.size();
    @(negedge clk);
    mode = m; n_h = DW'(nh); n_w = DW'(nw); n_c = DW'(nc); n_k = DW'(nk); n_k2 = DW'(nk2); n_rep = DW'(nrep);
    base = AW'(64'h1_0000_0000) + AW'($urandom_range(1000) * 4096);
    start = 1;
    @(negedge clk) start = 0;
    cyc = 0; ndone = 0;
    while (expq.size() != 0 && cyc < 100000) begin
      out_ready = ($urandom_range(99) >= stall);
      #1;
      if (done) ndone++;
      if (out_valid && out_ready) begin
        e = expq.pop_front();
        checks++;
        if (int'(out_h) != e.h || int'(out_w) != e.w || int'(out_c) != e.c || int'(out_k) != e.k ||
            int'(out_layer2) != e.l2 || out_last != (expq.size() == 0)) begin
          failures++;
          if (failures < 8) $display("mode %0d elem %0d: got h%0d w%0d c%0d k%0d l%0d last%0b exp h%0d w%0d c%0d k%0d l%0d",
              m, n - expq.size() - 1, out_h, out_w, out_c, out_k, out_layer2, out_last, e.h, e.w, e.c, e.k, e.l2);
        end
      end
      @(negedge clk);
      cyc++;
    end
    out_ready = 0;
    #1 if (done) ndone++;
    @(negedge clk);
    checks++;
    if (ndone != 1 || out_valid) begin failures++; $display("mode %0d: done %0d valid %0b", m, ndone, out_valid); end
    if (stall == 0) begin
      checks++;
      if (cyc != n) begin failures++; $display("rate: %0d cycles for %0d", cyc, n); end
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(SFC_IFMAP, 3, 4, 5, 1, 1, 1, 0);
    run(SFC_OFMAP, 2, 3, 1, 6, 1, 1, 30);
    run(SFC_FILTER, 1, 1, 3, 4, 1, 3, 30);
    run(SFC_FUSED, 1, 1, 2, 3, 4, 2, 20);
    for (int i = 0; i < 12; i++)
      run(sfc_mode_e'(i % 4), $urandom_range(5, 1), $urandom_range(5, 1), $urandom_range(6, 1),
          $urandom_range(6, 1), $urandom_range(4, 1), $urandom_range(3, 1), (i % 3) * 25);
    // bin addresses
    begin
      logic [AW-1:0] b0;
      b0 = bin_addr;
      for (int i = 1; i <= 5; i++) begin
        @(negedge clk) bin_step = 1;
        @(negedge clk) bin_step = 0;
        checks++;
        if (bin_addr != b0 + AW'(i * BIN)) begin failures++; $display("bin addr %h", bin_addr); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
