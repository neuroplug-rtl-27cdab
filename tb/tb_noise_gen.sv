// tb_noise_gen: checks the bin-padding noise generator against a behavioural
// reference of the same distribution (LFSRs, uniform sigma, Irwin-Hall draw,
// clamp to [0, R], offset alpha), checks that every sample lies in
// [alpha, alpha + R], that the one-cycle latency holds, that two seeds give
// different sequences and that sigma_max = 0 removes the spread.
module tb_noise_gen;
  import neuroplug_pkg::*;

  logic clk = 0, rst_n = 1;
  noise_key_t key;
  logic seed_load = 0, req = 0, valid;
  logic [15:0] noise;
  int checks = 0, failures = 0;

  noise_gen dut (.*);
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // a falling edge, so that the asynchronous reset acts at once

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference model
  logic [31:0] ra, rb, rc;
  function automatic logic [31:0] nxt(input logic [31:0] s);
    return s[0] ? ((s >> 1) ^ 32'h8020_0003) : (s >> 1);
  endfunction
  function automatic int ref_sample();
    longint sig, zz, d, np;
    sig = (longint'(ra[15:0]) * longint'(key.sigma_max)) / 65536;
    zz  = longint'(rb[11:0]) + longint'(rb[27:16]) + longint'(rc[11:0]) + longint'(rc[27:16]) - 8192;
    d   = sig * zz;
    d   = (d >= 0) ? d / 4096 : -((-d + 4095) / 4096);   // floor division
    np  = longint'(key.range_r / 2) + d;
    if (np < 0) np = 0;
    if (np > longint'(key.range_r)) np = key.range_r;
    ra = nxt(ra); rb = nxt(rb); rc = nxt(rc);
    return int'(longint'(key.alpha) + np);
  endfunction

  task automatic load(input logic [31:0] s);
    key.seed = s;
    @(negedge clk) seed_load = 1;
    @(negedge clk) seed_load = 0;
    ra = (s == 0) ? 1 : s;
    rb = ((s ^ 32'h9E37_79B9) == 0) ? 1 : (s ^ 32'h9E37_79B9);
    rc = ((s ^ 32'h7F4A_7C15) == 0) ? 1 : (s ^ 32'h7F4A_7C15);
  endtask

  int exp_v, minv, maxv;
  int seq1[16];
  bit differs;
  initial begin
    key = '{alpha: 16'd100, range_r: 16'd8000, sigma_max: 16'd8000, seed: 32'h1234_5678};
    repeat (3) @(negedge clk);
    rst_n = 1;
    load(32'h1234_5678);
    minv = 1 << 30; maxv = 0;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk) req = 1;
      exp_v = ref_sample();
      @(negedge clk) req = 0;
      checks++;
      if (!valid || int'(noise) != exp_v) begin
        failures++;
        if (failures < 10) $display("sample %0d: got %0d valid %0b exp %0d", i, noise, valid, exp_v);
      end
      checks++;
      if (noise < key.alpha || noise > key.alpha + key.range_r) failures++;
      if (int'(noise) < minv) minv = noise;
      if (int'(noise) > maxv) maxv = noise;
      if (i < 16) seq1[i] = noise;
      // no new sample without a request
      checks++;
      @(negedge clk);
      if (valid) failures++;
    end
    // the spread must actually be used
    checks++;
    if (maxv - minv < 2000) begin failures++; $display("spread too small %0d..%0d", minv, maxv); end
    // a different seed gives a different sequence
    load(32'hCAFE_F00D);
    differs = 0;
    for (int i = 0; i < 16; i++) begin
      @(negedge clk) req = 1;
      exp_v = ref_sample();
      @(negedge clk) req = 0;
      checks++;
      if (int'(noise) != exp_v) failures++;
      if (int'(noise) != seq1[i]) differs = 1;
    end
    checks++;
    if (!differs) failures++;
    // sigma_max = 0: N' is always R/2
    key.sigma_max = 0; key.alpha = 16'd7; key.range_r = 16'd1000;
    for (int i = 0; i < 20; i++) begin
      @(negedge clk) req = 1;
      exp_v = ref_sample();
      @(negedge clk) req = 0;
      checks++;
      if (noise != 16'd507 || int'(noise) != exp_v) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
