// tb_bin_rx_buffer: sends a series of random bins (small bin size) into the
// receive buffer with random gaps between bins, drains it with random output
// stalls, and checks that the bytes come out unchanged and in order, that
// in_ready never drops in the middle of a bin (so a bin with no input gaps
// is taken in exactly BIN cycles), that in_bin_done marks each bin's last
// byte, and that with the output blocked the buffer takes exactly two bins
// and then holds the input off.
module tb_bin_rx_buffer;
  localparam int BIN = 50, NBINS = 40;

  logic clk = 0, rst_n = 1;
  logic in_valid = 0, in_ready, in_bin_done, out_valid, out_ready = 0;
  logic [7:0] in_data = '0, out_data;
  int checks = 0, failures = 0;

  bin_rx_buffer #(.BIN_SIZE(BIN)) dut (.*);
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // a falling edge, so that the asynchronous reset acts at once

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [7:0] expq[$];
  int n_out = 0, n_done = 0, in_pos = 0, ready_pct = 60;
  bit in_bin = 0;

  // monitor: output bytes, bin-done pulses, ready inside a bin
  initial forever begin
    @(negedge clk);
    out_ready = $urandom_range(99) < ready_pct;
    #1;
    if (rst_n && in_bin) begin
      checks++;
      if (!in_ready) begin failures++; $display("in_ready dropped inside a bin at %0t", $time); end
    end
    if (in_valid && in_ready) begin
      checks++;
      if (in_bin_done != (in_pos == BIN - 1)) begin failures++; $display("in_bin_done at byte %0d", in_pos); end
      n_done += int'(in_bin_done);
      in_pos = (in_pos == BIN - 1) ? 0 : in_pos + 1;
      in_bin = in_pos != 0;
    end
    if (out_valid && out_ready) begin
      checks++;
      if (expq.size() == 0 || out_data != expq[0]) begin
        failures++;
        if (failures < 10) $display("byte %0d: got %h", n_out, out_data);
      end
      if (expq.size() != 0) void'(expq.pop_front());
      n_out++;
    end
  end

  task automatic send_bin(input bit gaps);
    for (int i = 0; i < BIN; i++) begin
      bit hs;
      in_valid = 1; in_data = 8'($urandom);
      forever begin
        #1 hs = in_ready;
        @(negedge clk);
        if (hs) break;
      end
      if (hs) expq.push_back(in_data);
      if (gaps && $urandom_range(9) == 0) begin
        in_valid = 0;
        @(negedge clk);
      end
    end
    in_valid = 0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // output blocked: exactly two bins fit
    ready_pct = 0;
    send_bin(0);
    send_bin(0);
    repeat (20) @(negedge clk);
    #1;
    checks++;
    if (in_ready) begin failures++; $display("third bin accepted with both slots full"); end
    @(negedge clk);
    ready_pct = 60;
    // a bin with no gaps takes exactly BIN cycles once it has started
    for (int b = 0; b < NBINS; b++) begin
      longint t0, t1;
      bit gaps;
      gaps = (b % 3) == 0;
      repeat ($urandom_range(30)) @(negedge clk);
      // wait for a free slot so that the bin starts at once
      forever begin
        bit r;
        #1 r = in_ready;
        @(negedge clk);
        if (r) break;
      end
      t0 = $time;
      send_bin(gaps);
      t1 = $time;
      if (!gaps) begin
        checks++;
        if ((t1 - t0) / 10 != BIN) begin failures++; $display("bin %0d took %0d cycles", b, (t1 - t0) / 10); end
      end
    end
    ready_pct = 100;
    repeat (4 * BIN) @(negedge clk);
    checks++;
    if (n_out != (NBINS + 2) * BIN || expq.size() != 0) begin
      failures++; $display("out %0d bytes, %0d left", n_out, expq.size());
    end
    checks++;
    if (n_done != NBINS + 2) begin failures++; $display("bins done %0d", n_done); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
