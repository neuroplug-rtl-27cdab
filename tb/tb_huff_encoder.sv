// tb_huff_encoder: feeds random sparse tiles through the compression unit
// with two code tables and random output stalls, and compares every output
// byte, tile_first and out_last with a reference encoding made in the
// testbench. Also checks the input rate: with the output always ready and
// 1-bit codes, one byte is taken per cycle.
module tb_huff_encoder;
  import neuroplug_pkg::*;
  import tb_huff_pkg::*;

  logic clk = 0, rst_n = 1;
  logic cfg_we = 0;
  logic [7:0] cfg_sym;
  huff_code_t cfg_code;
  logic in_valid = 0, in_ready, in_last = 0;
  logic [7:0] in_data;
  logic out_valid, out_ready = 0, out_last;
  tile_byte_t out_data;
  int checks = 0, failures = 0;
  int stall_pct = 0;

  huff_encoder dut (.*);
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // a falling edge, so that the asynchronous reset acts at once

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  lens_t lens;
  codes_t codes;
  bytes_q_t expq[$];   // expected compressed tiles

  task automatic load_table(input lens_t l);
    lens = l;
    codes = canon(l);
    for (int s = 0; s < 256; s++) begin
      @(negedge clk);
      cfg_we = 1; cfg_sym = 8'(s);
      cfg_code = '{len: 5'(l[s]), code: 16'(codes[s])};
    end
    @(negedge clk) cfg_we = 0;
  endtask

  task automatic send_tile(input bytes_q_t t);
    expq.push_back(encode(lens, codes, t));
    foreach (t[i]) begin
      in_valid = 1; in_data = t[i]; in_last = (i == t.size() - 1);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk);
    end
    in_valid = 0; in_last = 0;
  endtask

  // output checker
  int tiles_done = 0;
  initial begin
    bytes_q_t cur;
    int pos = 0;
    forever begin
      @(negedge clk);
      out_ready = ($urandom_range(99) >= stall_pct);
      @(posedge clk);
      if (out_valid && out_ready) begin
        if (pos == 0) begin
          checks++;
          if (expq.size() == 0) begin failures++; $display("unexpected output"); end
          else cur = expq.pop_front();
        end
        checks++;
        if (out_data.data !== cur[pos] || out_data.tile_first != (pos == 0) ||
            out_last != (pos == cur.size() - 1)) begin
          failures++;
          if (failures < 10) $display("tile %0d byte %0d: got %h f%0b l%0b exp %h of %0d", tiles_done, pos,
                                      out_data.data, out_data.tile_first, out_last, cur[pos], cur.size());
        end
        pos++;
        if (pos == cur.size()) begin pos = 0; tiles_done++; end
      end
    end
  end

  int t0, sent;
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_table(sparse_lens());
    stall_pct = 30;
    for (int k = 0; k < 20; k++) send_tile(random_tile($urandom_range(300, 1), 70));
    // rate: all-zero tile, output always ready -> one input byte per cycle
    stall_pct = 0;
    repeat (50) @(negedge clk);
    begin
      bytes_q_t z;
      for (int i = 0; i < 256; i++) z.push_back(8'd0);
      t0 = $time;
      send_tile(z);
      checks++;
      if (($time - t0) / 10 != 256) begin failures++; $display("rate: %0d cycles for 256 bytes", ($time - t0) / 10); end
    end
    repeat (50) @(negedge clk);
    load_table(flat_lens());
    stall_pct = 50;
    for (int k = 0; k < 10; k++) send_tile(random_tile($urandom_range(100, 1), 10));
    repeat (500) @(negedge clk);
    checks++;
    if (tiles_done != 31 || expq.size() != 0) begin failures++; $display("tiles done %0d", tiles_done); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
