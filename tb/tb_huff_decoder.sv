// tb_huff_decoder: loads the canonical description of two codes into the
// decompression unit, feeds it reference-encoded random tiles (made in the
// testbench) with random input gaps and output stalls, and checks every
// decoded byte and the out_last mark. Also checks the bit-serial rate: an
// 8-bit code decodes one byte in eight cycles.
module tb_huff_decoder;
  import neuroplug_pkg::*;
  import tb_huff_pkg::*;

  logic clk = 0, rst_n = 1;
  logic cfg_cnt_we = 0, cfg_sym_we = 0;
  logic [4:0] cfg_len;
  logic [8:0] cfg_cnt;
  logic [7:0] cfg_idx, cfg_sym;
  logic [31:0] tile_bytes;
  logic in_valid = 0, in_ready;
  tile_byte_t in_data;
  logic out_valid, out_ready = 0, out_last, err;
  logic [7:0] out_data;
  int checks = 0, failures = 0;
  int gap_pct = 0, stall_pct = 0;

  huff_decoder dut (.*);
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // a falling edge, so that the asynchronous reset acts at once

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  lens_t lens;
  codes_t codes;
  bytes_q_t expq;
  int errs = 0;

  task automatic load_code(input lens_t l);
    bytes_q_t s;
    lens = l;
    codes = canon(l);
    s = sorted_syms(l);
    for (int len = 1; len <= 16; len++) begin
      @(negedge clk) cfg_cnt_we = 1; cfg_len = 5'(len); cfg_cnt = 9'(count_len(l, len));
    end
    @(negedge clk) cfg_cnt_we = 0;
    foreach (s[i]) begin
      @(negedge clk) cfg_sym_we = 1; cfg_idx = 8'(i); cfg_sym = s[i];
    end
    @(negedge clk) cfg_sym_we = 0;
  endtask

  task automatic send_tile(input bytes_q_t t);
    bytes_q_t c = encode(lens, codes, t);
    @(negedge clk);
    foreach (t[i]) expq.push_back(t[i]);
    foreach (c[i]) begin
      in_valid = 0;
      while ($urandom_range(99) < gap_pct) @(negedge clk);
      in_valid = 1; in_data = '{tile_first: (i == 0), data: c[i]};
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk);
    end
    in_valid = 0;
  endtask

  int got = 0, left_in_tile = 0;
  initial begin
    forever begin
      @(negedge clk);
      out_ready = ($urandom_range(99) >= stall_pct);
      @(posedge clk);
      if (err) errs++;
      if (out_valid && out_ready) begin
        byte unsigned e;
        checks++;
        if (left_in_tile == 0) left_in_tile = int'(tile_bytes);
        left_in_tile--;
        if (expq.size() == 0) begin failures++; $display("unexpected output"); end
        else begin
          e = expq.pop_front();
          if (out_data != e || out_last != (left_in_tile == 0)) begin
            failures++;
            if (failures < 4) $display("byte %0d: got %h last %0b exp %h", got, out_data, out_last, e);
          end
        end
        got++;
      end
    end
  end

  longint t0;
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_code(sparse_lens());
    gap_pct = 20; stall_pct = 30;
    for (int k = 0; k < 12; k++) begin
      tile_bytes = 32'($urandom_range(200, 1));
      send_tile(random_tile(tile_bytes, 70));
      wait (expq.size() == 0);
      @(negedge clk);
    end
    load_code(flat_lens());
    gap_pct = 0; stall_pct = 0;
    tile_bytes = 64;
    t0 = $time;
    send_tile(random_tile(64, 0));
    wait (expq.size() == 0);
    checks++;
    if (($time - t0) / 10 > 64 * 8 + 4) begin failures++; $display("rate: %0d cycles", ($time - t0) / 10); end
    gap_pct = 30; stall_pct = 40;
    for (int k = 0; k < 8; k++) begin
      tile_bytes = 32'($urandom_range(50, 1));
      send_tile(random_tile(tile_bytes, 20));
      wait (expq.size() == 0);
      @(negedge clk);
    end
    repeat (20) @(negedge clk);
    checks++;
    if (errs != 0) begin failures++; $display("decode errors %0d", errs); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
