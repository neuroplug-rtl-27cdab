// tb_halo_buffer: walks layers of random shape (rows x columns of tiles),
// with a small buffer that holds two columns on chip so that wider rows
// spill. For every tile it writes random east and south edges (east edges in
// random index order) and reads back the west and north halos, sometimes
// before and sometimes after writing its own edges, and compares them with
// the edges that the neighbours wrote. The spill streams are served by a
// FIFO that stands for memory, with random stalls on both sides. Also checks
// the tile position outputs, the border flags, that a refill happens for
// every spilled column and that the spill stream carries exactly the spilled
// edges.
module tb_halo_buffer;
  localparam int PW = 8, HALO = 1, TILE_H = 2, TILE_W = 3, TILE_C = 2, MAX_COLS = 2;
  localparam int EDGE_V = HALO * TILE_H * TILE_C, EDGE_H = HALO * TILE_W * TILE_C;
  localparam int EIW = $clog2(EDGE_V > EDGE_H ? EDGE_V : EDGE_H);
  localparam int MR = 5, MC = 6;

  logic clk = 0, rst_n = 1, start = 0, tile_done = 0;
  logic [15:0] n_cols, cur_row, cur_col;
  logic has_west, has_north, halo_ready;
  logic wr_valid = 0, wr_ready, wr_edge = 0;
  logic [EIW-1:0] wr_idx = '0, rd_idx = '0;
  logic [PW-1:0] wr_data = '0, rd_data;
  logic rd_en = 0, rd_edge = 0;
  logic spill_out_valid, spill_out_ready = 0, spill_in_valid = 0, spill_in_ready;
  logic [PW-1:0] spill_out_data, spill_in_data = '0;
  int checks = 0, failures = 0;

  halo_buffer #(.PW(PW), .HALO(HALO), .TILE_H(TILE_H), .TILE_W(TILE_W), .TILE_C(TILE_C),
                .MAX_COLS(MAX_COLS)) dut (.*);
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // a falling edge, so that the asynchronous reset acts at once

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Memory behind the spill streams: a FIFO.
  logic [PW-1:0] sq[$];
  int n_spilled_out = 0, n_refill_cycles = 0;
  initial forever begin
    @(negedge clk);
    spill_out_ready = $urandom_range(99) < 70;
    if (sq.size() != 0) begin
      spill_in_valid = $urandom_range(99) < 70;
      spill_in_data  = sq[0];
    end else spill_in_valid = 0;
    #1;
    if (rst_n && !halo_ready) n_refill_cycles++;
    if (spill_in_valid && spill_in_ready) void'(sq.pop_front());
    if (spill_out_valid && spill_out_ready) begin
      sq.push_back(spill_out_data);
      n_spilled_out++;
    end
  end

  logic [PW-1:0] east [MR][MC][EDGE_V];
  logic [PW-1:0] south[MR][MC][EDGE_H];

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at t=%0t", what, $time);
    end
  endtask

  task automatic write_px(input bit edge_s, input int idx, input logic [PW-1:0] d);
    bit hs;
    wr_valid = 1; wr_edge = edge_s; wr_idx = EIW'(idx); wr_data = d;
    forever begin
      #1 hs = wr_ready;
      @(negedge clk);
      if (hs) break;
    end
    wr_valid = 0;
  endtask

  task automatic write_edges(input int r, input int c);
    int perm[$];
    for (int i = 0; i < EDGE_V; i++) perm.push_back(i);
    perm.shuffle();
    foreach (perm[j]) begin
      east[r][c][perm[j]] = PW'($urandom);
      write_px(0, perm[j], east[r][c][perm[j]]);
    end
    perm.delete();
    for (int i = 0; i < EDGE_H; i++) perm.push_back(i);
    if (c < MAX_COLS) perm.shuffle();   // spilled edges go out in order
    foreach (perm[j]) begin
      south[r][c][perm[j]] = PW'($urandom);
      write_px(1, perm[j], south[r][c][perm[j]]);
    end
  endtask

  task automatic read_halos(input int r, input int c);
    if (c > 0)
      for (int i = 0; i < EDGE_V; i++) begin
        rd_en = 1; rd_edge = 0; rd_idx = EIW'(i);
        @(negedge clk) rd_en = 0;
        check(rd_data == east[r][c-1][i], $sformatf("west halo r%0d c%0d i%0d", r, c, i));
      end
    if (r > 0)
      for (int i = 0; i < EDGE_H; i++) begin
        rd_en = 1; rd_edge = 1; rd_idx = EIW'(i);
        @(negedge clk) rd_en = 0;
        check(rd_data == south[r-1][c][i], $sformatf("north halo r%0d c%0d i%0d", r, c, i));
      end
  endtask

  task automatic run_layer(input int nr, input int nc);
    int refills0, spilled0;
    @(negedge clk);
    sq.delete();
    n_cols = 16'(nc); start = 1;
    @(negedge clk) start = 0;
    refills0 = n_refill_cycles; spilled0 = n_spilled_out;
    for (int r = 0; r < nr; r++)
      for (int c = 0; c < nc; c++) begin
        bit hr;
        int guard = 0;
        forever begin
          #1 hr = halo_ready;
          if (hr || guard > 1000) break;
          @(negedge clk);
          guard++;
        end
        @(negedge clk);   // drive on the negedge, away from the monitors' sample point
        check(hr, "halo_ready");
        check(cur_row == 16'(r) && cur_col == 16'(c), "position");
        check(has_west == (c != 0) && has_north == (r != 0), "border flags");
        if ($urandom_range(1) != 0) begin
          read_halos(r, c);
          write_edges(r, c);
        end else begin
          write_edges(r, c);
          read_halos(r, c);
        end
        @(negedge clk) tile_done = 1;
        @(negedge clk) tile_done = 0;
      end
    // every spilled south edge went out, and all but the last row's came back
    check(n_spilled_out - spilled0 == nr * (nc > MAX_COLS ? nc - MAX_COLS : 0) * EDGE_H,
          "spilled byte count");
    repeat (3) @(negedge clk);
    check(sq.size() == (nc > MAX_COLS ? nc - MAX_COLS : 0) * EDGE_H, "refilled byte count");
    if (nr > 1 && nc > MAX_COLS) check(n_refill_cycles > refills0, "refill seen");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_layer(1, 1);
    run_layer(3, 2);
    run_layer(4, 5);
    run_layer(MR, MC);
    for (int i = 0; i < 10; i++) run_layer($urandom_range(MR, 1), $urandom_range(MC, 1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
