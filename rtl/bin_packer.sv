// bin_packer: binning logic. Packs compressed tiles into fixed-size bins.
//
// A bin is the unit of off-chip storage: every bin has the same size
// (BIN_BYTES, 60 kB), is written out whole and in one go, and starts with a
// Bin Table that gives where each compressed tile starts inside it. Tiles
// arrive one after the other along the space filling curve; a tile that does
// not fit in the rest of a bin continues at the start of the next bin (the
// bytes before the first table offset belong to the previous tile). At most
// KAPPA tiles may start in one bin. Before a bin is filled the noise
// generator is asked for N, and the last N bytes of the bin are left empty;
// this is the additive noise of Y = CX + N. All of this follows the design.
//
// The Bin Table layout (see neuroplug_pkg) and the filler value of empty
// bytes (zero; bins are encrypted on their way to memory) are this
// implementation's choices, as is the value of KAPPA. If N would leave no
// payload byte it is reduced to BIN_BYTES - BIN_HDR_BYTES - 1.
//
// Bins are assembled in the compression buffer, which holds NSLOTS =
// CBUF_BYTES / BIN_BYTES bins (three). Filling and draining overlap: while
// one slot is written out, the next is filled; input stalls only when every
// slot holds a closed bin that has not left yet.
//
// Interface: valid/ready stream of compressed bytes (tile_first on each
// tile's first byte, in_layer_last on the layer's last byte, which closes the
// open bin); a request/response port to the noise generator; a valid/ready
// byte stream of whole bins (out_bin_first / out_bin_last). Timing: one input
// byte per cycle; a bin leaves in exactly BIN_BYTES cycles when out_ready
// stays high, whatever it holds. The ev_* outputs pulse for one cycle per
// event, except ev_slots_full, which is high in every cycle the input is held
// off because all slots hold closed bins.
//
// Lint note: Verilator reports rst_n as used both asynchronously and
// synchronously. The synchronous use is only the 'disable iff' of the
// handshake assertions; the logic itself resets asynchronously.
module bin_packer
  import neuroplug_pkg::*;
#(
  parameter int unsigned BIN_SIZE   = BIN_BYTES,
  parameter int unsigned MAX_TILES  = KAPPA,
  parameter int unsigned CBUF_SIZE  = CBUF_BYTES,
  localparam int unsigned HDR       = 4 + 2 * MAX_TILES,
  localparam int unsigned NSLOTS    = CBUF_SIZE / BIN_SIZE,
  localparam int unsigned AW        = $clog2(CBUF_SIZE),
  localparam int unsigned SW        = (NSLOTS > 1) ? $clog2(NSLOTS) : 1,
  localparam int unsigned TW        = $clog2(MAX_TILES + 1),
  localparam int unsigned IW        = (MAX_TILES > 1) ? $clog2(MAX_TILES) : 1
) (
  input  logic        clk,
  input  logic        rst_n,
  // compressed tiles
  input  logic        in_valid,
  output logic        in_ready,
  input  tile_byte_t  in_data,
  input  logic        in_layer_last,
  // noise generator
  output logic        noise_req,
  input  logic        noise_valid,
  input  logic [15:0] noise,
  // whole bins
  output logic        out_valid,
  input  logic        out_ready,
  output logic [7:0]  out_data,
  output logic        out_bin_first,
  output logic        out_bin_last,
  // events
  output logic        ev_bin_closed,
  output logic        ev_close_kappa,
  output logic        ev_close_full,
  output logic        ev_close_layer,
  output logic        ev_split,
  output logic        ev_slots_full
);

  // ------------------------------------------------------------------ checks
  if (BIN_SIZE > 65535 || BIN_SIZE <= HDR + 1) begin : g_bad_bin
    $error("BIN_SIZE must fit in the 16-bit Bin Table fields and exceed the table");
  end
  if (NSLOTS < 2) begin : g_bad_slots
    $error("the compression buffer must hold at least two bins");
  end

  // ------------------------------------------------------- compression buffer
  logic          cb_we, cb_re;
  logic [AW-1:0] cb_waddr, cb_raddr;
  logic [7:0]    cb_wdata, cb_rdata;

  onchip_buffer #(.DEPTH(CBUF_SIZE), .WIDTH(8)) u_cbuf (
    .clk, .we(cb_we), .waddr(cb_waddr), .wdata(cb_wdata),
    .re(cb_re), .raddr(cb_raddr), .rdata(cb_rdata)
  );

  // per-slot Bin Table contents
  logic [TW-1:0] ntiles_q [NSLOTS];
  logic [15:0]   pend_q   [NSLOTS];
  logic [15:0]   off_q    [NSLOTS][MAX_TILES];

  logic [SW:0]   full_cnt;           // closed bins waiting to leave
  logic          release_slot;       // drain side finished a bin

  // ---------------------------------------------------------------- fill side
  typedef enum logic [1:0] {F_WAIT_SLOT, F_NOISE_REQ, F_NOISE_WAIT, F_FILL} fill_e;
  fill_e         fstate;
  logic [SW-1:0] fslot;
  logic [15:0]   p;                  // next payload byte in the open bin
  logic [15:0]   cap_end;            // payload ends here, the rest is noise
  logic [TW-1:0] ntiles;
  logic          close_bin;
  logic          kappa_block;
  logic          take;
  logic [15:0]   noise_c;

  localparam logic [15:0] NOISE_CAP = 16'(BIN_SIZE - HDR - 1);

  assign noise_c     = (noise > NOISE_CAP) ? NOISE_CAP : noise;
  assign kappa_block = in_valid && in_data.tile_first && (ntiles == TW'(MAX_TILES));
  assign in_ready    = (fstate == F_FILL) && !kappa_block;
  assign take        = in_valid && in_ready;
  assign noise_req   = (fstate == F_NOISE_REQ);

  assign cb_we    = take;
  assign cb_waddr = AW'(32'(fslot) * BIN_SIZE + 32'(p));
  assign cb_wdata = in_data.data;

  always_comb begin
    close_bin = 1'b0;
    if (fstate == F_FILL) begin
      if (kappa_block) close_bin = 1'b1;
      else if (take && (in_layer_last || (p + 16'd1 == cap_end))) close_bin = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fstate         <= F_NOISE_REQ;
      fslot          <= '0;
      p              <= '0;
      cap_end        <= '0;
      ntiles         <= '0;
      ev_close_kappa <= 1'b0;
      ev_close_full  <= 1'b0;
      ev_close_layer <= 1'b0;
      ev_split       <= 1'b0;
      ev_bin_closed  <= 1'b0;
      ev_slots_full  <= 1'b0;
      for (int s = 0; s < NSLOTS; s++) begin
        ntiles_q[s] <= '0;
        pend_q[s]   <= '0;
      end
    end else begin
      ev_close_kappa <= 1'b0;
      ev_close_full  <= 1'b0;
      ev_close_layer <= 1'b0;
      ev_split       <= 1'b0;
      ev_bin_closed  <= 1'b0;
      ev_slots_full  <= 1'b0;
      unique case (fstate)
        F_WAIT_SLOT: begin
          ev_slots_full <= 1'b1;
          if (full_cnt < (SW+1)'(NSLOTS) || release_slot) fstate <= F_NOISE_REQ;
        end
        F_NOISE_REQ: fstate <= F_NOISE_WAIT;
        F_NOISE_WAIT: if (noise_valid) begin
          cap_end <= 16'(BIN_SIZE) - noise_c;
          p       <= 16'(HDR);
          ntiles  <= '0;
          fstate  <= F_FILL;
        end
        F_FILL: begin
          if (take) begin
            p <= p + 16'd1;
            if (in_data.tile_first) begin
              off_q[fslot][IW'(ntiles)] <= p;   // ntiles < MAX_TILES here
              ntiles <= ntiles + TW'(1);
            end else if (p == 16'(HDR)) begin
              ev_split <= 1'b1;      // bin starts with the rest of a tile
            end
          end
          if (close_bin) begin
            ntiles_q[fslot] <= (take && in_data.tile_first) ? ntiles + TW'(1) : ntiles;
            pend_q[fslot]   <= take ? p + 16'd1 : p;
            ev_bin_closed   <= 1'b1;
            ev_close_kappa  <= kappa_block;
            ev_close_layer  <= !kappa_block && in_layer_last;
            ev_close_full   <= !kappa_block && !in_layer_last;
            fslot           <= (fslot == SW'(NSLOTS - 1)) ? '0 : fslot + SW'(1);
            // a slot is free unless every other one still waits to leave
            if (full_cnt + 1 < (SW+1)'(NSLOTS) || release_slot) fstate <= F_NOISE_REQ;
            else fstate <= F_WAIT_SLOT;
          end
        end
        default: fstate <= F_NOISE_REQ;
      endcase
    end
  end

  // --------------------------------------------------------------- drain side
  logic [SW-1:0] dslot;
  logic [15:0]   raddr_q;            // next byte of the bin to read
  logic          issuing;            // addresses still to read
  logic          pend_v;             // a read is in flight
  logic [15:0]   pend_a;
  logic [SW-1:0] pend_s;
  // two-entry output queue
  logic [9:0]    q_data [2];         // {first, last, byte}
  logic [1:0]    q_cnt;
  logic          q_rd;
  logic          push, pop, issue;
  logic [9:0]    push_val;

  function automatic logic [7:0] hdr_byte(input logic [SW-1:0] s, input logic [15:0] a);
    logic [15:0] f;
    int unsigned i;
    if (a < 16'd2)      f = 16'(ntiles_q[s]);
    else if (a < 16'd4) f = pend_q[s];
    else begin
      i = (32'(a) - 4) / 2;
      f = 16'd0;
      for (int k = 0; k < MAX_TILES; k++)
        if (k == int'(i) && k < int'(ntiles_q[s])) f = off_q[s][k];
    end
    return a[0] ? f[15:8] : f[7:0];
  endfunction

  assign pop   = out_valid && out_ready;
  assign issue = issuing && ((2'(q_cnt) + 2'(pend_v) - 2'(pop)) < 2'd2);
  assign push  = pend_v;
  assign cb_re    = issue;
  assign cb_raddr = AW'(32'(dslot) * BIN_SIZE + 32'(raddr_q));

  always_comb begin
    logic [7:0] b;
    if (pend_a < 16'(HDR))            b = hdr_byte(pend_s, pend_a);
    else if (pend_a >= pend_q[pend_s]) b = 8'h00;
    else                               b = cb_rdata;
    push_val = {pend_a == 16'd0, pend_a == 16'(BIN_SIZE - 1), b};
  end

  assign out_valid     = (q_cnt != 0);
  assign out_data      = q_data[q_rd][7:0];
  assign out_bin_last  = q_data[q_rd][8];
  assign out_bin_first = q_data[q_rd][9];
  assign release_slot  = pop && out_bin_last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dslot    <= '0;
      raddr_q  <= '0;
      issuing  <= 1'b0;
      pend_v   <= 1'b0;
      pend_a   <= '0;
      pend_s   <= '0;
      q_cnt    <= '0;
      q_rd     <= 1'b0;
      full_cnt <= '0;
      q_data[0] <= '0;
      q_data[1] <= '0;
    end else begin
      full_cnt <= full_cnt + (SW+1)'(close_bin) - (SW+1)'(release_slot);
      // start reading a closed bin
      if (!issuing && (full_cnt != 0) && !(pend_v || q_cnt != 0) && !release_slot) begin
        issuing <= 1'b1;
        raddr_q <= '0;
      end
      pend_v <= issue;
      if (issue) begin
        pend_a  <= raddr_q;
        pend_s  <= dslot;
        raddr_q <= raddr_q + 16'd1;
        if (raddr_q == 16'(BIN_SIZE - 1)) begin
          issuing <= 1'b0;
          dslot   <= (dslot == SW'(NSLOTS - 1)) ? '0 : dslot + SW'(1);
        end
      end
      if (push) q_data[q_rd ^ (q_cnt != 0)] <= push_val;
      if (pop) q_rd <= ~q_rd;
      q_cnt <= q_cnt + 2'(push) - 2'(pop);
    end
  end

  // ---------------------------------------------------------------- checks
  assert property (@(posedge clk) disable iff (!rst_n) q_cnt <= 2);
  assert property (@(posedge clk) disable iff (!rst_n) full_cnt <= (SW+1)'(NSLOTS));
  assert property (@(posedge clk) disable iff (!rst_n) take |-> p < cap_end);

endmodule
