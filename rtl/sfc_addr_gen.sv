// sfc_addr_gen: SFC address generator. Walks the space filling curve of a
// layer and hands out the tile order and the addresses of consecutive bins.
//
// The design maps every layer onto a one-dimensional curve:
//   ifmaps  - deep tiles (one tile position across all channels): channels
//             innermost, then tile columns left to right, then tile rows top
//             to bottom;
//   filters - all kernels of ofmap 1 (across the channels), then ofmap 2,
//             and so on; with unrolling (more ifmap partitions than fit), the
//             whole filter curve is walked repeat times in a row;
//   ofmaps  - the same format as ifmaps, with the ofmaps in place of the
//             channels, since they are the next layer's input;
//   fused   - for fused layers, the filters of the first layer and then
//             those of the second (whose channels are the first's ofmaps).
// These orders are the design's. Counter widths, the handshake and folding
// the unroll factor into a plain repeat count are this implementation's.
//
// Bins are laid out back to back in memory, so the curve's address stream is
// a base plus a running bin index times the bin size: bin_addr is valid
// from start and moves to the next bin on each bin_step pulse.
//
// Interface: start (one cycle) loads mode and sizes (counts of tiles, at
// least 1 each) and base; the walk is a valid/ready stream of coordinates
// with last on its final element; done pulses after last is taken. One
// element per cycle.
//
// Lint note: Verilator reports rst_n as used both asynchronously and
// synchronously. The synchronous use is only the 'disable iff' of the
// handshake assertions; the logic itself resets asynchronously.
module sfc_addr_gen
  import neuroplug_pkg::*;
#(
  parameter int unsigned DW = 12,        // width of each tile count
  parameter int unsigned AW = 40,        // memory address width
  parameter int unsigned BIN_SIZE = BIN_BYTES
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  sfc_mode_e     mode,
  input  logic [DW-1:0] n_h,       // tile rows
  input  logic [DW-1:0] n_w,       // tile columns
  input  logic [DW-1:0] n_c,       // channels (tiles along C)
  input  logic [DW-1:0] n_k,       // ofmaps (tiles along K)
  input  logic [DW-1:0] n_k2,      // ofmaps of the second fused layer
  input  logic [DW-1:0] n_rep,     // times the filter curve is walked
  input  logic [AW-1:0] base,
  // curve
  output logic          out_valid,
  input  logic          out_ready,
  output logic [DW-1:0] out_h,
  output logic [DW-1:0] out_w,
  output logic [DW-1:0] out_c,
  output logic [DW-1:0] out_k,
  output logic          out_layer2,
  output logic          out_last,
  output logic          done,
  // bins along the curve
  input  logic          bin_step,
  output logic [AW-1:0] bin_addr
);

  sfc_mode_e     mode_q;
  logic [DW-1:0] lim_in, lim_mid, lim_out;   // counts of the three loops
  logic [DW-1:0] i_in, i_mid, i_out;
  logic          phase2;                      // second layer of a fused walk
  logic [DW-1:0] nc_q, nk_q, nk2_q;
  logic          busy;
  logic          w_in, w_mid, w_out;          // loop at its last value

  assign w_in  = (i_in  == lim_in  - 1);
  assign w_mid = (i_mid == lim_mid - 1);
  assign w_out = (i_out == lim_out - 1);
  assign out_valid = busy;
  assign out_last  = busy && w_in && w_mid && w_out && (mode_q != SFC_FUSED || phase2);

  always_comb begin
    out_h = '0; out_w = '0; out_c = '0; out_k = '0;
    out_layer2 = phase2;
    unique case (mode_q)
      SFC_IFMAP:  begin out_c = i_in; out_w = i_mid; out_h = i_out; end
      SFC_OFMAP:  begin out_k = i_in; out_w = i_mid; out_h = i_out; end
      default:    begin out_c = i_in; out_k = i_mid; end   // filters, fused filters
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; phase2 <= 1'b0;
      mode_q <= SFC_IFMAP;
      i_in <= '0; i_mid <= '0; i_out <= '0;
      lim_in <= 1; lim_mid <= 1; lim_out <= 1;
      nc_q <= '0; nk_q <= '0; nk2_q <= '0;
      bin_addr <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy   <= 1'b1;
        mode_q <= mode;
        phase2 <= 1'b0;
        i_in <= '0; i_mid <= '0; i_out <= '0;
        nc_q <= n_c; nk_q <= n_k; nk2_q <= n_k2;
        unique case (mode)
          SFC_IFMAP: begin lim_in <= n_c; lim_mid <= n_w; lim_out <= n_h;   end
          SFC_OFMAP: begin lim_in <= n_k; lim_mid <= n_w; lim_out <= n_h;   end
          default:   begin lim_in <= n_c; lim_mid <= n_k; lim_out <= n_rep; end
        endcase
      end else if (busy && out_ready) begin
        if (!w_in) i_in <= i_in + 1'b1;
        else begin
          i_in <= '0;
          if (!w_mid) i_mid <= i_mid + 1'b1;
          else begin
            i_mid <= '0;
            if (mode_q == SFC_FUSED && !phase2) begin
              // switch to the second layer's filters (channels = first's ofmaps)
              phase2  <= 1'b1;
              lim_in  <= nk_q;
              lim_mid <= nk2_q;
            end else if (!w_out) begin
              i_out <= i_out + 1'b1;
              if (mode_q == SFC_FUSED) begin
                phase2  <= 1'b0;
                lim_in  <= nc_q;
                lim_mid <= nk_q;
              end
            end else begin
              busy <= 1'b0;
              done <= 1'b1;
            end
          end
        end
      end
      if (start)         bin_addr <= base;
      else if (bin_step) bin_addr <= bin_addr + AW'(BIN_SIZE);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   start |-> (n_h != 0 && n_w != 0 && n_c != 0 && n_k != 0 && n_rep != 0 &&
                              (mode != SFC_FUSED || n_k2 != 0)));

endmodule
