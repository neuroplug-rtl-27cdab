# NeuroPlug secure data path: RTL

An NPU that streams a neural network's layers to and from off-chip memory
gives away the network's shape. Someone watching the memory bus sees how
many bytes each layer reads and writes, and where and when it does so. From
that they can often recover layer sizes, filter counts and the positions of
layer boundaries, even when all data and addresses are encrypted. Sparse
accelerators leak more, because the compressed size of a feature map depends
on its values.

This design hides those quantities behind three ideas:

1. **One dimension.** Every layer is laid out along a *space filling curve*
   (SFC): a fixed walk through its tiles, channels first and then along the
   rows. Data then moves in one sequential stream per layer, not in
   shape-dependent 2-D or 3-D patterns.
2. **Bins.** The stream of compressed tiles is cut into *bins* of one fixed
   size (60 kB). A bin is always read or written whole, at the next address
   along the curve, in a fixed time. A tile may start in one bin and end in
   the next. A *Bin Table* at the start of each bin says where the tiles in
   it begin.
3. **Key-dependent empty space.** Each bin leaves N bytes empty, with
   N = α + N′. N′ is drawn from a heteroskedastic distribution: a Gaussian
   whose variance is itself drawn from a uniform distribution. α, the range
   of N′ and the variance bound are part of the model's key.

So for a layer with X bytes of data, an observer sees C·X + N bytes of bins.
C is the data's compression ratio and N is the key-dependent noise. They see
no tile or layer boundaries and no timing that depends on the data.

The RTL implements this data path between the compute engine and the memory
interface. The compute engine (a systolic PE array), the encryption and
integrity engine, the DRAM controller and the host are outside it. They
connect through ports.

## Block map

```
             host config (key, Huffman tables, walk sizes)
                                 |
   compute engine                v                            memory side
   ofmap bytes --> huff_encoder --> bin_packer -------------> bins out (mw_*)
                                    |  compression buffer    at ofmap-walk
                                    |  (3 x 60 kB slots)     addresses
                                    +-- noise_gen (N per bin)
   tile order  <-- sfc_addr_gen (ofmap walk) ------------------> mw_addr
   tile order  <-- sfc_addr_gen (ifmap / filter / fused walk) --> mr_addr
   glb read    <-- onchip_buffer (global) <-- huff_decoder <-- bin_reader
                                                                  ^
                                       bin_rx_buffer (2 bins) <-- bins in (mr_*)
   halo r/w   <--> halo_buffer <----------------------------------> halo spill streams
```

| Module | Role |
|---|---|
| `neuroplug_pkg` | Sizes, Bin Table layout, stream and key types, configuration map |
| `noise_gen` | Draws N = α + N′ for every bin |
| `huff_encoder` | Huffman-codes a tile's bytes (the compression unit) |
| `bin_packer` | Binning logic and the compression buffer |
| `bin_rx_buffer` | Takes whole bins from memory at a fixed rate (two bin slots) |
| `bin_reader` | Parses a bin's table and recovers the tile streams |
| `huff_decoder` | Canonical Huffman decoder (the decompression unit) |
| `sfc_addr_gen` | Walks the curve: tile coordinates and bin addresses |
| `onchip_buffer` | 182 kB byte SRAM, used as the global buffer and the compression buffer |
| `halo_buffer` | Edge pixels that a tile needs from its west and north neighbours |
| `neuroplug_top` | Wires all of the above together |

All streams are byte-wide valid/ready handshakes. A byte moves on a rising
edge where both valid and ready are high. Reset is asynchronous and active
low.

## The space filling curves (`sfc_addr_gen`)

The walker runs three nested counters and hands out one tile coordinate per
cycle while `out_ready` is high. The curve is chosen by `mode`:

| mode | order (innermost first) | used for |
|---|---|---|
| `SFC_IFMAP` | channel c, column w, row h | reading input maps as *deep tiles* (one tile position across all channels) |
| `SFC_FILTER` | input channel c, output map k, repeat | reading filters: all kernels of output map 1, then output map 2, … |
| `SFC_OFMAP` | output map k, column w, row h | writing output maps, in the same layout the next layer reads |
| `SFC_FUSED` | first layer's c×k, then the second layer's k×k2, then repeat | filters of two fused layers, read back to back |

The *repeat* count covers the case where neither the input maps nor the
weights fit on chip. The input map is then processed in bin-aligned parts,
and the weights must be read once per part. To hide how often that happens,
the weight curve itself is unrolled (W1 W2 W1 W2 …). The host chooses the
number of repeats, which may include a secret, randomised unrolling factor.
The walker just repeats.

Each walker also holds a bin address. `start` loads it with a base address,
and each `bin_step` adds the bin size. Memory therefore sees one bin after
another at consecutive addresses, whatever the layer's shape.

## Bins and the Bin Table (`bin_packer`, `bin_reader`)

A bin is `BIN_SIZE` = 61,440 bytes. It has three parts, in order:

- a table of `4 + 2·κ` bytes (20 bytes for κ = 8), little endian:

  | bytes | field |
  |---|---|
  | 0–1 | number of tiles that start in this bin |
  | 2–3 | payload end: offset one past the last data byte |
  | 4 … | κ 16-bit offsets, one per tile start |

- the payload: compressed bytes of consecutive tiles along the curve;
- empty space up to the end of the bin, sent as zeros.

**How the packer works.** The compression buffer (182 kB) is split into
three bin slots. It fills one slot while the memory side drains another, so
it can hold up to three bins at a time.

Before it fills a slot, the packer asks `noise_gen` for N. It then sets the
slot's payload capacity to `BIN_SIZE − table − min(N, BIN_SIZE − table − 1)`.

A slot is closed in three cases:

- **payload full.** The current tile continues at the start of the next
  bin's payload. Its remaining bytes do not get a table entry there, because
  the entry marks only where a tile starts.
- **κ reached.** A byte that would start the (κ+1)-th tile arrives. That
  tile starts the next bin instead.
- **layer end.** The last byte of the layer has been packed.

When all three slots are full, the packer holds off its input. The stall
then travels back through the encoder to the compute engine.

**Draining.** A closed slot leaves as one burst. The table bytes come from
registers, the payload from the buffer, and zeros from the end of the
payload onwards. If the memory side does not stall, every bin takes exactly
`BIN_SIZE` cycles. The `mw_bin_first` and `mw_bin_last` flags frame each
bin.

**The reader.** `bin_reader` reverses this. It reads the table, passes the
payload through, and sets a tile-start flag on each byte whose offset is in
the table. It consumes and drops the empty space. An inconsistent table (more
than κ tiles, or a payload end outside the bin) raises `hdr_err`.

**Fixed read time.** The decoder behind the reader is bit-serial, so it
consumes payload bytes more slowly than empty bytes. If memory fed the
reader directly, a bin's read time would reveal how full it is.
`bin_rx_buffer` prevents that. It has two bin slots, and a free slot takes a
whole bin at one byte per cycle: once a bin has started, `mr_ready` stays
high to its last byte. The reader then drains the slot at its own pace.

κ (`MAX_TILES`) bounds how many tiles a bin can carry. The time to compute a
bin can therefore be padded to the time for κ tiles. This RTL enforces the
fixed time only at the memory interface, in both directions (see
*Departures*).

## Key-dependent noise (`noise_gen`)

The key registers are `alpha`, `range_r` (R), `sigma_max` and `seed`. Three
32-bit Galois LFSRs (polynomial 0x80200003) are seeded from the key seed.
For each request the generator computes:

- a uniform draw u in [0, 1), which sets σ = u · sigma_max;
- z, the sum of four 12-bit uniform draws, centred. This is an approximately
  Gaussian value (central limit theorem) with a standard deviation of about
  2,365, which is 0.58 after the division by 4,096 below.
- N′ = clamp(R/2 + σ·z / 4096, 0, R);
- N = α + N′, saturated to 16 bits.

The result is valid one cycle after `req`. Because σ changes from bin to bin,
the variance of the empty space is itself random. That is what makes a
regression from observed bin counts to layer sizes hard. Writing the seed
register restarts the sequence, so the same key always gives the same bin
layout.

## Compression (`huff_encoder`, `huff_decoder`)

Compression has two stages, as in Deep Compression: pruning, then Huffman
coding. Pruning happens when the model is prepared: it only makes the data
sparse. The hardware does the Huffman stage over a byte alphabet.

**Encoder.** The host loads a 256-entry code table: each entry holds a code
of up to 16 bits and its length. Codes are packed MSB first into a 32-bit
accumulator, and a byte is emitted whenever 8 or more bits are pending. The
encoder takes one input byte per cycle while no more than 16 bits are
pending. A 256-byte tile of short codes therefore goes through in 256
cycles. At a tile's end the last byte is padded with zeros, and the first
output byte of each tile carries a tile-start flag.

**Decoder.** A canonical decoder. The host loads the number of codes of each
length and the symbols sorted by code. The decoder derives each length's
first code and index with the recurrence `first(l+1) = (first(l) + count(l)) << 1`.
It then decodes one bit per cycle. It emits `tile_bytes` symbols per tile,
drops the padding bits, and realigns on the next tile-start flag. An invalid
code raises `err`.

The encoder and decoder tables must describe the same canonical code. The
end-to-end testbench shows how to build one from a length table.

## Halo pixels (`halo_buffer`)

A convolution near a tile's edge needs pixels from the neighbouring tiles.
The walk goes row by row, west to east, starting in the north-west corner.
So every tile needs the east edge of the tile just processed, and the south
edge of the tile above it, which was processed one row earlier.

While a tile is processed, the compute engine writes both of those edges
into the halo buffer.

- **East edges** go into a two-bank west store. The banks alternate by
  column parity, so writing a tile's east edge never overwrites the west
  halo it is still reading.
- **South edges** go into a north store with one slot per column. It is
  double-banked by row parity.

The buffer keeps `MAX_COLS` columns on chip (14 by default). If a row is
wider, the south edges of the extra columns leave on the spill-out stream,
to be stored in memory as a stream of their own. In the next row, before
such a column's tile starts, the buffer pulls the same number of bytes back
from the spill-in stream into a staging slot. During the refill
`halo_ready` is low. Write a spilled column's south edge in index order, so
that it comes back in that order.

At the top level, the row width is the read walker's `n_w`, and the halo
buffer restarts with each read walk.

## Top level and configuration (`neuroplug_top`)

The host writes 32-bit words through `cfg_we/cfg_addr/cfg_wdata`:

| address | register |
|---|---|
| 0x000–0x003 | noise key: α, R, σ_max, seed (writing the seed reseeds) |
| 0x004 | uncompressed tile length in bytes (for the decoder) |
| 0x005 | global buffer write pointer |
| 0x010–0x019 | read walker: mode, n_h, n_w, n_c, n_k, n_k2, repeats, base low/high, start |
| 0x020–0x029 | ofmap walker: the same registers |
| 0x1ss | encoder table entry for symbol ss: `{len[20:16], code[15:0]}` |
| 0x2ll | decoder: number of codes of length ll |
| 0x3ii | decoder: ii-th symbol in code order |

**Write path.** The compute engine sends ofmap bytes on `ce_ofm_*`, marking
the last byte of each tile and of the layer. It computes tiles in the order
given on `ce_wr_tile_*`. Bins leave on `mw_*` at `mw_addr`, which advances by
one bin after each bin's last byte.

**Read path.** Bins arrive on `mr_*` for the address on `mr_addr`, which
advances once the last byte of a bin has been received. The decompressed bytes are written to the
global buffer at `glb_wptr`, and `glb_tile_done` pulses after each whole
tile. The compute engine reads the global buffer on `ce_glb_*`, following
the order on `ce_rd_tile_*`.

**Events.** The `ev` struct gives one-cycle pulses for:

- a bin closed, and why: κ, full or layer end;
- a split tile;
- a bin read;
- a header or decode error.

`ev.slots_full` is high in every cycle in which the compression buffer holds
the input off.

At the default sizes, the top level synthesises to about 1,000 cells and
1,300 flip-flops, plus the memories: two 182 kB buffers, the 120 kB receive
buffer and the halo stores.

## Departures from the published design

- **Outside this RTL, reached only through ports.** The compute engine, the
  encryption/integrity engine, the DRAM controller, DRAM and the host link.
  The bin streams here are plaintext. They are meant to pass through an
  authenticated cipher on the way to memory, which is also what makes the
  zero padding invisible.
- **Dummy data in the first layer** is not implemented. The published design
  packs dummy data into the first layer's tiles and records where it is in
  the Bin Table.
- **Fixed bin time** is guaranteed only at the memory interface. There, every
  bin is written, and once started read, in exactly `BIN_SIZE` cycles.
  Making the compute time of every bin equal to the time for κ tiles is up
  to the compute engine.
- **Weight partitioning** (Cases I–III) is the host's job. The host picks the
  partition sizes, which may be random, and the unrolling factor, and
  programs the walker's sizes and repeat count. The walker itself has no
  random source.
- **Pooling, ReLU and skip connections** belong to the compute engine. A skip
  connection is handled by starting a read walk at the earlier layer's base
  address.
- **Sizes the published design does not give:**
  - κ = 8;
  - 16-bit Huffman codes;
  - the Bin Table layout;
  - 12-bit walker counters and 40-bit addresses;
  - the halo buffer's 2-pixel halo, 16×16×16 deep tiles and 14 on-chip
    columns;
  - the noise generator's LFSRs and the four-term Gaussian.

  All of these are parameters or package constants.
- **The receive buffer** (two bins, 120 kB) is an addition. The published
  configuration lists only the two 182 kB buffers. It is needed here because
  the single bit-serial decoder cannot take a bin at memory speed.
- **One decoder** sits in front of the global buffer. The published design
  puts a tile decompression unit in each PE.
- **North-west corner pixels** of a tile are not handled separately. To
  cover them, make the east edge span the halo rows as well.

## Verification

Each module has a self-checking testbench in `tb/`. It compares against a
model written independently in the testbench and ends with a `TB_RESULT` line.

| Testbench | What it checks |
|---|---|
| `tb_noise_gen` | Against a reference model of the distribution; range α…α+R, one-cycle latency, different seeds giving different sequences, σ_max = 0 removing the spread |
| `tb_huff_encoder` | Against a reference encoding with two code tables and output stalls, including the one-byte-per-cycle rate |
| `tb_huff_decoder` | Two canonical codes, random tiles, input gaps and output stalls; eight cycles for an 8-bit code |
| `tb_onchip_buffer` | Full 182 kB size: a pattern written and read back in another order, read latency, read-during-write |
| `tb_bin_packer` | Byte-exact against a reference packer, with every close reason, splits and full slots |
| `tb_bin_rx_buffer` | Bytes unchanged and in order, ready never dropping inside a bin (a bin in exactly BIN cycles), two bins of capacity |
| `tb_bin_reader` | Payload recovery with random empty bytes, tile-start marks, gaps and stalls, a corrupted table |
| `tb_sfc_addr_gen` | Every mode against nested loops, including the rate and bin-address steps |
| `tb_halo_buffer` | Random layer shapes wider than the buffer, with spills and refills |
| `tb_neuroplug_top` | End to end, below |
| `tb_workload_large_tiles` | End to end with 95 kB tiles, the largest in the evaluated layers: every tile spans two or more bins |

`tb_neuroplug_top` runs the top level at its default sizes: 60 kB bins,
182 kB buffers and κ = 8. It works through these steps:

1. It loads a key and a code table.
2. It writes one layer of 24 tiles of 12 kB. Some tiles are sparse and some
   dense.
3. It checks every bin in the memory image against an independent encoding
   of the tiles, plus the bin addresses and the exact bin time.
4. It reads all bins back, checking that each takes exactly BIN cycles, and
   compares every decompressed tile in the global
   buffer with the original.
5. It walks a 3 × 16 tile layer through the halo buffer, which has to spill
   two columns.

It also counts each mechanism (close on κ, on a full payload and at layer
end; a split tile; full slots; input stalls; bin reads; halo spills and
refills) and fails if any never happened. It takes a few seconds.

To simulate with Verilator 5, for example the top level:

```
verilator --binary --timing -Irtl -Itb -y rtl -y tb \
    rtl/neuroplug_pkg.sv tb/tb_huff_pkg.sv tb/tb_neuroplug_top.sv \
    --top-module tb_neuroplug_top
./obj_dir/Vtb_neuroplug_top
```

The other testbenches build the same way:

- list `rtl/neuroplug_pkg.sv` first;
- add `tb/tb_huff_pkg.sv` for the Huffman testbenches;
- give the testbench as the top module.

**How far to trust it.** Every block passes its testbench. Each testbench
was also run against a copy of its block with a deliberate bug, and it
caught the bug. The design has not been run against real network data or
with a real compute engine, encryption engine or memory controller.
Security properties, such as how well the noise hides layer sizes, are not
checked: that is a statistical question, not a functional one.
