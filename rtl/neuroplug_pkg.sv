// neuroplug_pkg: constants and types shared by the NeuroPlug secure data path.
//
// Sizes that the published design states are used as they are: bins of 60 kB,
// a global buffer and a compression buffer of 182 kB each, and an upper limit
// of 8000 bytes for the key-dependent noise. Everything else here (the bin
// table layout, the bound kappa on tiles per bin, the Huffman code width) is a
// choice of this implementation and is marked as such below.
//
// Lint note: every module imports the whole package but uses only some of
// these constants, so Verilator lists the others as unused parameters.
package neuroplug_pkg;

  // ---- sizes taken from the design ------------------------------------------
  localparam int unsigned BIN_BYTES      = 60 * 1024;   // bin size, 60 kB
  localparam int unsigned GLB_BYTES      = 182 * 1024;  // global buffer
  localparam int unsigned CBUF_BYTES     = 182 * 1024;  // compression buffer
  localparam int unsigned NOISE_MAX      = 8000;        // upper limit of alpha (bytes)

  // ---- implementation choices -----------------------------------------------
  localparam int unsigned KAPPA          = 8;           // max tiles starting in one bin
  localparam int unsigned HUFF_MAX_LEN   = 16;          // longest Huffman code (bits)
  localparam int unsigned NSYM           = 256;         // byte alphabet

  // Bin table: bytes 0-1 number of tiles that start in the bin, bytes 2-3 the
  // offset one past the last payload byte, then KAPPA 16-bit start offsets.
  // All multi-byte fields are little endian.
  localparam int unsigned BIN_HDR_BYTES  = 4 + 2 * KAPPA;

  // One byte of a stream, with a flag for the first byte of a tile.
  typedef struct packed {
    logic       tile_first;
    logic [7:0] data;
  } tile_byte_t;

  // Entry of the Huffman encoder table: code right-aligned, length in bits
  // (0 means the symbol has no code).
  typedef struct packed {
    logic [4:0]              len;
    logic [HUFF_MAX_LEN-1:0] code;
  } huff_code_t;

  // Space filling curve walks.
  typedef enum logic [1:0] {
    SFC_IFMAP  = 2'd0,   // deep tiles: channels innermost, then columns, then rows
    SFC_FILTER = 2'd1,   // filters: channels innermost, then output maps
    SFC_OFMAP  = 2'd2,   // ofmap tiles: output maps innermost, then columns, then rows
    SFC_FUSED  = 2'd3    // filters of two fused layers, the first then the second
  } sfc_mode_e;

  // Key registers the host writes through the configuration port.
  typedef struct packed {
    logic [15:0] alpha;      // constant part of the additive noise (bytes)
    logic [15:0] range_r;    // support of N' is [0, range_r]
    logic [15:0] sigma_max;  // upper bound of the uniform draw that sets sigma
    logic [31:0] seed;       // noise generator seed
  } noise_key_t;

  // Configuration address map of the top (word addresses, 32-bit data).
  localparam logic [11:0] CFG_ALPHA     = 12'h000;  // noise key: alpha
  localparam logic [11:0] CFG_RANGE     = 12'h001;  // noise key: R
  localparam logic [11:0] CFG_SIGMA     = 12'h002;  // noise key: sigma_max
  localparam logic [11:0] CFG_SEED      = 12'h003;  // noise key: seed (write reseeds)
  localparam logic [11:0] CFG_TILE_LEN  = 12'h004;  // bytes per uncompressed tile
  localparam logic [11:0] CFG_GLB_PTR   = 12'h005;  // global buffer write pointer
  localparam logic [11:0] CFG_RD_WALK   = 12'h010;  // 0x010-0x019: ifmap/filter walker
  localparam logic [11:0] CFG_WR_WALK   = 12'h020;  // 0x020-0x029: ofmap walker
  // walker registers, offsets from CFG_RD_WALK / CFG_WR_WALK
  localparam logic [3:0]  WK_MODE = 4'h0, WK_NH = 4'h1, WK_NW = 4'h2, WK_NC = 4'h3,
                          WK_NK = 4'h4, WK_NK2 = 4'h5, WK_NREP = 4'h6,
                          WK_BASE_LO = 4'h7, WK_BASE_HI = 4'h8, WK_START = 4'h9;
  localparam logic [3:0]  CFG_PAGE_ENC  = 4'h1;     // 0x1ss: encoder table, {len[20:16], code[15:0]}
  localparam logic [3:0]  CFG_PAGE_DCNT = 4'h2;     // 0x2ll: decoder count of length ll
  localparam logic [3:0]  CFG_PAGE_DSYM = 4'h3;     // 0x3ii: decoder sorted symbol ii

  // Events of the data path, one cycle each (ev_slots_full: every cycle held off).
  typedef struct packed {
    logic bin_closed;
    logic close_kappa;
    logic close_full;
    logic close_layer;
    logic split_tile;
    logic slots_full;
    logic bin_read;
    logic hdr_err;
    logic decode_err;
  } np_events_t;

endpackage
