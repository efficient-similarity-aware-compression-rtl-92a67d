// simcom_pkg: constants, types and small helper functions shared by the
// similarity-aware compression (SimCom) datapath.
//
// A write block is BLOCK_BYTES bytes, packed little-endian into a vector:
// byte i occupies bits [8*i+7 : 8*i]. Six compression modes partition the
// block into words of CC channels of BPB bytes each (CC in {1,3,4}, BPB in
// {1,2}); the mode numbers follow the row order of the mode statistics the
// design was characterised with (1C1B, 3C1B, 4C1B, 1C2B, 3C2B, 4C2B). The
// numbering itself is a choice of this implementation.
//
// The approximation factor AF is an unsigned Q1.16 fraction (65536 = 1.0),
// also a choice of this implementation. Linted on its own, the package's
// constants show up as unused; the modules that import it use them.
package simcom_pkg;

  localparam int BLOCK_BYTES_DEFAULT = 64;  // cache-block sized write access
  localparam int NUM_MODES   = 6;
  localparam int AF_WIDTH    = 17;   // Q1.16
  localparam int AF_FRAC     = 16;
  localparam int ADDR_W      = 32;   // 4 GB main memory
  localparam int SIZE_W      = 8;    // compressed size in bytes, may exceed 64
  localparam int SUM_W       = 32;   // accumulated word differences

  typedef enum logic [2:0] {
    MODE_1C1B = 3'd0,
    MODE_3C1B = 3'd1,
    MODE_4C1B = 3'd2,
    MODE_1C2B = 3'd3,
    MODE_3C2B = 3'd4,
    MODE_4C2B = 3'd5
  } mode_e;

  // First byte of every approximately compressed block.
  typedef struct packed {
    logic [2:0] mode;
    logic [4:0] nbases;
  } meta_t;

  // One region of the quality table.
  typedef struct packed {
    logic              valid;
    logic [ADDR_W-1:0] start_addr;
    logic [ADDR_W-1:0] end_addr;    // inclusive
    logic [AF_WIDTH-1:0] af;
  } qt_entry_t;

  // Channel count of a mode.
  function automatic int mode_cc(int m);
    case (m)
      0, 3:    return 1;
      1, 4:    return 3;
      default: return 4;
    endcase
  endfunction

  // Bytes per channel of a mode.
  function automatic int mode_bpb(int m);
    return (m >= 3) ? 2 : 1;
  endfunction

  // Word size in bytes.
  function automatic int mode_wbytes(int m);
    return mode_cc(m) * mode_bpb(m);
  endfunction

  // Number of whole words in a block.
  function automatic int mode_nwords(int m, int block_bytes);
    return block_bytes / mode_wbytes(m);
  endfunction

  // Bytes left over as the remainder.
  function automatic int mode_rbytes(int m, int block_bytes);
    return block_bytes % mode_wbytes(m);
  endfunction

  // maxValue of one channel: 2^BPC - 1.
  function automatic longint mode_maxval(int m);
    return (mode_bpb(m) == 2) ? 64'd65535 : 64'd255;
  endfunction

endpackage
