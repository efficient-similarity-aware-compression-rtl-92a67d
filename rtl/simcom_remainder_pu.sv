// simcom_remainder_pu: Remainder Processing Unit.
//
// When the block size is not a multiple of the word size, the last
// REM_BYTES bytes form a partial word, the remainder. This unit compares
// the remainder with the last base using the same normalized difference as
// the Word-PU, restricted to the channels the remainder holds (the leading
// REM_BYTES bytes of the base). store_rem is raised when the difference is
// larger than AF: the remainder must then be written after the last
// base/run pair and the remainder bit set. Otherwise the decompressor fills
// the remainder from the last base.
//
// Comparing against the leading bytes of the base is this implementation's
// reading of "the number of channels in the remainder"; REM_BYTES must be a
// multiple of BPB, which holds for all six modes with 64-byte blocks.
//
// The base port is the whole word so that the engine can connect its base
// register directly; the bytes past REM_BYTES are not used, and lint reports
// them as unused.
//
// Purely combinational.
module simcom_remainder_pu
  import simcom_pkg::*;
#(
  parameter int CC        = 3,
  parameter int BPB       = 1,
  parameter int REM_BYTES = 1,
  parameter int AF_W      = simcom_pkg::AF_WIDTH
) (
  input  logic [8*REM_BYTES-1:0] rem,
  input  logic [8*CC*BPB-1:0]    base,
  input  logic [AF_W-1:0]        af,
  output logic                   store_rem
);

  localparam int RCH = REM_BYTES / BPB;

  logic             similar;

  simcom_word_pu #(.CC(RCH), .BPB(BPB), .AF_W(AF_W)) u_pu (
    .word     (rem),
    .base     (base[8*REM_BYTES-1:0]),
    .af       (af),
    .max_diff (),
    .similar  (similar)
  );

  assign store_rem = !similar;

endmodule
