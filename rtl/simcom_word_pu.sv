// simcom_word_pu: Word Processing Unit, the similarity metric of SimCom.
//
// For a word p and a base q of CC channels of BPB bytes each it computes
//     normDiff = max_i |p[i] - q[i]| / maxValue,   maxValue = 2^(8*BPB) - 1
// and reports whether normDiff is no larger than the approximation factor
// AF. The division is avoided: with AF in Q1.16 the test is done exactly as
//     max_diff * 2^16 <= AF * maxValue.
// The metric and the "no larger than" rule of the compression workflow are
// the paper's; the fixed-point AF encoding and the little-endian byte order
// of 16-bit channels are choices of this implementation.
//
// Purely combinational: max_diff and similar follow word, base and af in
// the same cycle.
module simcom_word_pu
  import simcom_pkg::*;
#(
  parameter int CC   = 3,   // channels per word
  parameter int BPB  = 1,   // bytes per channel (1: BPC 8, 2: BPC 16)
  parameter int AF_W = simcom_pkg::AF_WIDTH
) (
  input  logic [8*CC*BPB-1:0] word,
  input  logic [8*CC*BPB-1:0] base,
  input  logic [AF_W-1:0]     af,
  output logic [8*BPB-1:0]    max_diff,
  output logic                similar
);

  localparam int CHW = 8 * BPB;
  localparam logic [CHW-1:0] MAXV = '1;
  localparam int PW = CHW + AF_W + 1;

  logic [CHW-1:0] ch_p, ch_q, d;
  logic [PW-1:0]  lhs, rhs;

  always_comb begin
    max_diff = '0;
    for (int i = 0; i < CC; i++) begin
      ch_p = word[i*CHW +: CHW];
      ch_q = base[i*CHW +: CHW];
      d    = (ch_p >= ch_q) ? ch_p - ch_q : ch_q - ch_p;
      if (d > max_diff) max_diff = d;
    end
    lhs     = PW'(max_diff) << AF_FRAC;
    rhs     = PW'(af) * PW'(MAXV);
    similar = (lhs <= rhs);
  end

endmodule
