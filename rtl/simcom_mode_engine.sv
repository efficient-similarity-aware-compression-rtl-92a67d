// simcom_mode_engine: one approximate compression mode of SimCom.
//
// The engine compresses a BLOCK_BYTES-byte write block for one fixed pixel
// format of CC channels x BPB bytes. The block is cut into N = BLOCK_BYTES /
// (CC*BPB) words from byte 0 upward; the R = BLOCK_BYTES mod (CC*BPB) bytes
// left at the end form the remainder (uniform data partition). The first word
// becomes the base. Each later word is compared with the current base by the
// Word-PU: if it is similar the run is incremented, otherwise the current
// base/run pair is emitted and the word becomes the new base with run 0.
// After the last word the final pair is emitted, and the Remainder-PU decides
// whether the remainder has to be stored; if so it is appended and the MSB of
// the last run byte (the remainder bit) is set.
//
// Compressed layout (bytes):
//   [0]            metadata {mode[2:0], number of bases[4:0]}
//   [1 ..]         per pair: W base bytes, then 1 run byte {rem_bit, run[6:0]}
//   [end]          R remainder bytes, only if the remainder bit is set
// The metadata fields, the "run starts at 0" rule and the remainder bit come
// from the paper; the one-byte run field for every mode, the byte order and
// the mode numbering are choices of this implementation.
//
// diff_sum accumulates the max channel difference of words 1..N-1 against
// the base they were compared with; the mode selector turns it into the
// mean normalized difference.
//
// Timing: start is sampled on a clock edge; one word is processed per cycle.
// done pulses for one cycle N edges after the start edge (N+1 when the mode
// has a remainder). cdata, comp_size, compressible and diff_sum stay valid
// from done until the next start. Bytes that would land beyond BLOCK_BYTES
// are dropped; such a block is reported as not compressible.
// The three mode bits of the metadata byte are the constant MODE_ID, so
// synthesis reports them as constant outputs; that is intended.
module simcom_mode_engine
  import simcom_pkg::*;
#(
  parameter int CC          = 3,
  parameter int BPB         = 1,
  parameter int MODE_ID     = 1,
  parameter int BLOCK_BYTES = simcom_pkg::BLOCK_BYTES_DEFAULT,
  parameter int AF_W        = simcom_pkg::AF_WIDTH
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [8*BLOCK_BYTES-1:0] data,
  input  logic [AF_W-1:0]          af,
  output logic                     busy,
  output logic                     done,
  output logic [8*BLOCK_BYTES-1:0] cdata,
  output logic [SIZE_W-1:0]        comp_size,
  output logic                     compressible,
  output logic [SUM_W-1:0]         diff_sum
);

  localparam int W  = CC * BPB;
  localparam int N  = BLOCK_BYTES / W;
  localparam int R  = BLOCK_BYTES % W;
  localparam int RB = (R > 0) ? R : 1;

  typedef enum logic [1:0] {S_IDLE, S_SCAN, S_FLUSH, S_REM} state_e;

  state_e                   state;
  logic [8*BLOCK_BYTES-1:0] dat;
  logic [AF_W-1:0]          af_q;
  logic [8*W-1:0]           base;
  logic [6:0]               run;
  logic [6:0]               idx;
  logic [SIZE_W-1:0]        off;
  logic [6:0]               nb;
  logic [SUM_W-1:0]         sum;
  logic [7:0]               cbuf [BLOCK_BYTES];

  logic [8*W-1:0]           cur_word;
  logic [8*BPB-1:0]         max_diff;
  logic                     similar;
  logic                     store_rem;

  assign cur_word = dat[int'(idx)*8*W +: 8*W];

  simcom_word_pu #(.CC(CC), .BPB(BPB), .AF_W(AF_W)) u_word_pu (
    .word     (cur_word),
    .base     (base),
    .af       (af_q),
    .max_diff (max_diff),
    .similar  (similar)
  );

  if (R > 0) begin : g_rem
    simcom_remainder_pu #(.CC(CC), .BPB(BPB), .REM_BYTES(R), .AF_W(AF_W)) u_rem_pu (
      .rem       (dat[8*N*W +: 8*RB]),
      .base      (base),
      .af        (af_q),
      .store_rem (store_rem)
    );
  end else begin : g_norem
    assign store_rem = 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      dat   <= '0;
      af_q  <= '0;
      base  <= '0;
      run   <= '0;
      idx   <= '0;
      off   <= '0;
      nb    <= '0;
      sum   <= '0;
      done  <= 1'b0;
      for (int j = 0; j < BLOCK_BYTES; j++) cbuf[j] <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: begin
          if (start) begin
            dat   <= data;
            af_q  <= af;
            base  <= data[8*W-1:0];
            run   <= '0;
            idx   <= 7'd1;
            off   <= SIZE_W'(1);
            nb    <= '0;
            sum   <= '0;
            for (int j = 0; j < BLOCK_BYTES; j++) cbuf[j] <= '0;
            state <= (N > 1) ? S_SCAN : S_FLUSH;
          end
        end

        S_SCAN: begin
          sum <= sum + SUM_W'(max_diff);
          if (similar) begin
            run <= run + 7'd1;
          end else begin
            for (int k = 0; k <= W; k++) begin
              if (int'(off) + k < BLOCK_BYTES)
                cbuf[int'(off) + k] <= (k < W) ? base[8*k +: 8] : {1'b0, run};
            end
            off  <= off + SIZE_W'(W + 1);
            nb   <= nb + 7'd1;
            base <= cur_word;
            run  <= '0;
          end
          if (int'(idx) == N - 1) state <= S_FLUSH;
          else                    idx   <= idx + 7'd1;
        end

        S_FLUSH: begin
          for (int k = 0; k <= W; k++) begin
            if (int'(off) + k < BLOCK_BYTES)
              cbuf[int'(off) + k] <= (k < W) ? base[8*k +: 8] : {1'b0, run};
          end
          off <= off + SIZE_W'(W + 1);
          nb  <= nb + 7'd1;
          if (R > 0) begin
            state <= S_REM;
          end else begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end

        S_REM: begin
          if (store_rem) begin
            for (int k = 0; k < RB; k++) begin
              if (int'(off) + k < BLOCK_BYTES)
                cbuf[int'(off) + k] <= dat[8*(N*W + k) +: 8];
            end
            if (int'(off) - 1 < BLOCK_BYTES)
              cbuf[int'(off) - 1] <= {1'b1, run};
            off <= off + SIZE_W'(R);
          end
          state <= S_IDLE;
          done  <= 1'b1;
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    meta_t meta;
    meta.mode   = 3'(MODE_ID);
    meta.nbases = nb[4:0];
    cdata[7:0]  = meta;
    for (int j = 1; j < BLOCK_BYTES; j++) cdata[8*j +: 8] = cbuf[j];
  end

  assign busy         = (state != S_IDLE);
  assign comp_size    = off;
  assign compressible = (int'(off) < BLOCK_BYTES);
  assign diff_sum     = sum;

endmodule
