// simcom_decompressor: approximate Decompression Logic of SimCom.
//
// Rebuilds a BLOCK_BYTES-byte block from the layout written by
// simcom_mode_engine. The metadata byte gives the mode (hence the word size W,
// the word count N and the remainder size R) and the number of base/run
// pairs. Each base is written run+1 times, one word per cycle, from word 0
// upward. Afterwards, if the mode has a remainder, the remainder bit (MSB of
// the last run byte) decides its source: set - the remainder bytes stored
// after the last pair; clear - the leading R bytes of the last base. This
// fill rule is the paper's; the layout details are those of the compressor.
// If the runs cover fewer than N words the missing words read as zero; runs
// beyond word N-1 are ignored.
//
// Timing: start is sampled on a clock edge while busy is low. The N words
// take N cycles and the remainder one more; done pulses N+1 edges after the
// start edge and data holds until the next start.
// run_byte holds the whole run byte of the current pair; its MSB, the
// remainder bit, only matters for the last pair and is read there, so lint
// reports bit 7 of run_byte as unused.
module simcom_decompressor
  import simcom_pkg::*;
#(
  parameter int BLOCK_BYTES = simcom_pkg::BLOCK_BYTES_DEFAULT
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [8*BLOCK_BYTES-1:0] cdata,
  output logic                     busy,
  output logic                     done,
  output logic [8*BLOCK_BYTES-1:0] data
);

  localparam int MAXW = 8;

  typedef enum logic [1:0] {S_IDLE, S_FILL, S_REM} state_e;

  state_e                   state;
  logic [8*BLOCK_BYTES-1:0] cin;
  logic [7:0]               dout [BLOCK_BYTES];
  logic [3:0]               w, r;
  logic [6:0]               n;
  logic [7:0]               in_off;     // byte offset of the current pair
  logic [7:0]               last_base;  // offset of the last base read
  logic [6:0]               cnt;        // copies already written of this base
  logic [6:0]               out_w;      // next output word
  logic [5:0]               pairs_left;
  meta_t                    meta_in;

  assign meta_in = meta_t'(cdata[7:0]);

  // Byte p of the latched compressed block, zero beyond its end.
  function automatic logic [7:0] cbyte(logic [8*BLOCK_BYTES-1:0] c, int p);
    return (p < BLOCK_BYTES) ? c[8*p +: 8] : 8'h00;
  endfunction

  logic [7:0] run_byte;
  assign run_byte = cbyte(cin, int'(in_off) + int'(w));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      cin        <= '0;
      w          <= '0;
      r          <= '0;
      n          <= '0;
      in_off     <= '0;
      last_base  <= '0;
      cnt        <= '0;
      out_w      <= '0;
      pairs_left <= '0;
      done       <= 1'b0;
      for (int j = 0; j < BLOCK_BYTES; j++) dout[j] <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: begin
          if (start) begin
            cin        <= cdata;
            w          <= 4'(mode_wbytes(int'(meta_in.mode)));
            r          <= 4'(mode_rbytes(int'(meta_in.mode), BLOCK_BYTES));
            n          <= 7'(mode_nwords(int'(meta_in.mode), BLOCK_BYTES));
            in_off     <= 8'd1;
            last_base  <= 8'd1;
            cnt        <= '0;
            out_w      <= '0;
            pairs_left <= 6'(meta_in.nbases);
            for (int j = 0; j < BLOCK_BYTES; j++) dout[j] <= '0;
            state      <= S_FILL;
          end
        end

        S_FILL: begin
          if (pairs_left == 0 || out_w == n) begin
            state <= S_REM;
          end else begin
            for (int k = 0; k < MAXW; k++) begin
              if (k < int'(w) && int'(out_w) * int'(w) + k < BLOCK_BYTES)
                dout[int'(out_w) * int'(w) + k] <= cbyte(cin, int'(in_off) + k);
            end
            last_base <= in_off;
            out_w     <= out_w + 7'd1;
            if (cnt == run_byte[6:0]) begin
              cnt        <= '0;
              in_off     <= in_off + 8'(w) + 8'd1;
              pairs_left <= pairs_left - 6'd1;
            end else begin
              cnt <= cnt + 7'd1;
            end
            if (out_w + 7'd1 == n) state <= S_REM;
          end
        end

        S_REM: begin
          // The remainder bit sits in the run byte of the last base.
          for (int k = 0; k < MAXW; k++) begin
            if (k < int'(r) && int'(n) * int'(w) + k < BLOCK_BYTES) begin
              if (cbyte(cin, int'(last_base) + int'(w))[7])
                dout[int'(n) * int'(w) + k] <= cbyte(cin, int'(last_base) + int'(w) + 1 + k);
              else
                dout[int'(n) * int'(w) + k] <= cbyte(cin, int'(last_base) + k);
            end
          end
          state <= S_IDLE;
          done  <= 1'b1;
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    for (int j = 0; j < BLOCK_BYTES; j++) data[8*j +: 8] = dout[j];
  end

  assign busy = (state != S_IDLE);

endmodule
