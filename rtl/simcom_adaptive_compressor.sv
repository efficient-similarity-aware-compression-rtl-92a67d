// simcom_adaptive_compressor: Adaptive Approximate Compression Logic.
//
// The bitmap format of a write block (channel count and bytes per channel)
// is not known to the memory, so all six predefined modes - 1C1B, 3C1B,
// 4C1B, 1C2B, 3C2B and 4C2B - compress the block in parallel, each in its
// own simcom_mode_engine. When the last of them has finished, the mode
// selector picks the mode with the smallest mean normalized difference (the
// mode that matches the pixel format tends to have it), and that mode's
// compressed block, size and compressibility are registered as the result.
// Running the six modes side by side is the paper's main configuration.
//
// Timing: start is sampled on a clock edge while busy is low. The slowest
// mode (1C1B, 64 words) finishes 64 edges later; done pulses one edge after
// that, 65 edges after start. The outputs hold until the next done.
module simcom_adaptive_compressor
  import simcom_pkg::*;
#(
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
  output mode_e                    mode
);

  logic                     m_done  [NUM_MODES];
  logic [8*BLOCK_BYTES-1:0] m_cdata [NUM_MODES];
  logic [SIZE_W-1:0]        m_size  [NUM_MODES];
  logic                     m_comp  [NUM_MODES];
  logic [SUM_W-1:0]         m_sum   [NUM_MODES];
  logic [NUM_MODES-1:0]     seen, seen_now;
  logic                     running;
  mode_e                    sel;

  for (genvar m = 0; m < NUM_MODES; m++) begin : g_mode
    simcom_mode_engine #(
      .CC          (mode_cc(m)),
      .BPB         (mode_bpb(m)),
      .MODE_ID     (m),
      .BLOCK_BYTES (BLOCK_BYTES),
      .AF_W        (AF_W)
    ) u_engine (
      .clk          (clk),
      .rst_n        (rst_n),
      .start        (start && !busy),
      .data         (data),
      .af           (af),
      .busy         (),
      .done         (m_done[m]),
      .cdata        (m_cdata[m]),
      .comp_size    (m_size[m]),
      .compressible (m_comp[m]),
      .diff_sum     (m_sum[m])
    );
    assign seen_now[m] = seen[m] | m_done[m];
  end

  simcom_mode_selector #(.BLOCK_BYTES(BLOCK_BYTES)) u_selector (
    .diff_sum  (m_sum),
    .comp_size (m_size),
    .sel_mode  (sel)
  );

  assign busy = running;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running      <= 1'b0;
      seen         <= '0;
      done         <= 1'b0;
      cdata        <= '0;
      comp_size    <= '0;
      compressible <= 1'b0;
      mode         <= MODE_1C1B;
    end else begin
      done <= 1'b0;
      if (!running) begin
        if (start) begin
          running <= 1'b1;
          seen    <= '0;
        end
      end else if (&seen_now) begin
        running      <= 1'b0;
        seen         <= '0;
        done         <= 1'b1;
        mode         <= sel;
        cdata        <= m_cdata[sel];
        comp_size    <= m_size[sel];
        compressible <= m_comp[sel];
      end else begin
        seen <= seen_now;
      end
    end
  end

endmodule
