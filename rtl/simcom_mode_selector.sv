// simcom_mode_selector: picks the compression mode for an approximable block.
//
// Every mode reports the sum of the max channel differences of its words
// 1..N-1 against their bases. The mean normalized difference of mode m is
//     mean_m = diff_sum_m / D_m,   D_m = maxValue_m * (N_m - 1)
// The selector returns the mode with the smallest mean; when several modes
// share it, the one with the smallest compressed size; on a remaining tie
// the lowest mode number. The means are compared exactly by cross
// multiplication (diff_sum_a * D_b < diff_sum_b * D_a), so no divider is
// needed. Minimal mean first, size as tie-break is the paper's rule; the
// denominator N_m - 1 and the final tie-break are choices of this
// implementation.
//
// Purely combinational.
module simcom_mode_selector
  import simcom_pkg::*;
#(
  parameter int BLOCK_BYTES = simcom_pkg::BLOCK_BYTES_DEFAULT
) (
  input  logic [SUM_W-1:0]  diff_sum  [NUM_MODES],
  input  logic [SIZE_W-1:0] comp_size [NUM_MODES],
  output mode_e             sel_mode
);

  function automatic logic [63:0] denom(int m);
    return 64'(mode_maxval(m) * (longint'(mode_nwords(m, BLOCK_BYTES)) - 64'd1));
  endfunction

  always_comb begin
    int          best;
    logic [63:0] lhs, rhs;
    best = 0;
    for (int m = 1; m < NUM_MODES; m++) begin
      lhs = 64'(diff_sum[m]) * denom(best);
      rhs = 64'(diff_sum[best]) * denom(m);
      if (lhs < rhs || (lhs == rhs && comp_size[m] < comp_size[best]))
        best = m;
    end
    sel_mode = mode_e'(best[2:0]);
  end

endmodule
