// tb_simcom_workload: image workloads in every bitmap format through the
// adaptive compressor and the approximate decompressor.
//
// For each format (1,8) (3,8) (4,8) (1,16) (2,16) (3,16) (4,16) - channel
// count and bits per channel - a synthetic raster image is generated: rows of
// 256 pixels that drift slowly in colour, carry small per-channel noise and
// have an edge to a new colour every 16 to 80 pixels, stored channel-
// interleaved with 16-bit channels little-endian. The byte stream is cut
// into 64-byte blocks, as the caches would write it back, and every block is
// compressed with AF = 0.05 (3277 in Q1.16).
//
// Checks, independent of the reference model:
//   * done of the compressor rises 65 edges after the start edge and done of
//     the decompressor N+1 edges after its start edge;
//   * a compressed block is smaller than 64 bytes and its metadata byte names
//     the mode reported;
//   * after decompression, every channel of the chosen mode's word layout is
//     within AF * maxValue of the original (the approximation bound);
//   * each format's own mode is chosen for at least one of its blocks, and
//     each format's blocks need fewer stored bytes on average than raw ones.
// At the end the share of blocks each mode took per format is printed as a
// table, with the average stored size.
module tb_simcom_workload;
  import simcom_pkg::*;

  localparam int AF     = 3277;
  localparam int BLOCKS = 96;    // blocks per format
  localparam int WIDTH  = 256;   // pixels per image row

  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  logic c_start = 0, c_busy, c_done, c_ok;
  logic [511:0] c_in = '0, c_out;
  logic [7:0]   c_size;
  mode_e        c_mode;
  logic d_start = 0, d_busy, d_done;
  logic [511:0] d_in = '0, d_out;

  simcom_adaptive_compressor u_comp (
    .clk(clk), .rst_n(rst_n), .start(c_start), .data(c_in), .af(17'(AF)),
    .busy(c_busy), .done(c_done), .cdata(c_out), .comp_size(c_size),
    .compressible(c_ok), .mode(c_mode));

  simcom_decompressor u_dec (
    .clk(clk), .rst_n(rst_n), .start(d_start), .cdata(d_in),
    .busy(d_busy), .done(d_done), .data(d_out));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int f_cc(int f);
    int t[7] = '{1, 3, 4, 1, 2, 3, 4};
    return t[f];
  endfunction
  function automatic int f_bpb(int f);
    return (f < 3) ? 1 : 2;
  endfunction
  // The mode that matches a format; (2,16) has none of its own, any 16-bit
  // mode counts.
  function automatic bit own_mode(int f, int m);
    if (f == 4) return m >= 3;
    return m == ((f < 3) ? 0 : 3) + ((f_cc(f) == 1) ? 0 : (f_cc(f) == 3) ? 1 : 2);
  endfunction
  function automatic int m_cc(int m);
    int t[6] = '{1, 3, 4, 1, 3, 4};
    return t[m];
  endfunction

  // Channel of the mode's word layout: ch-th channel of the word at byte pos.
  function automatic int chv(logic [511:0] d, int pos, int bpb);
    return (bpb == 1) ? int'(d[8*pos +: 8]) : int'(d[8*pos +: 8]) + 256 * int'(d[8*(pos+1) +: 8]);
  endfunction

  initial begin
    int counts [7][7];
    longint stored [7];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 7; f++) begin
      automatic int cc = f_cc(f), bpb = f_bpb(f);
      automatic int maxv = (bpb == 2) ? 65535 : 255;
      automatic int noise = (bpb == 2) ? 700 : 3;
      automatic int nbytes = BLOCKS * 64;
      automatic logic [7:0] img [] = new[nbytes];
      automatic int col [4], slope [4];
      automatic int next_edge = 0, x = 0, pos = 0;
      for (int m = 0; m < 7; m++) counts[f][m] = 0;
      stored[f] = 0;
      // Generate the raster image as a byte stream.
      while (pos < nbytes) begin
        if (x == next_edge) begin
          for (int c = 0; c < 4; c++) begin
            col[c]   = $urandom_range(maxv, 0);
            slope[c] = $urandom_range(2, 0) - 1;
          end
          next_edge = x + $urandom_range(80, 16);
        end
        for (int c = 0; c < cc; c++) begin
          automatic int v = col[c] + slope[c] * (x % 16) * ((bpb == 2) ? 40 : 0) + $urandom_range(2*noise, 0) - noise;
          if (v < 0) v = 0;
          if (v > maxv) v = maxv;
          for (int b = 0; b < bpb; b++) begin
            if (pos < nbytes) img[pos] = 8'(v >> (8*b));
            pos++;
          end
        end
        x = (x + 1) % WIDTH;
        if (x == 0) next_edge = 0;
      end
      // Compress and decompress every block.
      for (int blk = 0; blk < BLOCKS; blk++) begin
        automatic logic [511:0] orig;
        automatic int t, m, w, n, r, bb, lim, worst;
        for (int i = 0; i < 64; i++) orig[8*i +: 8] = img[64*blk + i];
        @(negedge clk);
        c_in = orig; c_start = 1;
        @(negedge clk);
        c_start = 0;
        t = 1;
        while (!c_done) begin @(negedge clk); t++; end
        checks++;
        if (t != 66) begin failures++; $display("FAIL compressor latency %0d", t); end
        m = int'(c_mode);
        if (!c_ok) begin
          counts[f][6]++;
          stored[f] += 64;
          continue;
        end
        counts[f][m]++;
        stored[f] += c_size;
        checks++;
        if (c_size >= 64 || int'(c_out[7:5]) != m) begin
          failures++; $display("FAIL format %0d block %0d: size %0d meta %h mode %0d", f, blk, c_size, c_out[7:0], m);
        end
        bb = (m < 3) ? 1 : 2;
        w  = m_cc(m) * bb;
        n  = 64 / w;
        r  = 64 % w;
        d_in = c_out; d_start = 1;
        @(negedge clk);
        d_start = 0;
        t = 1;
        while (!d_done) begin @(negedge clk); t++; end
        checks++;
        if (t != n + 2) begin failures++; $display("FAIL decompressor latency %0d, expected %0d", t, n + 2); end
        // Approximation bound on every channel of the mode's layout.
        lim = (bb == 2) ? 65535 : 255;
        worst = 0;
        for (int p = 0; p + bb <= 64; p += bb) begin
          automatic int e = chv(d_out, p, bb) - chv(orig, p, bb);
          if (e < 0) e = -e;
          if (e > worst) worst = e;
        end
        checks++;
        if (longint'(worst) * 65536 > longint'(AF) * lim) begin
          failures++; $display("FAIL format %0d block %0d: error %0d beyond AF", f, blk, worst);
        end
      end
    end
    $display("mode share (%%) per format, AF = 0.05");
    $display("format   1C1B 3C1B 4C1B 1C2B 3C2B 4C2B incomp  avg bytes");
    for (int f = 0; f < 7; f++) begin
      automatic bit own = 0;
      $write("(%0d,%0d) ", f_cc(f), 8 * f_bpb(f));
      for (int m = 0; m < 7; m++) $write(" %4.1f", 100.0 * counts[f][m] / BLOCKS);
      $display("  %6.1f", real'(stored[f]) / BLOCKS);
      for (int m = 0; m < 6; m++) if (counts[f][m] > 0 && own_mode(f, m)) own = 1;
      checks++;
      if (!own) begin failures++; $display("FAIL format %0d never took its own mode", f); end
      checks++;
      if (stored[f] >= 64 * BLOCKS) begin failures++; $display("FAIL format %0d not compressed", f); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
