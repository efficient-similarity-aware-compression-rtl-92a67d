// tb_simcom_mode_engine: one engine per mode (1C1B .. 4C2B) compresses the
// same blocks; each result (compressed bytes, size, compressibility,
// difference sum) is compared with the reference model, and the start-to-done
// latency with N edges (N+1 when the mode has a remainder). Blocks cover
// bitmap-like data of every format, flat blocks, random noise, AF = 0 and
// AF = 1.0; stored and elided remainders are both counted. A seventh engine,
// 3C1B on a 16-byte block, replays the published 16-byte example: five
// similar 3-byte words and a dissimilar 1-byte remainder compress to 6 bytes
// (metadata, one base, its run with the remainder bit set, the remainder),
// 10 bytes less than the input.
module tb_simcom_mode_engine;
  import simcom_ref_pkg::*;

  int checks = 0, failures = 0;
  int rem_stored = 0, rem_elided = 0, incompressible = 0;
  logic clk = 0, rst_n = 0, start = 0;
  logic [511:0] data;
  logic [16:0]  af;

  logic         done  [6];
  logic         busy  [6];
  logic [511:0] cdata [6];
  logic [7:0]   size  [6];
  logic         comp  [6];
  logic [31:0]  sum   [6];

  for (genvar m = 0; m < 6; m++) begin : g
    simcom_mode_engine #(.CC(r_cc(m)), .BPB(r_bpb(m)), .MODE_ID(m)) dut (
      .clk(clk), .rst_n(rst_n), .start(start), .data(data), .af(af),
      .busy(busy[m]), .done(done[m]), .cdata(cdata[m]), .comp_size(size[m]),
      .compressible(comp[m]), .diff_sum(sum[m]));
  end

  // The published 16-byte example, on a 3C1B engine sized for 16 bytes.
  logic         ex_start = 0, ex_busy, ex_done, ex_comp;
  logic [127:0] ex_data = '0, ex_cdata;
  logic [7:0]   ex_size;
  logic [31:0]  ex_sum;

  simcom_mode_engine #(.CC(3), .BPB(1), .MODE_ID(1), .BLOCK_BYTES(16)) u_ex (
    .clk(clk), .rst_n(rst_n), .start(ex_start), .data(ex_data), .af(17'd3277),
    .busy(ex_busy), .done(ex_done), .cdata(ex_cdata), .comp_size(ex_size),
    .compressible(ex_comp), .diff_sum(ex_sum));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_block(logic [511:0] d, int a);
    int lat [6];
    int t = 0;
    bit all_done = 0;
    bit seen [6] = '{0, 0, 0, 0, 0, 0};
    @(negedge clk);
    data = d; af = 17'(a); start = 1;
    @(negedge clk);
    start = 0;
    t = 1;
    while (!all_done) begin
      all_done = 1;
      for (int m = 0; m < 6; m++) begin
        if (done[m] && !seen[m]) begin seen[m] = 1; lat[m] = t; end
        all_done &= seen[m];
      end
      @(negedge clk); t++;
      if (t > 200) break;
    end
    for (int m = 0; m < 6; m++) begin
      ref_res_t rr = ref_compress(m, d, a);
      int w = r_cc(m) * r_bpb(m);
      // t counts from 1 on the first falling edge after the start edge.
      int exp_lat = 64 / w + 1 + ((64 % w) ? 1 : 0);
      int nb = (rr.size < 64) ? rr.size : 64;
      bit ok = 1;
      for (int i = 0; i < nb; i++) if (cdata[m][8*i +: 8] != rr.cdata[8*i +: 8]) ok = 0;
      checks++;
      if (!ok || int'(size[m]) != rr.size || comp[m] != (rr.size < 64) || longint'(sum[m]) != rr.sum) begin
        failures++;
        $display("FAIL mode %0d af %0d: size %0d/%0d sum %0d/%0d comp %0b", m, a, size[m], rr.size, sum[m], rr.sum, comp[m]);
      end
      checks++;
      if (lat[m] != exp_lat) begin failures++; $display("FAIL mode %0d latency %0d expected %0d", m, lat[m], exp_lat); end
      if (64 % w) begin if (rr.rem_stored) rem_stored++; else rem_elided++; end
      if (rr.size >= 64) incompressible++;
    end
  endtask

  initial begin
    data = '0; af = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // 16-byte example: 15 bytes within 2 of 0x80, last byte 0x10.
    begin
      automatic int t = 1;
      @(negedge clk);
      for (int i = 0; i < 15; i++) ex_data[8*i +: 8] = 8'(8'h7E + $urandom_range(4, 0));
      ex_data[127:120] = 8'h10;
      ex_start = 1;
      @(negedge clk);
      ex_start = 0;
      while (!ex_done && t < 50) begin @(negedge clk); t++; end
      checks++;
      // N = 5 words plus the remainder: done after 6 edges (t = 7).
      if (t != 7 || !ex_comp || ex_size != 8'd6 || ex_cdata[7:0] != 8'h21 ||
          ex_cdata[31:8] != ex_data[23:0] || ex_cdata[39:32] != 8'h84 || ex_cdata[47:40] != 8'h10) begin
        failures++;
        $display("FAIL 16-byte example: t %0d size %0d cdata %h", t, ex_size, ex_cdata[47:0]);
      end
    end
    run_block('0, 0);                                   // flat block, precise
    run_block({64{8'h7F}}, 3277);
    run_block(gen_random(), 65536);                     // AF = 1.0: one pair
    run_block(gen_random(), 3277);                      // noise: incompressible
    for (int i = 0; i < 60; i++) begin
      automatic int fm = i % 6;
      run_block(gen_block(r_cc(fm), r_bpb(fm), $urandom_range(6, 0) * (r_bpb(fm) == 2 ? 200 : 1),
                          $urandom_range(20, 0)),
                $urandom_range(6554, 0));
    end
    checks++;
    if (rem_stored == 0 || rem_elided == 0 || incompressible == 0) begin
      failures++;
      $display("FAIL coverage: rem stored %0d elided %0d incompressible %0d", rem_stored, rem_elided, incompressible);
    end
    $display("coverage: rem stored %0d elided %0d incompressible %0d", rem_stored, rem_elided, incompressible);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
