// tb_simcom_decompressor: blocks of every format are compressed by the
// reference model in each of the six modes; each compressible result is
// decompressed by the DUT and compared with the reference decompression and,
// at AF = 0, with the original block (lossless). The start-to-done latency
// must be N+1 edges. Stored and elided remainders must both occur.
module tb_simcom_decompressor;
  import simcom_ref_pkg::*;

  int checks = 0, failures = 0, n_rem_bit = 0, n_rem_fill = 0;
  logic clk = 0, rst_n = 0, start = 0;
  logic [511:0] cdata, data;
  logic busy, done;

  simcom_decompressor dut (.clk(clk), .rst_n(rst_n), .start(start), .cdata(cdata),
                           .busy(busy), .done(done), .data(data));

  always #5 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int m, logic [511:0] d, int a);
    ref_res_t rr = ref_compress(m, d, a);
    logic [511:0] expd;
    int t = 1, w = r_cc(m) * r_bpb(m);
    if (rr.size >= 64) return;
    expd = ref_decompress(rr.cdata);
    @(negedge clk);
    cdata = rr.cdata; start = 1;
    @(negedge clk);
    start = 0;
    while (!done && t < 200) begin @(negedge clk); t++; end
    checks++;
    if (data != expd || (a == 0 && data != d)) begin
      failures++;
      $display("FAIL mode %0d af %0d\n got %h\n exp %h", m, a, data, expd);
    end
    checks++;
    // done comes N+1 edges after the start edge
    if (t != 64 / w + 2) begin failures++; $display("FAIL mode %0d latency %0d", m, t); end
    if (64 % w) begin if (rr.rem_stored) n_rem_bit++; else n_rem_fill++; end
  endtask

  initial begin
    cdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int m = 0; m < 6; m++) run(m, '0, 0);
    for (int i = 0; i < 200; i++) begin
      automatic int fm = i % 6;
      automatic logic [511:0] d = gen_block(r_cc(fm), r_bpb(fm), $urandom_range(4, 0) * (r_bpb(fm) == 2 ? 100 : 1),
                                  $urandom_range(10, 0));
      automatic int a = (i % 5 == 0) ? 0 : $urandom_range(6554, 0);
      for (int m = 0; m < 6; m++) run(m, d, a);
    end
    checks++;
    if (n_rem_bit == 0 || n_rem_fill == 0) begin failures++; $display("FAIL remainder coverage"); end
    $display("remainder stored %0d filled from base %0d", n_rem_bit, n_rem_fill);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
