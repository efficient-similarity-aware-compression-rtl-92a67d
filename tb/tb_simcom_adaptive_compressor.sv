// tb_simcom_adaptive_compressor: compresses bitmap-like blocks of all six
// formats plus noise and flat blocks; the chosen mode, compressed bytes, size
// and compressibility must match the reference model, and done must come 65
// edges after the start edge. Counts how often each mode was chosen and requires
// every mode and the incompressible outcome to occur.
module tb_simcom_adaptive_compressor;
  import simcom_pkg::*;
  import simcom_ref_pkg::*;

  int checks = 0, failures = 0;
  int chosen [6] = '{0, 0, 0, 0, 0, 0};
  int n_incomp = 0;
  logic clk = 0, rst_n = 0, start = 0;
  logic [511:0] data, cdata;
  logic [16:0] af;
  logic busy, done, comp;
  logic [7:0] size;
  mode_e mode;

  simcom_adaptive_compressor dut (
    .clk(clk), .rst_n(rst_n), .start(start), .data(data), .af(af), .busy(busy),
    .done(done), .cdata(cdata), .comp_size(size), .compressible(comp), .mode(mode));

  always #5 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_block(logic [511:0] d, int a);
    ref_res_t rr [6];
    int sel, t = 1, nb;
    bit ok = 1;
    @(negedge clk);
    data = d; af = 17'(a); start = 1;
    @(negedge clk);
    start = 0;
    while (!done && t < 200) begin @(negedge clk); t++; end
    for (int m = 0; m < 6; m++) rr[m] = ref_compress(m, d, a);
    sel = ref_select(rr);
    nb = (rr[sel].size < 64) ? rr[sel].size : 64;
    for (int i = 0; i < nb; i++) if (cdata[8*i +: 8] != rr[sel].cdata[8*i +: 8]) ok = 0;
    checks++;
    if (int'(mode) != sel || !ok || int'(size) != rr[sel].size || comp != (rr[sel].size < 64)) begin
      failures++;
      $display("FAIL mode %0d/%0d size %0d/%0d ok %0b", mode, sel, size, rr[sel].size, ok);
    end
    checks++;
    // done comes 65 edges after the start edge
    if (t != 66) begin failures++; $display("FAIL latency %0d", t); end
    chosen[sel]++;
    if (rr[sel].size >= 64) n_incomp++;
  endtask

  initial begin
    data = '0; af = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_block(gen_random(), 655);
    for (int i = 0; i < 120; i++) begin
      automatic int fm = i % 6;
      run_block(gen_block(r_cc(fm), r_bpb(fm), $urandom_range(3, 0) * (r_bpb(fm) == 2 ? 100 : 1),
                          $urandom_range(10, 0)),
                $urandom_range(3277, 0));
    end
    for (int m = 0; m < 6; m++) begin
      checks++;
      if (chosen[m] == 0) begin failures++; $display("FAIL mode %0d never chosen", m); end
    end
    checks++;
    if (n_incomp == 0) begin failures++; $display("FAIL no incompressible block"); end
    $display("chosen: %p incompressible %0d", chosen, n_incomp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
