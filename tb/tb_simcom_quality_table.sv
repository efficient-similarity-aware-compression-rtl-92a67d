// tb_simcom_quality_table: programs regions, then checks hits, misses,
// inclusive bounds, lowest-index priority, invalidation and reset against a
// behavioural list of regions.
module tb_simcom_quality_table;
  import simcom_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  logic [3:0] cfg_idx = '0;
  qt_entry_t cfg_entry = '0;
  logic [31:0] addr = '0;
  logic hit;
  logic [16:0] af;

  qt_entry_t model [16];

  simcom_quality_table #(.ENTRIES(16)) dut (
    .clk(clk), .rst_n(rst_n), .cfg_we(cfg_we), .cfg_idx(cfg_idx), .cfg_entry(cfg_entry),
    .lookup_addr(addr), .lookup_hit(hit), .lookup_af(af));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic prog(int idx, bit v, logic [31:0] s, logic [31:0] e, logic [16:0] a);
    @(negedge clk);
    cfg_we = 1; cfg_idx = 4'(idx);
    cfg_entry.valid = v; cfg_entry.start_addr = s; cfg_entry.end_addr = e; cfg_entry.af = a;
    model[idx] = cfg_entry;
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic look(logic [31:0] a);
    bit mh = 0; logic [16:0] maf = '0;
    addr = a; #1;
    for (int i = 0; i < 16; i++)
      if (!mh && model[i].valid && a >= model[i].start_addr && a <= model[i].end_addr) begin
        mh = 1; maf = model[i].af;
      end
    checks++;
    if (hit != mh || af != maf) begin
      failures++;
      $display("FAIL addr %h: hit %0b/%0b af %0d/%0d", a, hit, mh, af, maf);
    end
  endtask

  initial begin
    for (int i = 0; i < 16; i++) model[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    look(32'h1000);                                  // empty table: miss
    prog(3, 1, 32'h1000, 32'h1FFF, 17'd3277);
    prog(1, 1, 32'h1800, 32'h27FF, 17'd6554);        // overlaps, lower index wins
    prog(7, 1, 32'h8000_0000, 32'h8012_0000, 17'd1000);
    look(32'h0FFF); look(32'h1000); look(32'h17FF); look(32'h1800); look(32'h1FFF);
    look(32'h27FF); look(32'h2800); look(32'h8000_0000); look(32'h8012_0000); look(32'h8012_0001);
    // Fixed expectations worked out by hand.
    addr = 32'h1900; #1; checks++; if (!hit || af != 17'd6554) begin failures++; $display("FAIL prio"); end
    addr = 32'h1000; #1; checks++; if (!hit || af != 17'd3277) begin failures++; $display("FAIL start incl"); end
    for (int i = 0; i < 300; i++) begin
      if (i % 10 == 0) begin
        logic [31:0] s = $urandom & 32'hFFFF_F000;
        prog($urandom_range(15, 0), $urandom_range(1, 0), s, s + $urandom_range(65535, 0), 17'($urandom_range(65536, 0)));
      end
      look($urandom);
      look(model[$urandom_range(15, 0)].start_addr + $urandom_range(4096, 0));
    end
    prog(1, 0, 32'h1800, 32'h27FF, 17'd6554);        // invalidate
    look(32'h2000);
    rst_n = 0; #1; rst_n = 1;
    for (int i = 0; i < 16; i++) model[i] = '0;
    look(32'h1000); look(32'h8000_0000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
