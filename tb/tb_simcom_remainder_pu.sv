// tb_simcom_remainder_pu: checks the Remainder-PU for the two remainders that
// occur with 64-byte blocks that carry more than one byte in a channel
// (3C2B: 4 bytes = 2 channels) and the 1-byte remainder of 3C1B, against the
// reference metric restricted to the remainder's channels.
module tb_simcom_remainder_pu;
  import simcom_ref_pkg::*;

  int checks = 0, failures = 0;

  logic [7:0]  rem1;  logic [23:0] base1; logic st1;
  logic [31:0] rem4;  logic [47:0] base4; logic st4;
  logic [16:0] af;

  simcom_remainder_pu #(.CC(3), .BPB(1), .REM_BYTES(1)) dut1 (.rem(rem1), .base(base1), .af(af), .store_rem(st1));
  simcom_remainder_pu #(.CC(3), .BPB(2), .REM_BYTES(4)) dut4 (.rem(rem4), .base(base4), .af(af), .store_rem(st4));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Hand case: AF = 0.05, remainder 0x40 vs base first byte 0x30: 16 > 12.75
    af = 17'd3277; rem1 = 8'h40; base1 = 24'hFFFF30; #1;
    checks++; if (!st1) begin failures++; $display("FAIL hand 1"); end
    rem1 = 8'h3A; #1;                               // diff 10: similar
    checks++; if (st1) begin failures++; $display("FAIL hand 2"); end
    for (int i = 0; i < 3000; i++) begin
      logic [8*BB-1:0] d;
      int md;
      af    = 17'($urandom_range(65536, 0));
      base1 = 24'($urandom); rem1 = 8'($urandom);
      base4 = {$urandom, 16'($urandom)}; rem4 = $urandom;
      if (i % 2 == 0) begin
        rem1 = base1[7:0] ^ 8'($urandom_range(31, 0));
        rem4 = base4[31:0] ^ 32'($urandom_range(8191, 0));
      end
      #1;
      d = '0; d[7:0] = rem1; d[31:8] = base1;
      md = maxdiff(d, 0, 1, 1, 1);
      checks++;
      if (st1 != !is_similar(md, int'(af), 1)) begin failures++; $display("FAIL r1 %h %h %0d", rem1, base1, af); end
      d = '0; d[31:0] = rem4; d[79:32] = base4;
      md = maxdiff(d, 0, 4, 2, 2);
      checks++;
      if (st4 != !is_similar(md, int'(af), 2)) begin failures++; $display("FAIL r4 %h %h %0d", rem4, base4, af); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
