// tb_simcom_word_pu: checks the Word-PU in two configurations (3 x 8-bit and
// 4 x 16-bit channels) against the reference metric: random words, words at
// exactly the AF threshold and one step beyond it, AF = 0 and AF = 1.0.
module tb_simcom_word_pu;
  import simcom_ref_pkg::*;

  int checks = 0, failures = 0;

  logic [23:0] w8, b8;   logic [7:0]  md8;  logic sim8;
  logic [63:0] w16, b16; logic [15:0] md16; logic sim16;
  logic [16:0] af;

  simcom_word_pu #(.CC(3), .BPB(1)) dut8  (.word(w8),  .base(b8),  .af(af), .max_diff(md8),  .similar(sim8));
  simcom_word_pu #(.CC(4), .BPB(2)) dut16 (.word(w16), .base(b16), .af(af), .max_diff(md16), .similar(sim16));

  task automatic check8();
    logic [8*BB-1:0] d = '0;
    int md;
    d[23:0] = w8; d[47:24] = b8;
    md = maxdiff(d, 0, 3, 3, 1);
    checks++;
    if (int'(md8) != md || sim8 != is_similar(md, int'(af), 1)) begin
      failures++;
      $display("FAIL 3C1B w=%h b=%h af=%0d: md %0d/%0d sim %0b", w8, b8, af, md8, md, sim8);
    end
  endtask

  task automatic check16();
    logic [8*BB-1:0] d = '0;
    int md;
    d[63:0] = w16; d[127:64] = b16;
    md = maxdiff(d, 0, 8, 4, 2);
    checks++;
    if (int'(md16) != md || sim16 != is_similar(md, int'(af), 2)) begin
      failures++;
      $display("FAIL 4C2B w=%h b=%h af=%0d: md %0d/%0d sim %0b", w16, b16, af, md16, md, sim16);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Hand-worked cases: AF = 0.05 -> 3276/65536; 0.05*255 = 12.75, so a
    // difference of 12 is similar and 13 is not.
    af = 17'd3277;
    w8 = 24'h102030; b8 = 24'h10202C; #1;          // diff 4
    checks++; if (md8 != 8'd4 || !sim8) begin failures++; $display("FAIL hand 1"); end
    w8 = 24'h10202C; b8 = 24'h10201F; #1;          // diff 13
    checks++; if (md8 != 8'd13 || sim8) begin failures++; $display("FAIL hand 2"); end
    w8 = 24'h00FF00; b8 = 24'h000000; af = 17'd65536; #1; // AF = 1.0
    checks++; if (md8 != 8'd255 || !sim8) begin failures++; $display("FAIL hand 3"); end
    af = 17'd0; w8 = 24'h123456; b8 = 24'h123456; #1;
    checks++; if (md8 != 8'd0 || !sim8) begin failures++; $display("FAIL hand 4"); end

    for (int i = 0; i < 2000; i++) begin
      af  = 17'($urandom_range(65536, 0));
      w8  = 24'($urandom); b8 = 24'($urandom);
      if (i % 3 == 0) b8 = w8 ^ 24'($urandom_range(15, 0));
      w16 = {$urandom, $urandom}; b16 = {$urandom, $urandom};
      if (i % 3 == 0) b16 = w16 ^ 64'($urandom_range(4095, 0));
      #1; check8(); check16();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
