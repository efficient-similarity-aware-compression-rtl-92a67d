// tb_simcom_mode_selector: random and hand-made per-mode sums and sizes;
// the chosen mode must match the reference (minimal mean normalized
// difference, then minimal size, then lowest mode number).
module tb_simcom_mode_selector;
  import simcom_pkg::*;
  import simcom_ref_pkg::*;

  int checks = 0, failures = 0;
  logic [31:0] sums  [6];
  logic [7:0]  sizes [6];
  mode_e       sel;

  simcom_mode_selector dut (.diff_sum(sums), .comp_size(sizes), .sel_mode(sel));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(int expect_m);
    ref_res_t rr [6];
    int exp_ref;
    #1;
    for (int m = 0; m < 6; m++) begin rr[m].sum = longint'(sums[m]); rr[m].size = int'(sizes[m]); end
    exp_ref = ref_select(rr);
    checks++;
    if (int'(sel) != exp_ref || (expect_m >= 0 && int'(sel) != expect_m)) begin
      failures++;
      $display("FAIL sel %0d ref %0d hand %0d", sel, exp_ref, expect_m);
    end
  endtask

  initial begin
    // All zero differences: every mean is 0, smallest size wins (4C2B = 10).
    sums  = '{0, 0, 0, 0, 0, 0};
    sizes = '{3, 5, 6, 4, 8, 10};
    sizes[5] = 2; check(5);
    // Means: 1C1B 63/(255*63)=1/255; 3C1B 20/(255*20)=1/255 equal; sizes 40 vs 30.
    sums  = '{63, 20, 300, 900000, 900000, 900000};
    sizes = '{40, 30, 50, 50, 50, 50};
    check(1);
    // 1C2B mean 31/(65535*31) is far smaller than any 8-bit mode.
    sums  = '{63, 20, 15, 31, 900000, 900000};
    check(3);
    for (int i = 0; i < 3000; i++) begin
      for (int m = 0; m < 6; m++) begin
        sums[m]  = (m < 3) ? 32'($urandom_range(16065, 0)) : 32'($urandom_range(2031585, 0));
        if (i % 4 == 0) sums[m] = 32'($urandom_range(3, 0));
        sizes[m] = 8'($urandom_range(129, 1));
      end
      check(-1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
