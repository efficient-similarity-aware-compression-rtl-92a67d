// tb_simcom_top: end-to-end test of SimCom in the NVM module controller at
// its default parameters (64-byte blocks, 16-entry quality table).
//
// The testbench plays the memory controller, the NVM (an associative array
// that keeps data, size and the compressible/approximable bits per address)
// and a stand-in precise compressor/decompressor (it compresses only all-zero
// blocks, to 8 bytes, and is not the scheme a real system would use). Every
// block written is read back. The NVM-side write (bits, size, mode, bytes)
// and the read response are compared with the reference model; the
// approximable-write latency (66 edges from acceptance to nvm_wr_valid) is
// checked, and so are the read latencies (bypass 0 edges, approximate
// decompression N+2 edges). Random back-pressure is applied on nvm_wr_ready, rd_rsp_ready and
// the precise ports. Each mechanism - compressible and incompressible
// approximate writes, every mode, stored remainders, quality-table misses,
// precise compressed and raw writes, bypassed, approximate and precise reads,
// write and read stalls - is counted and must happen at least once.
module tb_simcom_top;
  import simcom_pkg::*;
  import simcom_ref_pkg::*;

  int checks = 0, failures = 0;
  int n_apx_comp = 0, n_apx_raw = 0, n_qt_miss = 0, n_pre_comp = 0, n_pre_raw = 0;
  int n_rd_bypass = 0, n_rd_apx = 0, n_rd_pre = 0, n_wr_stall = 0, n_rd_stall = 0, n_rem = 0;
  int n_mode [6] = '{0, 0, 0, 0, 0, 0};

  logic clk = 0, rst_n = 0;
  logic qt_cfg_we = 0; logic [3:0] qt_cfg_idx = '0; qt_entry_t qt_cfg_entry = '0;
  logic wr_valid = 0, wr_ready, wr_approx = 0;
  logic [31:0] wr_addr = '0; logic [511:0] wr_data = '0;
  logic nvm_wr_valid, nvm_wr_ready = 0, nvm_wr_compressible, nvm_wr_approx;
  logic [31:0] nvm_wr_addr; logic [511:0] nvm_wr_data; logic [7:0] nvm_wr_size; mode_e nvm_wr_mode;
  logic nvm_rd_valid = 0, nvm_rd_ready, nvm_rd_compressible = 0, nvm_rd_approx = 0;
  logic [31:0] nvm_rd_addr = '0; logic [511:0] nvm_rd_data = '0;
  logic rd_rsp_valid, rd_rsp_ready = 0; logic [31:0] rd_rsp_addr; logic [511:0] rd_rsp_data;
  logic pc_req_valid, pc_req_ready = 0, pc_rsp_valid = 0; logic [511:0] pc_req_data, pc_rsp_data = '0;
  logic [7:0] pc_rsp_size = '0;
  logic pd_req_valid, pd_req_ready = 0, pd_rsp_valid = 0; logic [511:0] pd_req_data, pd_rsp_data = '0;

  simcom_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // NVM contents
  typedef struct { logic [511:0] data; logic [7:0] size; logic c; logic a; } line_t;
  line_t nvm [logic [31:0]];

  // Random ready signals, changed just after each rising edge so that they
  // are stable when sampled at the falling edge and at the next rising edge.
  always @(posedge clk) begin
    nvm_wr_ready <= ($urandom_range(3, 0) != 0);
    rd_rsp_ready <= ($urandom_range(3, 0) != 0);
    pc_req_ready <= $urandom_range(1, 0);
    pd_req_ready <= $urandom_range(1, 0);
  end
  always @(posedge clk) begin
    if (nvm_wr_valid && !nvm_wr_ready) n_wr_stall++;
    if (rd_rsp_valid && !rd_rsp_ready) n_rd_stall++;
  end

  // Stand-in precise compressor and decompressor
  always @(posedge clk) begin
    pc_rsp_valid <= 1'b0;
    pd_rsp_valid <= 1'b0;
    if (pc_req_valid && pc_req_ready) begin
      pc_rsp_valid <= 1'b1;
      pc_rsp_data  <= '0;
      pc_rsp_size  <= (pc_req_data == '0) ? 8'd8 : 8'd64;
    end
    if (pd_req_valid && pd_req_ready) begin
      pd_rsp_valid <= 1'b1;
      pd_rsp_data  <= '0;
    end
  end

  task automatic qt_prog(int idx, logic [31:0] s, logic [31:0] e, int af);
    @(negedge clk);
    qt_cfg_we = 1; qt_cfg_idx = 4'(idx);
    qt_cfg_entry.valid = 1; qt_cfg_entry.start_addr = s; qt_cfg_entry.end_addr = e;
    qt_cfg_entry.af = 17'(af);
    @(negedge clk);
    qt_cfg_we = 0;
  endtask

  // Write one block and check what reaches the NVM. exp_read returns the
  // data a later read must give back.
  task automatic do_write(logic [31:0] a, logic [511:0] d, bit apx, int af, bit in_region,
                          output logic [511:0] exp_read);
    ref_res_t rr [6];
    int sel = 0, t = 0;
    bit exp_c, exp_a, ok = 1;
    int exp_size;
    logic [511:0] exp_data;
    if (apx && in_region) begin
      for (int m = 0; m < 6; m++) rr[m] = ref_compress(m, d, af);
      sel = ref_select(rr);
      exp_a = 1;
      exp_c = rr[sel].size < 64;
      exp_size = exp_c ? rr[sel].size : 64;
      exp_data = exp_c ? rr[sel].cdata : d;
      exp_read = exp_c ? ref_decompress(rr[sel].cdata) : d;
    end else begin
      exp_a = 0;
      exp_c = (d == '0);
      exp_size = exp_c ? 8 : 64;
      exp_data = exp_c ? '0 : d;
      exp_read = d;
    end
    @(negedge clk);
    wr_valid = 1; wr_addr = a; wr_data = d; wr_approx = apx;
    @(posedge clk);
    while (!wr_ready) @(posedge clk);
    @(negedge clk);
    wr_valid = 0; wr_data = gen_random(); wr_addr = $urandom;
    t = 1;
    while (!nvm_wr_valid) begin @(negedge clk); t++; end
    if (apx && in_region) begin
      checks++;
      if (t != 67) begin failures++; $display("FAIL write latency %0d", t); end
    end
    while (!(nvm_wr_valid && nvm_wr_ready)) @(negedge clk);
    for (int i = 0; i < exp_size && i < 64; i++) if (nvm_wr_data[8*i +: 8] != exp_data[8*i +: 8]) ok = 0;
    checks++;
    if (!ok || nvm_wr_compressible != exp_c || nvm_wr_approx != exp_a || int'(nvm_wr_size) != exp_size ||
        nvm_wr_addr != a || (exp_a && int'(nvm_wr_mode) != sel)) begin
      failures++;
      $display("FAIL write %h: c %0b/%0b a %0b/%0b size %0d/%0d mode %0d/%0d ok %0b", a,
               nvm_wr_compressible, exp_c, nvm_wr_approx, exp_a, nvm_wr_size, exp_size, nvm_wr_mode, sel, ok);
    end
    nvm[a] = '{nvm_wr_data, nvm_wr_size, nvm_wr_compressible, nvm_wr_approx};
    if (apx && in_region) begin
      if (exp_c) begin n_apx_comp++; n_mode[sel]++; if (rr[sel].rem_stored) n_rem++; end
      else n_apx_raw++;
    end else begin
      if (apx) n_qt_miss++;
      if (exp_c) n_pre_comp++; else n_pre_raw++;
    end
    @(posedge clk);
  endtask

  task automatic do_read(logic [31:0] a, logic [511:0] exp_read);
    line_t l = nvm[a];
    int t;
    @(negedge clk);
    nvm_rd_valid = 1; nvm_rd_addr = a; nvm_rd_data = l.data;
    nvm_rd_compressible = l.c; nvm_rd_approx = l.a;
    @(posedge clk);
    while (!nvm_rd_ready) @(posedge clk);
    @(negedge clk);
    nvm_rd_valid = 0; nvm_rd_data = gen_random();
    t = 1;
    while (!rd_rsp_valid) begin @(negedge clk); t++; end
    // Bypass raises rd_rsp_valid on the accepting edge itself, approximate
    // decompression N + 2 edges after it (N = words of the stored mode).
    if (!l.c || l.a) begin
      int n = 64 / (r_cc(int'(l.data[7:5])) * r_bpb(int'(l.data[7:5])));
      int exp_t = !l.c ? 1 : n + 3;
      checks++;
      if (t != exp_t) begin failures++; $display("FAIL read latency %0d, expected %0d", t, exp_t); end
    end
    while (!(rd_rsp_valid && rd_rsp_ready)) @(negedge clk);
    checks++;
    if (rd_rsp_data != exp_read || rd_rsp_addr != a) begin
      failures++;
      $display("FAIL read %h\n got %h\n exp %h", a, rd_rsp_data, exp_read);
    end
    if (!l.c) n_rd_bypass++; else if (l.a) n_rd_apx++; else n_rd_pre++;
    @(posedge clk);
  endtask

  initial begin
    logic [511:0] exp_read;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // Two approximable regions: AF = 5% and AF = 0 (precise similarity only).
    qt_prog(2, 32'h1000_0000, 32'h1000_FFFF, 3277);
    qt_prog(5, 32'h2000_0000, 32'h2000_FFFF, 0);
    for (int i = 0; i < 240; i++) begin
      automatic int kind = i % 8;
      automatic int fm = (i / 8) % 6;
      automatic logic [31:0] a;
      automatic logic [511:0] d;
      case (kind)
        0, 1, 2, 3: begin   // bitmap data in the 5% region
          a = 32'h1000_0000 + 32'(64 * i);
          d = gen_block(r_cc(fm), r_bpb(fm), $urandom_range(3, 0) * (r_bpb(fm) == 2 ? 100 : 1), $urandom_range(10, 0));
          do_write(a, d, 1, 3277, 1, exp_read);
        end
        4: begin            // noise in the 5% region: incompressible
          a = 32'h1000_0000 + 32'(64 * i);
          d = gen_random();
          do_write(a, d, 1, 3277, 1, exp_read);
        end
        5: begin            // flat bitmap in the AF = 0 region
          a = 32'h2000_0000 + 32'(64 * i);
          d = gen_block(r_cc(fm), r_bpb(fm), 0, 0);
          do_write(a, d, 1, 0, 1, exp_read);
        end
        6: begin            // approximable bit set, address outside every region
          a = 32'h3000_0000 + 32'(64 * i);
          d = (i % 16 == 6) ? '0 : gen_random();
          do_write(a, d, 1, 0, 0, exp_read);
        end
        default: begin      // precise data
          a = 32'h4000_0000 + 32'(64 * i);
          d = (i % 16 == 7) ? '0 : gen_block(3, 1, 2, 5);
          do_write(a, d, 0, 0, 0, exp_read);
        end
      endcase
      do_read(a, exp_read);
    end
    $display("approx compressed %0d raw %0d, modes %p, remainder stored %0d", n_apx_comp, n_apx_raw, n_mode, n_rem);
    $display("qt miss %0d, precise compressed %0d raw %0d", n_qt_miss, n_pre_comp, n_pre_raw);
    $display("reads bypass %0d approx %0d precise %0d, stalls wr %0d rd %0d", n_rd_bypass, n_rd_apx, n_rd_pre, n_wr_stall, n_rd_stall);
    checks++;
    if (n_apx_comp == 0 || n_apx_raw == 0 || n_qt_miss == 0 || n_pre_comp == 0 || n_pre_raw == 0 ||
        n_rd_bypass == 0 || n_rd_apx == 0 || n_rd_pre == 0 || n_wr_stall == 0 || n_rd_stall == 0 || n_rem == 0) begin
      failures++;
      $display("FAIL a mechanism never happened");
    end
    for (int m = 0; m < 6; m++) begin
      checks++;
      if (n_mode[m] == 0) begin failures++; $display("FAIL mode %0d never chosen", m); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
