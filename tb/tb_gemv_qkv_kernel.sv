// Workload testbench: the GPT-175B QKV projection GEMV (M x K = 4608 x 12288)
// on one pseudo-channel.
//
// Spread over the 1024 banks of a stack, the 4608 output rows give each bank
// 4.5 rows; this test runs 5 output rows per bank. An output row has K/16 =
// 768 MAC_AB (16 elements per 32-byte column) and is one pass; the input
// vector (768 columns) is loaded into the GEMV buffer by WR_GB once, with the
// first pass. The same 5 passes are run with the RH+ layout (stride 1) and
// with the host-interleaved layout (stride 64), both in PC mode. Checks every
// bank's result after every output row, and the MAC-phase cycle counts:
// 24 rows x 249 = 5976 per pass with RH+, 768 x 63 = 48384 with stride 64,
// i.e. 2016 / 249 = 8.1x. Per bank, 4.5 output rows at stride 64 come to
// 4.5 x 48384 = 217728 cycles, against the 221K cycles the kernel takes
// in the paper's baseline measurement.
`timescale 1ns/1ps
module tb_gemv_qkv_kernel;
  import pim_pkg::*;
  import tb_pim_pkg::*;

  localparam int NB = 32, K = 12288, MACS = K / LANES, OUTS = 5;

  logic clk = 0, rst_n = 0, start = 0, x_valid = 0;
  gemv_desc_t desc;
  logic busy, done, x_ready, res_valid;
  column_t x_data;
  dram_cmd_t cmd;
  column_t col_data [NB];
  acc_t results [NB];
  sched_stats_t stats;
  int dram_errors;
  int checks = 0, failures = 0;

  rhp_pim_pch dut (.*);
  pim_dram_model #(.NB(NB), .PCH_ID(3)) u_dram (.clk, .rst_n, .cmd, .col_data, .errors(dram_errors));

  always #1 clk = ~clk;

  longint expect_res [NB];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // one output row: MACS MACs from base_row with stride s, loading the
  // input vector first if nwr is not zero
  task automatic pass(input int base, input int s, input int nwr);
    int r, c, k;
    desc = '0;
    desc.base_row = row_t'(base); desc.num_macs = MACN_W'(MACS);
    desc.stride = STRIDE_W'(s); desc.num_wrgb = MACN_W'(nwr); desc.clear_acc = 1;
    foreach (expect_res[b]) expect_res[b] = 0;
    r = base; c = 0;
    for (int m = 0; m < MACS; m++) begin
      for (int b = 0; b < NB; b++) expect_res[b] += dot(wcol(3, b, r, c), xcol(7, m));
      c += s;
      while (c >= 32) begin c -= 32; r++; end
    end
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    k = 0;
    while (!done) begin
      x_valid = k < nwr;
      x_data  = xcol(7, k);
      @(posedge clk);
      if (x_valid && x_ready) k++;
      @(negedge clk);
    end
    x_valid = 0;
  endtask

  task automatic kernel(input int s, output longint mac_cyc, output longint all_cyc);
    int bad;
    mac_cyc = 0; all_cyc = 0;
    for (int o = 0; o < OUTS; o++) begin
      // RH+: the 768 MACs of an output row fill 24 consecutive rows;
      // stride 64: they span 1536 rows
      pass((s == 1) ? o * 24 : o * 1536, s, (o == 0) ? MACS : 0);
      mac_cyc += stats.mac_cycles; all_cyc += stats.cycles;
      chk(stats.mac_cycles == ((s == 1) ? 24 * 249 : MACS * 63),
          $sformatf("stride %0d output row MAC phase %0d cycles", s, stats.mac_cycles));
      bad = 0;
      for (int b = 0; b < NB; b++) if (results[b] != acc_t'(expect_res[b])) bad++;
      chk(bad == 0, $sformatf("output row %0d: %0d banks wrong", o, bad));
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint rh_mac, rh_all, bl_mac, bl_all;
    desc = '0; x_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    kernel(1, rh_mac, rh_all);
    kernel(64, bl_mac, bl_all);
    chk(rh_mac == OUTS * 24 * 249, "RH+ kernel MAC cycles");
    chk(bl_mac == OUTS * MACS * 63, "stride-64 kernel MAC cycles");
    chk(dram_errors == 0, "DRAM protocol");
    $display("QKV kernel, %0d output rows per bank: MAC phase %0d cycles (RH+) vs %0d (stride 64), %0.2fx; with WR_GB/MV_SB %0d vs %0d, %0.2fx",
             OUTS, rh_mac, bl_mac, real'(bl_mac) / real'(rh_mac), rh_all, bl_all, real'(bl_all) / real'(rh_all));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
