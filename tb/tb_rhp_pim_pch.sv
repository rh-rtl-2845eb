// Self-checking testbench of rhp_pim_pch (one pseudo-channel, 32 banks).
//
// A behavioural DRAM model returns a hash pattern for every bank, row and
// column. Each pass loads input-vector columns through the WR_GB stream
// (with random host stalls), runs MAC_AB commands and reads the 32 results
// after MV_SB. The expected results are computed here by walking the MAC
// addresses and summing lane products, with a shadow copy of the GEMV
// buffer. Passes cover RH+ (stride 1), stride 64, PC and NPC, a pass that
// accumulates on top of the previous one, and one longer than the buffer
// (indices wrap). Also checks the 32-MAC row cost of 249 cycles.
`timescale 1ns/1ps
module tb_rhp_pim_pch;
  import pim_pkg::*;
  import tb_pim_pkg::*;

  localparam int NB = 32, GBN = 1024;

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
  pim_dram_model #(.NB(NB), .PCH_ID(0)) u_dram (.clk, .rst_n, .cmd, .col_data, .errors(dram_errors));

  always #1 clk = ~clk;

  column_t shadow [GBN];
  longint  expect_res [NB];
  int      rv_count = 0;
  always @(posedge clk) if (res_valid) rv_count++;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic run(input int nmac, input int stride, input bit npc, input int nwr,
                     input int base, input bit clr, input int seed);
    int r, c, k, rv0;
    desc = '0;
    desc.base_row = row_t'(base); desc.num_macs = MACN_W'(nmac);
    desc.stride = STRIDE_W'(stride); desc.npc_mode = npc;
    desc.num_wrgb = MACN_W'(nwr); desc.clear_acc = clr;
    // reference
    for (int i = 0; i < nwr; i++) shadow[i % GBN] = xcol(seed, i);
    if (clr) foreach (expect_res[b]) expect_res[b] = 0;
    r = base; c = 0;
    for (int m = 0; m < nmac; m++) begin
      for (int b = 0; b < NB; b++) expect_res[b] += dot(wcol(0, b, r, c), shadow[m % GBN]);
      c += stride;
      while (c >= 32) begin c -= 32; r++; end
    end
    rv0 = rv_count;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    k = 0;
    while (!done) begin
      x_valid = (k < nwr) && ($urandom_range(0, 3) != 0 || x_valid);
      x_data  = xcol(seed, k);
      @(posedge clk);
      if (x_valid && x_ready) k++;
      @(negedge clk);
      if (x_valid && !(k < nwr)) x_valid = 0;
    end
    x_valid = 0;
    chk(k == nwr, $sformatf("host stream columns taken %0d of %0d", k, nwr));
    chk(rv_count == rv0 + 1, "one res_valid per pass");
    for (int b = 0; b < NB; b++)
      chk(results[b] == acc_t'(expect_res[b]),
          $sformatf("bank %0d result %0d want %0d (n=%0d s=%0d)", b, results[b], expect_res[b], nmac, stride));
    chk(stats.macs == nmac, "MAC count");
  endtask

  initial begin
    #300000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    desc = '0; x_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(32, 1, 0, 32, 0, 1, 1);
    chk(stats.mac_cycles == 249, $sformatf("32 MACs RH+ PC: %0d cycles, want 249", stats.mac_cycles));
    chk(stats.row_hits == 31, "31 row hits");
    run(40, 1, 1, 40, 5, 0, 2);          // accumulate on top of the previous pass
    run(12, 64, 0, 12, 9, 1, 3);         // stride 64, every MAC a row miss
    chk(stats.row_hits == 0 && stats.acts == 12, "stride 64 row misses");
    run(1100, 1, 1, 1100, 20, 1, 4);     // longer than the buffer: indices wrap
    run(20, 3, 0, 0, 40, 0, 5);          // reuse the loaded vector, no WR_GB
    chk(dram_errors == 0, "DRAM model saw no protocol error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
