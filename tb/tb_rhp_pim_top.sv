// End-to-end testbench of rhp_pim_top at its default size: 32 pseudo-
// channels of 32 banks, 1024 PUs, each pseudo-channel with its own
// behavioural DRAM model.
//
// Runs GEMV passes through the whole stack: the input vector goes in over
// the WR_GB stream with host stalls, every pseudo-channel schedules its
// ACT / MAC_AB / PRE commands, and all 1024 results come out after MV_SB.
// Results are checked against dot products computed here; cycle counts
// against the row cost tRCD + n*nCCDAB + tRP (249 for a full row in PC
// mode, 185 in NPC mode, 63 per row with stride 64). Every mechanism is
// counted and must occur: row hits, row misses (ACT), MACs held by nCCDAB,
// PC and NPC mode, WR_GB, host stalls, MV_SB and a pass that accumulates
// on the previous one. All pseudo-channels must issue identical commands.
`timescale 1ns/1ps
module tb_rhp_pim_top;
  import pim_pkg::*;
  import tb_pim_pkg::*;

  localparam int NP = 32, NB = 32, GBN = 1024;

  logic clk = 0, rst_n = 0, start = 0, x_valid = 0;
  gemv_desc_t desc;
  logic busy, done, x_ready, res_valid;
  column_t x_data;
  dram_cmd_t cmd [NP];
  column_t col_data [NP][NB];
  acc_t results [NP][NB];
  sched_stats_t stats;
  int dram_err [NP];
  int checks = 0, failures = 0;

  rhp_pim_top dut (.*);

  for (genvar p = 0; p < NP; p++) begin : g_dram
    pim_dram_model #(.NB(NB), .PCH_ID(p)) u_dram (
      .clk, .rst_n, .cmd(cmd[p]), .col_data(col_data[p]), .errors(dram_err[p]));
  end

  always #1 clk = ~clk;

  // mechanism counters
  int n_hit = 0, n_act = 0, n_stall = 0, n_pc = 0, n_npc = 0, n_wrgb = 0;
  int n_host_stall = 0, n_mvsb = 0, n_accum = 0, n_lockstep_err = 0;
  always @(posedge clk) if (rst_n) begin
    for (int p = 1; p < NP; p++) if (cmd[p] != cmd[0]) n_lockstep_err++;
    if (busy && x_ready && !x_valid && dut.g_pch[0].u_pch.u_sched.wrgb_idx != desc.num_wrgb)
      n_host_stall++;
  end

  column_t shadow [GBN];
  longint  expect_res [NP][NB];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic int row_cost(int nmac, int stride, bit npc);
    int ncc = npc ? 4 : 6, tot = 0, n = 0, r = -1, c = 0, rr = 0;
    for (int k = 0; k <= nmac; k++) begin
      if (k == nmac || rr != r) begin
        if (n > 0) tot += (18 + n*ncc + 39 > 63) ? 18 + n*ncc + 39 : 63;
        n = 0; r = rr;
      end
      n++;
      c += stride;
      while (c >= 32) begin c -= 32; rr++; end
    end
    return tot;
  endfunction

  task automatic run(input int nmac, input int stride, input bit npc, input int nwr,
                     input int base, input bit clr, input int seed);
    int r, c, k, bad;
    desc = '0;
    desc.base_row = row_t'(base); desc.num_macs = MACN_W'(nmac);
    desc.stride = STRIDE_W'(stride); desc.npc_mode = npc;
    desc.num_wrgb = MACN_W'(nwr); desc.clear_acc = clr;
    for (int i = 0; i < nwr; i++) shadow[i % GBN] = xcol(seed, i);
    if (clr) foreach (expect_res[p, b]) expect_res[p][b] = 0;
    r = base; c = 0;
    for (int m = 0; m < nmac; m++) begin
      for (int p = 0; p < NP; p++)
        for (int b = 0; b < NB; b++) expect_res[p][b] += dot(wcol(p, b, r, c), shadow[m % GBN]);
      c += stride;
      while (c >= 32) begin c -= 32; r++; end
    end
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    // hold the stream back for a few cycles while the stack is ready for it
    x_valid = 0;
    repeat (3) @(negedge clk);
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
    chk(k == nwr, "all input columns taken");
    bad = 0;
    for (int p = 0; p < NP; p++)
      for (int b = 0; b < NB; b++)
        if (results[p][b] != acc_t'(expect_res[p][b])) begin
          bad++;
          if (bad < 5) $display("FAIL pch %0d bank %0d: %0d want %0d", p, b, results[p][b], expect_res[p][b]);
        end
    chk(bad == 0, $sformatf("%0d of 1024 results wrong", bad));
    chk(stats.mac_cycles == row_cost(nmac, stride, npc),
        $sformatf("MAC phase %0d cycles, want %0d", stats.mac_cycles, row_cost(nmac, stride, npc)));
    n_hit += stats.row_hits; n_act += stats.acts; n_stall += stats.stalls;
    n_wrgb += stats.wrgbs; n_mvsb += stats.mvsbs;
    if (npc) n_npc++; else n_pc++;
    if (!clr) n_accum++;
    $display("pass n=%0d stride=%0d %s: MAC phase %0d cycles, %0d ACT, %0d row hits, total %0d cycles",
             nmac, stride, npc ? "NPC" : "PC", stats.mac_cycles, stats.acts, stats.row_hits, stats.cycles);
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    desc = '0; x_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(64, 1, 0, 64, 0, 1, 1);
    chk(stats.mac_cycles == 2 * 249, "two full rows RH+ PC = 2 x 249");
    run(32, 1, 1, 32, 10, 0, 2);
    chk(stats.mac_cycles == 185, "one full row RH+ NPC = 185");
    run(8, 64, 0, 8, 30, 1, 3);
    chk(stats.mac_cycles == 8 * 63, "stride 64: 8 x nRC");
    chk(n_hit > 0,        "row hits occurred");
    chk(n_act > 0,        "row misses (ACT) occurred");
    chk(n_stall > 0,      "MACs held by nCCDAB occurred");
    chk(n_pc > 0,         "PC mode used");
    chk(n_npc > 0,        "NPC mode used");
    chk(n_wrgb > 0,       "WR_GB issued");
    chk(n_host_stall > 0, "host stream stalled");
    chk(n_mvsb > 0,       "MV_SB issued");
    chk(n_accum > 0,      "accumulating pass run");
    chk(n_lockstep_err == 0, "pseudo-channels in lockstep");
    foreach (dram_err[p]) chk(dram_err[p] == 0, $sformatf("DRAM model %0d protocol", p));
    $display("mechanisms: hits=%0d acts=%0d nccdab_stalls=%0d pc=%0d npc=%0d wrgb=%0d host_stalls=%0d mvsb=%0d accum=%0d",
             n_hit, n_act, n_stall, n_pc, n_npc, n_wrgb, n_host_stall, n_mvsb, n_accum);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
