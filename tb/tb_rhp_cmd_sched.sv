// Self-checking testbench of rhp_cmd_sched.
//
// Runs GEMV passes and checks, against values worked out here:
//  - the paper's cycle counts for 32 MACs: 249 (stride 1, PC), 185 (stride 1,
//    NPC), 2016 (stride 64, PC and NPC alike), and for other lengths the row
//    cost tRCD + n*nCCDAB + tRP per row of n MACs, at least nRC;
//  - ACT / PRE / MAC / row-hit / WR_GB / MV_SB counts;
//  - a command monitor that tracks the open row itself and checks every MAC
//    goes to the open row at the address of a column-by-column walk, and
//    that MAC, ACT and WR_GB spacings keep nCCDAB, tRCD, nRC, tRP and 4 tCK.
`timescale 1ns/1ps
module tb_rhp_cmd_sched;
  import pim_pkg::*;

  localparam int NRC = 63, RCD = 18, RP = 39;

  logic clk = 0, rst_n = 0, start = 0, x_valid = 0;
  gemv_desc_t desc;
  logic busy, done, x_ready, gb_we, pu_clear, mac_fire, mvsb_fire;
  dram_cmd_t cmd;
  logic [MACN_W-1:0] gb_waddr, gb_raddr;
  sched_stats_t stats;
  int checks = 0, failures = 0;

  rhp_cmd_sched dut (.*);

  always #1 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---- command monitor ----
  longint cyc = 0, t_act = -1000, t_pre = -1000, t_mac = -1000, t_wr = -1000;
  bit open = 0; row_t orow;
  int m_k, m_row, m_col, m_stride, m_ncc;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    unique case (cmd.cmd)
      CMD_ACT: begin
        chk(!open && cyc - t_act >= NRC && cyc - t_pre >= RP, "ACT timing/open");
        open = 1; orow = cmd.row; t_act = cyc;
      end
      CMD_PRE: begin
        chk(open && cyc - t_mac >= m_ncc, "PRE timing");
        open = 0; t_pre = cyc;
      end
      CMD_MAC: begin
        chk(open && cmd.row == orow, "MAC to open row");
        chk(cmd.row == row_t'(m_row) && cmd.col == col_t'(m_col), $sformatf("MAC %0d address", m_k));
        chk(gb_raddr == MACN_W'(m_k) && mac_fire, "MAC buffer index");
        chk(cyc - t_act >= RCD && cyc - t_mac >= m_ncc, "MAC timing");
        t_mac = cyc; m_k++;
        m_col += m_stride;
        while (m_col >= 32) begin m_col -= 32; m_row++; end
      end
      CMD_WRGB: begin
        chk(cyc - t_wr >= 4 && gb_we && x_valid, "WR_GB spacing");
        t_wr = cyc;
      end
      default: ;
    endcase
  end

  task automatic run(input int nmac, input int stride, input bit npc, input int nwr,
                     input int base, input bit hold_x);
    desc = '0;
    desc.base_row = row_t'(base); desc.num_macs = MACN_W'(nmac);
    desc.stride = STRIDE_W'(stride); desc.npc_mode = npc;
    desc.num_wrgb = MACN_W'(nwr); desc.clear_acc = 1;
    m_k = 0; m_row = base; m_col = 0; m_stride = stride; m_ncc = npc ? 4 : 6;
    @(negedge clk); start = 1;
    #0 chk(pu_clear, "pu_clear with start");
    @(negedge clk); start = 0;
    fork
      begin : feed
        forever begin
          @(negedge clk);
          x_valid = hold_x ? ($urandom_range(0, 2) != 0 || x_valid) : 1'b1;
          if (x_valid && x_ready) begin @(posedge clk); #0.1 x_valid = 0; end
        end
      end
      begin @(posedge done); end
    join_any
    disable feed;
    x_valid = 0;
    @(negedge clk);
  endtask

  // cost of a pass of nmac MACs in the MAC phase, row by row
  function automatic int expect_cycles(int nmac, int stride, bit npc);
    int ncc = npc ? 4 : 6, tot = 0, n = 0, r = -1, c = 0, rr = 0;
    for (int k = 0; k < nmac; k++) begin
      if (rr != r) begin
        if (n > 0) tot += (RCD + n*ncc + RP > NRC) ? RCD + n*ncc + RP : NRC;
        n = 0; r = rr;
      end
      n++;
      c += stride;
      while (c >= 32) begin c -= 32; rr++; end
    end
    if (n > 0) tot += (RCD + n*ncc + RP > NRC) ? RCD + n*ncc + RP : NRC;
    return tot;
  endfunction

  initial begin
    #400000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    desc = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // Paper, Fig. 3: 32 MACs
    run(32, 1, 0, 0, 0, 0);
    chk(stats.mac_cycles == 249, $sformatf("RH+ PC 32 MACs: %0d cycles, want 249", stats.mac_cycles));
    chk(stats.acts == 1 && stats.pres == 1 && stats.macs == 32 && stats.row_hits == 31,
        $sformatf("RH+ PC counts act=%0d pre=%0d mac=%0d hit=%0d", stats.acts, stats.pres, stats.macs, stats.row_hits));
    chk(stats.mvsbs == 1, "one MV_SB");
    chk(stats.stalls > 0, "row hits wait for nCCDAB");
    run(32, 1, 1, 0, 7, 0);
    chk(stats.mac_cycles == 185, $sformatf("RH+ NPC 32 MACs: %0d cycles, want 185", stats.mac_cycles));
    run(32, 64, 0, 0, 0, 0);
    chk(stats.mac_cycles == 2016, $sformatf("stride-64 PC: %0d cycles, want 2016", stats.mac_cycles));
    chk(stats.acts == 32 && stats.row_hits == 0, "stride-64: every MAC a row miss");
    run(32, 64, 1, 0, 0, 0);
    chk(stats.mac_cycles == 2016, $sformatf("stride-64 NPC: %0d cycles, want 2016", stats.mac_cycles));
    // WR_GB phase with a stalling host stream, then MACs
    run(10, 1, 0, 6, 3, 1);
    chk(stats.wrgbs == 6, $sformatf("WR_GB count %0d", stats.wrgbs));
    chk(stats.mac_cycles == expect_cycles(10, 1, 0), "10 MACs cycles");
    // random passes
    for (int t = 0; t < 12; t++) begin
      int n, s;
      bit npc;
      n = $urandom_range(1, 140); s = $urandom_range(1, 70);
      npc = 1'($urandom_range(0, 1));
      run(n, s, npc, $urandom_range(0, 3), $urandom_range(0, 1000), 1);
      chk(stats.macs == n, "MAC count");
      chk(stats.mac_cycles == expect_cycles(n, s, npc),
          $sformatf("n=%0d s=%0d npc=%0d: %0d cycles, want %0d", n, s, npc, stats.mac_cycles,
                    expect_cycles(n, s, npc)));
      chk(stats.acts == stats.pres && stats.acts + stats.row_hits == n, "ACT/PRE/hit balance");
      chk(m_k == n, "monitor saw all MACs");
    end
    // zero-MAC pass finishes
    run(0, 1, 0, 1, 0, 0);
    chk(stats.macs == 0 && stats.acts == 0 && stats.mvsbs == 1, "empty pass");
    chk(!open, "row closed after pass");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
