// RH+ PIM command scheduler of one pseudo-channel.
//
// Runs one GEMV pass described by a gemv_desc_t: first num_wrgb WR_GB
// commands load the input vector into the GEMV buffer, one column per
// command as the host stream offers it; then num_macs MAC_AB commands are
// issued, the k-th to the bank address rhp_addr_gen gives for k; finally one
// MV_SB moves the PU results out and done pulses.
//
// Row management is the heart of the design. The scheduler keeps the open
// row of the (all-bank) row buffer. A MAC to the open row is a row hit and
// issues as soon as tRCD has passed since the ACT and nCCDAB since the
// previous MAC. A MAC to another row first closes the open row with PRE (once
// the previous MAC has had its nCCDAB) and opens the new one with ACT (once
// tRP has passed since the PRE and nRC since the previous ACT). With a
// stride of 1 (RH+) 32 MACs share one ACT/PRE pair and a row costs
// tRCD + 32*nCCDAB + tRP = nRC + 31*nCCDAB cycles (249 in the power-
// constrained mode, 185 in the non-power-constrained one); with a stride of
// 64 every MAC costs a full nRC (2016 cycles for 32 MACs) in either mode.
// The MAC phase ends, and stats.mac_cycles (counted from the first ACT) is
// taken, when the bank could accept its next ACT: tRP after the last PRE and
// nRC after the last ACT.
//
// Timing values are the paper's for HBM3 at 5.2 Gbps: nRC = 63,
// nCCDAB = 6 (PC) or 4 (NPC), WR_GB and MV_SB 4 tCK. The paper gives nRC as
// a whole; its split into tRCD = 18 and tRP = 39 is this design's choice,
// made so that nRC = tRCD + nCCDAB + tRP reproduces both the 249 and the 185
// cycle rows of the paper (the latter quotes nRC = 61 for NPC). ACT-to-ACT
// is still held to nRC = 63, so single-MAC rows cost the same in both modes.
//
// Interface: start (one cycle, while idle) latches desc. x_ready is high when
// a WR_GB can issue; a column is taken when x_valid and x_ready are both
// high. cmd carries one command per cycle towards the banks; gb_* and mac_*
// steer the GEMV buffer and the PUs in the same cycle as the command.
// Statistics hold their values from done until the next start.
module rhp_cmd_sched
  import pim_pkg::*;
#(
  parameter int unsigned N_RC        = 63,
  parameter int unsigned N_CCDAB_PC  = 6,
  parameter int unsigned N_CCDAB_NPC = 4,
  parameter int unsigned T_RCD       = 18,
  parameter int unsigned T_RP        = 39,
  parameter int unsigned T_WRGB      = 4,
  parameter int unsigned T_MVSB      = 4
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  gemv_desc_t         desc,
  output logic               busy,
  output logic               done,
  // input-vector stream from the host
  input  logic               x_valid,
  output logic               x_ready,
  // commands towards the banks
  output dram_cmd_t          cmd,
  // GEMV buffer and PU control
  output logic               gb_we,
  output logic [MACN_W-1:0]  gb_waddr,
  output logic [MACN_W-1:0]  gb_raddr,
  output logic               pu_clear,
  output logic               mac_fire,
  output logic               mvsb_fire,
  output sched_stats_t       stats
);
  localparam int unsigned TW   = 8;            // width of the "cycles since" counters
  localparam logic [TW-1:0] SAT = '1;

  typedef enum logic [2:0] {S_IDLE, S_WRGB, S_MAC, S_MVSB, S_WAIT} state_e;

  state_e            state;
  gemv_desc_t        d;
  logic [MACN_W-1:0] mac_idx, wrgb_idx;
  logic              row_open, first_after_act, mac_started;
  row_t              open_row;
  logic [TW-1:0]     since_act, since_mac, since_pre, since_cmd;
  logic [CNT_W-1:0]  mac_timer;

  row_t              tgt_row;
  col_t              tgt_col;
  logic [TW-1:0]     nccdab;

  rhp_addr_gen u_addr (
    .base_row (d.base_row),
    .stride   (d.stride),
    .mac_idx  (mac_idx),
    .row      (tgt_row),
    .col      (tgt_col)
  );

  // decisions of this cycle
  logic do_act, do_pre, do_mac, do_wrgb, do_mvsb, mac_exit, stall;

  always_comb begin
    nccdab    = d.npc_mode ? TW'(N_CCDAB_NPC) : TW'(N_CCDAB_PC);
    do_act    = 1'b0;
    do_pre    = 1'b0;
    do_mac    = 1'b0;
    do_wrgb   = 1'b0;
    do_mvsb   = 1'b0;
    mac_exit  = 1'b0;
    stall     = 1'b0;
    x_ready   = 1'b0;
    unique case (state)
      S_WRGB: begin
        x_ready = (wrgb_idx != d.num_wrgb) && (since_cmd >= TW'(T_WRGB));
        do_wrgb = x_ready && x_valid;
      end
      S_MAC: begin
        if (mac_idx != d.num_macs) begin
          if (row_open && open_row == tgt_row) begin
            do_mac = (since_act >= TW'(T_RCD)) && (since_mac >= nccdab);
            stall  = !do_mac;
          end else if (row_open) begin
            do_pre = since_mac >= nccdab;
          end else begin
            do_act = (since_pre >= TW'(T_RP)) && (since_act >= TW'(N_RC));
          end
        end else if (row_open) begin
          do_pre = since_mac >= nccdab;
        end else begin
          mac_exit = (since_pre >= TW'(T_RP)) && (since_act >= TW'(N_RC));
        end
      end
      S_MVSB: do_mvsb = 1'b1;
      default: ;
    endcase
  end

  always_comb begin
    cmd.cmd  = CMD_NOP;
    cmd.row  = tgt_row;
    cmd.col  = tgt_col;
    if (do_act)  cmd.cmd = CMD_ACT;
    if (do_pre)  cmd.cmd = CMD_PRE;
    if (do_mac)  cmd.cmd = CMD_MAC;
    if (do_wrgb) cmd.cmd = CMD_WRGB;
    if (do_mvsb) cmd.cmd = CMD_MVSB;
    gb_we     = do_wrgb;
    gb_waddr  = wrgb_idx;
    gb_raddr  = mac_idx;
    mac_fire  = do_mac;
    mvsb_fire = do_mvsb;
    pu_clear  = start && (state == S_IDLE) && desc.clear_acc;
    busy      = (state != S_IDLE);
  end

  function automatic logic [TW-1:0] tick(logic [TW-1:0] v);
    return (v == SAT) ? SAT : v + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state           <= S_IDLE;
      d               <= '0;
      mac_idx         <= '0;
      wrgb_idx        <= '0;
      row_open        <= 1'b0;
      open_row        <= '0;
      first_after_act <= 1'b0;
      mac_started     <= 1'b0;
      since_act       <= SAT;
      since_mac       <= SAT;
      since_pre       <= SAT;
      since_cmd       <= SAT;
      mac_timer       <= '0;
      done            <= 1'b0;
      stats           <= '0;
    end else begin
      done      <= 1'b0;
      since_act <= do_act ? TW'(1) : tick(since_act);
      since_mac <= do_mac ? TW'(1) : tick(since_mac);
      since_pre <= do_pre ? TW'(1) : tick(since_pre);
      since_cmd <= (do_wrgb || do_mvsb) ? TW'(1) : tick(since_cmd);
      if (state != S_IDLE) stats.cycles <= stats.cycles + 1'b1;
      if (mac_started)     mac_timer    <= mac_timer + 1'b1;
      if (stall)           stats.stalls <= stats.stalls + 1'b1;

      unique case (state)
        S_IDLE: if (start) begin
          d           <= desc;
          mac_idx     <= '0;
          wrgb_idx    <= '0;
          mac_started <= 1'b0;
          mac_timer   <= '0;
          stats       <= '0;
          stats.cycles <= CNT_W'(1);
          state       <= S_WRGB;
        end
        S_WRGB: begin
          if (do_wrgb) begin
            wrgb_idx    <= wrgb_idx + 1'b1;
            stats.wrgbs <= stats.wrgbs + 1'b1;
          end
          // the MAC phase starts once the last WR_GB has finished
          if (wrgb_idx == d.num_wrgb && since_cmd >= TW'(T_WRGB)) state <= S_MAC;
        end
        S_MAC: begin
          if (do_act) begin
            row_open        <= 1'b1;
            open_row        <= tgt_row;
            first_after_act <= 1'b1;
            stats.acts      <= stats.acts + 1'b1;
            if (!mac_started) begin
              mac_started <= 1'b1;
              mac_timer   <= CNT_W'(1);
            end
          end
          if (do_pre) begin
            row_open   <= 1'b0;
            stats.pres <= stats.pres + 1'b1;
          end
          if (do_mac) begin
            mac_idx         <= mac_idx + 1'b1;
            first_after_act <= 1'b0;
            stats.macs      <= stats.macs + 1'b1;
            if (!first_after_act) stats.row_hits <= stats.row_hits + 1'b1;
          end
          if (mac_exit) begin
            stats.mac_cycles <= mac_started ? mac_timer : '0;
            mac_started      <= 1'b0;
            state            <= S_MVSB;
          end
        end
        S_MVSB: begin
          stats.mvsbs <= stats.mvsbs + 1'b1;
          state       <= S_WAIT;
        end
        S_WAIT: if (since_cmd >= TW'(T_MVSB)) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The command stream keeps the DRAM rules it is built around.
  a_mac_needs_open_row: assert property (@(posedge clk) disable iff (!rst_n)
    do_mac |-> row_open && open_row == tgt_row);
  a_act_nrc: assert property (@(posedge clk) disable iff (!rst_n)
    do_act |-> !row_open && since_act >= TW'(N_RC) && since_pre >= TW'(T_RP));
  a_mac_nccdab: assert property (@(posedge clk) disable iff (!rst_n)
    do_mac |-> since_mac >= nccdab && since_act >= TW'(T_RCD));

  initial begin
    assert (N_RC < 255 && T_RP < 255 && T_RCD < 255) else $error("timing exceeds counter range");
  end

endmodule
