// HBM3-PIM stack with RH+ MAC_AB scheduling: the top of the design.
//
// A stack has NUM_PCH = 32 pseudo-channels (16 channels x 2) of NB = 32
// banks each, 1024 banks with one PU apiece. A GEMV pass is broadcast to all
// pseudo-channels: the same descriptor, the same input-vector stream (every
// bank multiplies its own weight rows by the same vector) and the same start.
// All pseudo-channels therefore run in lockstep, each with its own scheduler,
// open-row state and GEMV buffer, and done pulses when all have finished.
//
// Host side: start / desc / busy / done; the input vector arrives as a
// valid/ready stream of 256-bit columns, taken by every pseudo-channel in the
// same cycle; res_valid pulses with all 1024 results after the pass's MV_SB.
// DRAM side (the arrays are not part of the RTL): per pseudo-channel the
// command/address (cmd) and, per bank, the column data of a MAC_AB.
// stats reports the counters of pseudo-channel 0, which all others equal.
//
// The stack organisation and the RH+ row-hit scheduling follow the paper;
// broadcasting one pass to the whole stack is this design's choice.
module rhp_pim_top
  import pim_pkg::*;
#(
  parameter int unsigned NUM_PCH     = 32,
  parameter int unsigned NB          = 32,
  parameter int unsigned GB_ENTRIES  = 1024,
  parameter int unsigned N_RC        = 63,
  parameter int unsigned N_CCDAB_PC  = 6,
  parameter int unsigned N_CCDAB_NPC = 4,
  parameter int unsigned T_RCD       = 18,
  parameter int unsigned T_RP        = 39
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  gemv_desc_t   desc,
  output logic         busy,
  output logic         done,
  input  logic         x_valid,
  output logic         x_ready,
  input  column_t      x_data,
  output dram_cmd_t    cmd      [NUM_PCH],
  input  column_t      col_data [NUM_PCH][NB],
  output logic         res_valid,
  output acc_t         results  [NUM_PCH][NB],
  output sched_stats_t stats
);
  logic         p_busy  [NUM_PCH];
  logic         p_done  [NUM_PCH];
  logic         p_ready [NUM_PCH];
  logic         p_rv    [NUM_PCH];
  sched_stats_t p_stats [NUM_PCH];
  logic         all_ready;
  logic [NUM_PCH-1:0] done_seen;

  always_comb begin
    all_ready = 1'b1;
    busy      = 1'b0;
    for (int p = 0; p < NUM_PCH; p++) begin
      all_ready = all_ready & p_ready[p];
      busy      = busy | p_busy[p];
    end
  end
  assign x_ready   = all_ready;
  assign res_valid = p_rv[0];
  assign stats     = p_stats[0];

  for (genvar p = 0; p < NUM_PCH; p++) begin : g_pch
    rhp_pim_pch #(
      .NB(NB), .GB_ENTRIES(GB_ENTRIES), .N_RC(N_RC),
      .N_CCDAB_PC(N_CCDAB_PC), .N_CCDAB_NPC(N_CCDAB_NPC),
      .T_RCD(T_RCD), .T_RP(T_RP)
    ) u_pch (
      .clk, .rst_n, .start, .desc,
      .busy      (p_busy[p]),
      .done      (p_done[p]),
      .x_valid   (x_valid && all_ready),
      .x_ready   (p_ready[p]),
      .x_data,
      .cmd       (cmd[p]),
      .col_data  (col_data[p]),
      .res_valid (p_rv[p]),
      .results   (results[p]),
      .stats     (p_stats[p])
    );
  end

  // done once every pseudo-channel has reported done for this pass
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done_seen <= '0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) done_seen <= '0;
      else begin
        logic [NUM_PCH-1:0] nxt;
        for (int p = 0; p < NUM_PCH; p++) nxt[p] = done_seen[p] | p_done[p];
        if (&nxt && nxt != '0 && !(&done_seen)) done <= 1'b1;
        done_seen <= nxt;
      end
    end
  end

  a_x_hold: assert property (@(posedge clk) disable iff (!rst_n)
    x_valid && !x_ready && busy |=> x_valid);

endmodule
