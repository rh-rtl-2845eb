// Behavioural model of the DRAM banks of one pseudo-channel, for simulation
// only. It follows the all-bank commands: ACT opens a row in every bank
// (copies it into the row buffer), PRE closes it, and while a MAC_AB is on
// the command bus it returns, combinationally, each bank's column of the
// open row. Stored data is the hash pattern tb_pim_pkg::wgt. A MAC with no
// open row, or to a row other than the open one, is reported as an error.
module pim_dram_model
  import pim_pkg::*;
#(
  parameter int NB     = 32,
  parameter int PCH_ID = 0
) (
  input  logic      clk,
  input  logic      rst_n,
  input  dram_cmd_t cmd,
  output column_t   col_data [NB],
  output int        errors
);
  bit   open;
  row_t orow;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      open <= 0; orow <= '0; errors <= 0;
    end else begin
      if (cmd.cmd == CMD_ACT) begin
        if (open) errors <= errors + 1;
        open <= 1; orow <= cmd.row;
      end
      if (cmd.cmd == CMD_PRE) open <= 0;
      if (cmd.cmd == CMD_MAC && (!open || cmd.row != orow)) errors <= errors + 1;
    end
  end

  always_comb begin
    for (int b = 0; b < NB; b++)
      col_data[b] = (cmd.cmd == CMD_MAC) ? tb_pim_pkg::wcol(PCH_ID, b, int'(orow), int'(cmd.col)) : '0;
  end
endmodule
