// GEMV buffer of one pseudo-channel (the "GEMV/SoftMax buffer").
//
// Holds the input vector of a GEMV pass as ENTRIES columns of COL_BITS bits.
// WR_GB writes one column; during the MAC phase the column that belongs to
// the current MAC_AB is read and broadcast to the PUs of every bank of the
// pseudo-channel. The paper names the buffer and its place beside the bank
// groups; its size, ports and timing here are this design's choices: 1024
// columns (32 KiB, 16384 16-bit elements, enough for a whole input vector of
// d_model = 12288), one synchronous write port and one
// asynchronous read port so the column reaches the PUs in the cycle of its
// MAC_AB. Addresses wrap modulo ENTRIES. Contents are not reset.
module pim_global_buffer
  import pim_pkg::*;
#(
  parameter int unsigned ENTRIES = 1024,
  parameter int unsigned W       = COL_BITS
) (
  input  logic                       clk,
  input  logic                       we,
  input  logic [$clog2(ENTRIES)-1:0] waddr,
  input  logic [W-1:0]               wdata,
  input  logic [$clog2(ENTRIES)-1:0] raddr,
  output logic [W-1:0]               rdata
);
  logic [W-1:0] mem [ENTRIES];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];

endmodule
