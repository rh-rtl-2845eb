// Self-checking testbench of rhp_addr_gen.
//
// The reference walks the MAC sequence column by column: starting at column
// 0 of base_row it advances stride columns per MAC and carries into the next
// row at every 32nd column, so it never multiplies or divides. Checks the two
// patterns of the paper (stride 64: rows R0, R2, R4, ... all at C0; stride 1:
// C0..C31 of R0, then R1) and random strides, bases and indices.
`timescale 1ns/1ps
module tb_rhp_addr_gen;
  import pim_pkg::*;

  row_t                base_row;
  logic [STRIDE_W-1:0] stride;
  logic [MACN_W-1:0]   mac_idx;
  row_t                row;
  col_t                col;
  int checks = 0, failures = 0;

  rhp_addr_gen dut (.*);

  task automatic check_seq(input row_t b, input int s, input int n);
    int r_ref, c_ref;
    r_ref = b; c_ref = 0;
    for (int k = 0; k < n; k++) begin
      base_row = b; stride = STRIDE_W'(s); mac_idx = MACN_W'(k);
      #1;
      checks++;
      if (row !== row_t'(r_ref) || col !== col_t'(c_ref)) begin
        failures++;
        $display("FAIL base=%0d stride=%0d k=%0d: got R%0d C%0d, want R%0d C%0d",
                 b, s, k, row, col, r_ref, c_ref);
      end
      c_ref += s;
      while (c_ref >= 32) begin c_ref -= 32; r_ref++; end
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // stride 64: M0 in R0, M1 in R2, M2 in R4 (every MAC a new row)
    base_row = 0; stride = 64;
    for (int k = 0; k < 3; k++) begin
      mac_idx = MACN_W'(k); #1;
      checks++;
      if (row != row_t'(2*k) || col != 0) begin
        failures++; $display("FAIL stride-64 M%0d -> R%0d C%0d", k, row, col);
      end
    end
    // stride 1: 32 MACs in R0 then R1
    check_seq(0, 1, 70);
    check_seq(0, 64, 40);
    check_seq(100, 1, 100);
    for (int t = 0; t < 20; t++)
      check_seq(row_t'($urandom_range(0, 20000)), $urandom_range(1, 100), 50);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
