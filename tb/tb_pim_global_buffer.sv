// Self-checking testbench of pim_global_buffer.
//
// Fills all 1024 columns with random data, reads them back in random order
// through the asynchronous read port, overwrites some and checks that a
// write lands at the next edge and that reads see it in the same cycle
// they are addressed, as the MAC_AB broadcast needs.
`timescale 1ns/1ps
module tb_pim_global_buffer;
  import pim_pkg::*;

  localparam int N = 1024;
  logic clk = 0, we = 0;
  logic [9:0] waddr = 0, raddr = 0;
  column_t wdata, rdata;
  column_t shadow [N];
  int checks = 0, failures = 0;

  pim_global_buffer dut (.*);

  always #1 clk = ~clk;

  function automatic column_t rnd_col();
    column_t c;
    for (int i = 0; i < COL_BITS / 32; i++) c[i*32 +: 32] = $urandom;
    return c;
  endfunction

  initial begin
    #50000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wdata = '0;
    for (int a = 0; a < N; a++) begin
      @(negedge clk);
      we = 1; waddr = 10'(a); wdata = rnd_col(); shadow[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 2000; t++) begin
      raddr = 10'($urandom_range(0, N - 1));
      if ($urandom_range(0, 3) == 0) begin
        we = 1; waddr = 10'($urandom_range(0, N - 1)); wdata = rnd_col();
      end else we = 0;
      #0.5;
      checks++;
      if (rdata != shadow[raddr]) begin failures++; $display("FAIL read %0d", raddr); end
      @(negedge clk);
      if (we) shadow[waddr] = wdata;
      #0.1;
      checks++;
      if (rdata != shadow[raddr]) begin failures++; $display("FAIL read-after-write %0d", raddr); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
