// Self-checking testbench of pim_pu.
//
// Drives random weight and input columns (including the extreme values
// -32768 and 32767) with random MAC enables and clears, and keeps its own
// running sum of lane products in a 64-bit integer. Checks the Result
// register one cycle after each edge, i.e. the PU's one-cycle latency.
`timescale 1ns/1ps
module tb_pim_pu;
  import pim_pkg::*;

  logic clk = 0, rst_n = 0, clear = 0, mac_en = 0;
  logic [COL_BITS-1:0] w, x;
  acc_t result;
  longint ref_acc = 0;
  int checks = 0, failures = 0;

  pim_pu dut (.*);

  always #1 clk = ~clk;

  function automatic logic [ELEM_W-1:0] rnd_elem();
    unique case ($urandom_range(0, 5))
      0: return 16'h8000;
      1: return 16'h7fff;
      default: return ELEM_W'($urandom);
    endcase
  endfunction

  function automatic longint dot(logic [COL_BITS-1:0] a, logic [COL_BITS-1:0] b);
    longint s = 0;
    for (int i = 0; i < LANES; i++)
      s += longint'($signed(a[i*ELEM_W +: ELEM_W])) * longint'($signed(b[i*ELEM_W +: ELEM_W]));
    return s;
  endfunction

  initial begin
    #20000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    w = '0; x = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    checks++; if (result != 0) begin failures++; $display("FAIL reset"); end
    // one known column: lanes i -> w=i+1, x=2 ; sum = 2*(1+..+16) = 272
    for (int i = 0; i < LANES; i++) begin
      w[i*ELEM_W +: ELEM_W] = ELEM_W'(i + 1); x[i*ELEM_W +: ELEM_W] = 16'd2;
    end
    mac_en = 1;
    @(negedge clk);
    checks++; if (result != 272) begin failures++; $display("FAIL known column: %0d", result); end
    ref_acc = 272;
    for (int t = 0; t < 3000; t++) begin
      for (int i = 0; i < LANES; i++) begin
        w[i*ELEM_W +: ELEM_W] = rnd_elem(); x[i*ELEM_W +: ELEM_W] = rnd_elem();
      end
      mac_en = ($urandom_range(0, 3) != 0);
      clear  = ($urandom_range(0, 60) == 0);
      @(negedge clk);
      if (clear) ref_acc = 0;
      else if (mac_en) ref_acc += dot(w, x);
      checks++;
      if (result != acc_t'(ref_acc)) begin
        failures++;
        $display("FAIL t=%0d result=%0d want=%0d", t, result, ref_acc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
