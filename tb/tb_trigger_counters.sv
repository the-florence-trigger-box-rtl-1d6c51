// tb_trigger_counters: random pulses of random length on 8 channels; the
// counters must equal the number of rising edges counted by the testbench,
// including after clear strobes.
`timescale 1ns/1ps
`include "tb/tb_check.svh"
module tb_trigger_counters;
  logic clk = 0, rst_n = 0;
  logic [7:0] din = '0, prev = '0;
  logic clr = 0;
  logic [7:0][31:0] count;
  int checks = 0, failures = 0;
  int ref_c [8];

  trigger_counters #(.N(8), .W(32)) dut (.*);
  always #10 clk = ~clk;
  `TB_WATCHDOG(clk, 12000)

  initial begin
    foreach (ref_c[i]) ref_c[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 10000; t++) begin
      @(negedge clk);
      for (int i = 0; i < 8; i++) if ($urandom_range(0, 2) == 0) din[i] = ~din[i];
      clr = (t % 3000 == 2999);
      @(posedge clk);
      for (int i = 0; i < 8; i++)
        if (clr) ref_c[i] = 0;
        else if (din[i] && !prev[i]) ref_c[i]++;
      prev = din;
      #1;
      if (t % 7 == 0 || clr)
        for (int i = 0; i < 8; i++)
          `CHECK(count[i] == 32'(ref_c[i]), $sformatf("ch%0d t=%0d %0d exp %0d", i, t, count[i], ref_c[i]))
    end
    `TB_DONE
  end
endmodule
