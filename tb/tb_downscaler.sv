// tb_downscaler: random pulses of random length on 8 channels with factors
// 0,1,2,3,7,50,1000,65535. The first trigger of each group of n must pass
// whole, the others must be blocked whole; pass counts are checked at the
// end against ceil(edges/n).
`timescale 1ns/1ps
`include "tb/tb_check.svh"
module tb_downscaler;
  localparam int T = 8;
  logic clk = 0, rst_n = 0;
  logic [T-1:0] din = '0, dout;
  logic [T-1:0][15:0] factor;
  int checks = 0, failures = 0;
  int edges [T], passed [T];
  logic [T-1:0] cur_pass = '0, prev = '0;

  downscaler #(.N_TRIG(T), .W(16)) dut (.*);
  always #10 clk = ~clk;
  `TB_WATCHDOG(clk, 40000)

  initial begin
    factor = {16'd65535, 16'd1000, 16'd50, 16'd7, 16'd3, 16'd2, 16'd1, 16'd0};
    foreach (edges[i]) begin edges[i] = 0; passed[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 30000; t++) begin
      @(negedge clk);
      for (int i = 0; i < T; i++) if ($urandom_range(0, 3) == 0) din[i] = ~din[i];
      for (int i = 0; i < T; i++) if (din[i] && !prev[i]) begin
        automatic int n = (factor[i] == 0) ? 1 : int'(factor[i]);
        cur_pass[i] = (edges[i] % n == 0);
        edges[i]++;
        if (cur_pass[i]) passed[i]++;
      end
      #1;
      for (int i = 0; i < T; i++)
        `CHECK(dout[i] == (din[i] & cur_pass[i]), $sformatf("ch%0d t=%0d", i, t))
      prev = din;
    end
    for (int i = 0; i < T; i++) begin
      automatic int n = (factor[i] == 0) ? 1 : int'(factor[i]);
      `CHECK(passed[i] == (edges[i] + n - 1) / n, $sformatf("pass count ch%0d", i))
    end
    `CHECK(edges[6] > 1000, "enough edges for factor 1000")
    `TB_DONE
  end
endmodule
