// tb_debouncer: random bursts on 8 channels; the output is compared with a
// model written from sampled-input history: dout is high after clock edge t
// when a rising edge of the sampled input occurred at sample r with
// t-PULSE-1 <= r <= t-2 (two-flop synchroniser plus edge register).
`timescale 1ns/1ps
`include "tb/tb_check.svh"
module tb_debouncer;
  localparam int N = 8, P = 8, T = 3000;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] din = '0, dout;
  int checks = 0, failures = 0;
  logic [N-1:0] hist [T];
  int t = 0, highs = 0, restarts = 0;

  debouncer #(.N(N), .PULSE_CYC(P)) dut (.*);
  always #10 clk = ~clk;
  `TB_WATCHDOG(clk, T + 100)

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (t = 0; t < T - 1; t++) begin
      @(negedge clk);
      for (int i = 0; i < N; i++)
        if ($urandom_range(0, 9) == 0) din[i] = ~din[i];
      @(posedge clk);
      hist[t] = din;
      #1;
      if (t >= 12) for (int i = 0; i < N; i++) begin
        automatic logic exp_v = 0;
        automatic int nedges = 0;
        for (int r = t - P - 1; r <= t - 2; r++)
          if (hist[r][i] && !hist[r-1][i]) begin exp_v = 1; nedges++; end
        if (nedges > 1) restarts++;
        if (exp_v) highs++;
        `CHECK(dout[i] == exp_v, $sformatf("ch%0d t=%0d dout=%0b exp=%0b", i, t, dout[i], exp_v))
      end
    end
    `CHECK(highs > 100 && restarts > 10, "stimulus did not exercise pulses and restarts")
    `TB_DONE
  end
endmodule
