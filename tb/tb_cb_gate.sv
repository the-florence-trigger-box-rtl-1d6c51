// tb_cb_gate: random requests on 8 channels with random widths; a
// nonparalyzable model (busy-until counter per channel) predicts each output.
// The pulse length is width+1 clocks and edges during a pulse are ignored.
`timescale 1ns/1ps
`include "tb/tb_check.svh"
module tb_cb_gate;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] din = '0, dout;
  logic [5:0] width = '0;
  int checks = 0, failures = 0;
  int remain [N];
  logic [N-1:0] prev = '0;
  int ignored = 0, started = 0;

  cb_gate #(.N(N), .TW(6)) dut (.*);
  always #10 clk = ~clk;
  `TB_WATCHDOG(clk, 20000)

  initial begin
    foreach (remain[i]) remain[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 12000; t++) begin
      @(negedge clk);
      if (t % 3000 == 0) width = (t == 0) ? 6'd0 : (t == 3000) ? 6'd63 : 6'($urandom_range(1, 20));
      for (int i = 0; i < N; i++) if ($urandom_range(0, 7) == 0) din[i] = ~din[i];
      @(posedge clk);
      // model, evaluated at this clock edge
      for (int i = 0; i < N; i++) begin
        if (remain[i] > 0) begin
          remain[i]--;
          if (din[i] && !prev[i]) ignored++;
        end else if (din[i] && !prev[i]) begin
          remain[i] = int'(width) + 1; started++;
        end
      end
      prev = din;
      #1;
      for (int i = 0; i < N; i++)
        `CHECK(dout[i] == (remain[i] > 0), $sformatf("ch%0d t=%0d", i, t))
    end
    `CHECK(ignored > 50 && started > 50, "no dead-time events")
    `TB_DONE
  end
endmodule
