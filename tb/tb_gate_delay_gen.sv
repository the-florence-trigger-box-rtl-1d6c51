// tb_gate_delay_gen: 8 channels with random per-channel delays and a random
// common width. Inputs are short pulses (2 ns, shorter than the 20 ns clock)
// placed at random points of the clock period. A per-channel model of the
// nonparalyzable dead time predicts, after every clock edge, whether the
// gate is high: for an accepted edge first seen at clock edge k the gate is
// high after edges k+3+delay .. k+3+delay+width, and edges before
// k+4+delay+width are ignored.
`timescale 1ns/1ps
`include "tb/tb_check.svh"
module tb_gate_delay_gen;
  localparam int N = 8;
  logic clk = 0, rst_n = 1;
  logic [N-1:0] din = '0, dout;
  logic [5:0] width;
  logic [N-1:0][5:0] delay;
  int checks = 0, failures = 0;
  int kacc [N];            // edge index k of the last accepted request
  int accepted = 0, ignored = 0, e = 0;

  gate_delay_gen #(.N(N), .TW(6)) dut (.*);
  always #10 clk = ~clk;
  `TB_WATCHDOG(clk, 30000)

  function automatic logic exp_gate(int i, int edge_idx);
    int s = kacc[i] + 3 + int'(delay[i]);
    return (kacc[i] >= 0) && edge_idx >= s && edge_idx <= s + int'(width);
  endfunction

  initial begin
    foreach (kacc[i]) kacc[i] = -1000;
    // The input latches are cleared by a falling edge of their clear line;
    // the first pulse clears the hold flags (which start at random values in
    // a two-state simulator), the second then clears the latches.
    #1 rst_n = 0; #1 rst_n = 1; #1 rst_n = 0;
    width = 6'd3;
    for (int i = 0; i < N; i++) delay[i] = 6'(i * 5);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (e = 0; e < 20000; e++) begin
      @(posedge clk);
      if (e % 5000 == 4999) begin
        // reprogram only when every channel is idle
        width = 6'($urandom_range(0, 10));
        for (int i = 0; i < N; i++) delay[i] = 6'($urandom_range(0, 63));
      end
      #1;
      for (int i = 0; i < N; i++)
        `CHECK(dout[i] == exp_gate(i, e), $sformatf("ch%0d edge %0d dout=%0b kacc=%0d d=%0d w=%0d", i, e, dout[i], kacc[i], delay[i], width))
      // at the end of each programming period keep inputs quiet so that
      // channels are idle when reprogrammed
      if (e % 5000 < 4850) begin
        #($urandom_range(2, 14));
        for (int i = 0; i < N; i++)
          if ($urandom_range(0, 11) == 0) begin
            // edge index of the first clock edge after this input edge is e+1
            if (e + 1 > kacc[i] + 4 + int'(delay[i]) + int'(width)) begin
              kacc[i] = e + 1; accepted++;
            end else ignored++;
            din[i] = 1'b1;
          end
        #2 din = '0;
      end
    end
    `CHECK(accepted > 200 && ignored > 200, "dead time not exercised")
    `TB_DONE
  end
endmodule
