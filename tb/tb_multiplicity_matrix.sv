// tb_multiplicity_matrix: full size (128 inputs, 2 sets of 8). Inputs with
// a chosen number of active bits are driven and each M>=n output is compared
// with a count made by the testbench. Every multiplicity 0..10 is visited.
`timescale 1ns/1ps
`include "tb/tb_check.svh"
module tb_multiplicity_matrix;
  localparam int N = 128;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] din;
  logic [1:0][N-1:0] mask;
  logic [15:0] dout;
  int checks = 0, failures = 0;

  multiplicity_matrix #(.N(N), .N_SET(2), .M_MAX(8)) dut (.*);
  always #10 clk = ~clk;
  `TB_WATCHDOG(clk, 3000)

  initial begin
    din = '0; mask = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 1000; it++) begin
      int k, c0, c1;
      @(negedge clk);
      for (int s = 0; s < 2; s++)
        for (int i = 0; i < N; i++) mask[s][i] = ($urandom_range(0, 1) == 1);
      din = '0;
      k = it % 11;                      // number of bits set
      for (int b = 0; b < k; b++) din[$urandom_range(0, N-1)] = 1'b1;
      c0 = 0; c1 = 0;
      for (int i = 0; i < N; i++) begin
        if (din[i] && mask[0][i]) c0++;
        if (din[i] && mask[1][i]) c1++;
      end
      @(posedge clk); #1;
      for (int n = 1; n <= 8; n++) begin
        `CHECK(dout[n-1]   == (c0 >= n), $sformatf("set0 M>=%0d c=%0d", n, c0))
        `CHECK(dout[8+n-1] == (c1 >= n), $sformatf("set1 M>=%0d c=%0d", n, c1))
      end
    end
    `TB_DONE
  end
endmodule
