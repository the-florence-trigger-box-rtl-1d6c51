// tb_cb_logic_matrix: random inputs and masks at full size (128 x 16); each
// output is compared one clock later with a bit-by-bit OR loop.
`timescale 1ns/1ps
`include "tb/tb_check.svh"
module tb_cb_logic_matrix;
  localparam int N = 128, M = 16;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] din;
  logic [M-1:0][N-1:0] mask;
  logic [M-1:0] dout, exp_o;
  int checks = 0, failures = 0;

  cb_logic_matrix #(.N(N), .N_OUT(M)) dut (.*);
  always #10 clk = ~clk;
  `TB_WATCHDOG(clk, 2000)

  initial begin
    din = '0; mask = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 500; it++) begin
      @(negedge clk);
      // sparse inputs and sparse masks so that both 0 and 1 outputs occur
      for (int i = 0; i < N; i++) din[i] = ($urandom_range(0, 15) == 0);
      for (int j = 0; j < M; j++)
        for (int i = 0; i < N; i++) mask[j][i] = ($urandom_range(0, 7) == 0);
      if (it % 50 == 0) mask[it % M] = '0;
      for (int j = 0; j < M; j++) begin
        exp_o[j] = 0;
        for (int i = 0; i < N; i++) if (din[i] && mask[j][i]) exp_o[j] = 1;
      end
      @(posedge clk); #1;
      for (int j = 0; j < M; j++)
        `CHECK(dout[j] == exp_o[j], $sformatf("it %0d out %0d", it, j))
    end
    `TB_DONE
  end
endmodule
