// tb_merge_shuffle: all 24 permutations of the groups A,B,C,D plus random
// selectors; each output byte must equal the selected source byte.
`timescale 1ns/1ps
`include "tb/tb_check.svh"
module tb_merge_shuffle;
  logic clk = 0, rst_n = 0;
  logic [15:0] lm, mm;
  logic [3:0][1:0] sel;
  logic [31:0] dout;
  int checks = 0, failures = 0;
  logic [7:0] src [4];

  merge_shuffle dut (.*);
  always #10 clk = ~clk;
  `TB_WATCHDOG(clk, 2000)

  initial begin
    lm = '0; mm = '0; sel = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 400; it++) begin
      @(negedge clk);
      lm = 16'($urandom); mm = 16'($urandom);
      src[0] = lm[7:0]; src[1] = lm[15:8]; src[2] = mm[7:0]; src[3] = mm[15:8];
      if (it < 256) begin
        for (int k = 0; k < 4; k++) sel[k] = 2'((it >> (2*k)) & 3);
      end else sel = 8'($urandom);
      @(posedge clk); #1;
      for (int k = 0; k < 4; k++)
        `CHECK(dout[8*k +: 8] == src[sel[k]], $sformatf("it %0d grp %0d", it, k))
    end
    // identity: A,B,C,D in order
    @(negedge clk); lm = 16'hBBAA; mm = 16'hDDCC; sel = {2'd3, 2'd2, 2'd1, 2'd0};
    @(posedge clk); #1;
    `CHECK(dout == 32'hDDCCBBAA, "identity order")
    @(negedge clk); sel = {2'd1, 2'd0, 2'd3, 2'd2};
    @(posedge clk); #1;
    `CHECK(dout == 32'hBBAADDCC, "multiplicity groups first")
    `TB_DONE
  end
endmodule
