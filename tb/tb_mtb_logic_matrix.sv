// tb_mtb_logic_matrix: full size (128 inputs, 8 triggers). First fixed
// configurations: a plain OR, an AND made with De Morgan (inverted operands
// and inverted output), a disabled output and a feedback coincidence. Then
// random masks and inputs, compared with an operand-by-operand model that
// uses the outputs of the previous clock as feedback operands.
`timescale 1ns/1ps
`include "tb/tb_check.svh"
module tb_mtb_logic_matrix;
  localparam int N = 128, T = 8;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] din;
  logic [T-1:0][N-1:0] in_en, in_inv;
  logic [T-1:0][T-1:0] fb_en, fb_inv;
  logic [T-1:0] out_en, out_inv, trig, prev;
  int checks = 0, failures = 0;

  mtb_logic_matrix #(.N(N), .N_TRIG(T)) dut (.*);
  always #10 clk = ~clk;
  `TB_WATCHDOG(clk, 5000)

  function automatic logic [T-1:0] model(logic [T-1:0] fb);
    logic [T-1:0] r;
    for (int j = 0; j < T; j++) begin
      logic s = 0;
      for (int i = 0; i < N; i++) if (in_en[j][i]) s |= din[i] ^ in_inv[j][i];
      for (int i = 0; i < T; i++) if (fb_en[j][i]) s |= fb[i] ^ fb_inv[j][i];
      r[j] = out_en[j] & (s ^ out_inv[j]);
    end
    return r;
  endfunction

  initial begin
    din = '0; in_en = '0; in_inv = '0; fb_en = '0; fb_inv = '0; out_en = '0; out_inv = '0;
    prev = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // trig0 = in0 | in1 ; trig1 = in0 & in1 ; trig2 = trig0(fb) & in5 ; trig3 off
    in_en[0][1:0] = 2'b11;
    in_en[1][1:0] = 2'b11; in_inv[1][1:0] = 2'b11; out_inv[1] = 1;
    fb_en[2][0] = 1; fb_inv[2][0] = 1; in_en[2][5] = 1; in_inv[2][5] = 1; out_inv[2] = 1;
    in_en[3] = '1;
    out_en = 8'b0000_0111;
    for (int v = 0; v < 4; v++) begin
      @(negedge clk); din = '0; din[1:0] = 2'(v); din[5] = 1; #1;
      `CHECK(trig[0] == (v != 0), "OR")
      `CHECK(trig[1] == (v == 3), "AND by De Morgan")
      `CHECK(trig[3] == 0, "disabled output")
      @(posedge clk); #1;
      `CHECK(trig[2] == (v != 0), "feedback coincidence one clock later")
    end
    @(negedge clk); din = '0; #1;
    `CHECK(trig[2] == 1'b0, "feedback AND needs both operands")
    // random
    for (int it = 0; it < 1500; it++) begin
      @(negedge clk);
      for (int j = 0; j < T; j++) begin
        for (int i = 0; i < N; i++) begin
          in_en[j][i]  = ($urandom_range(0, 31) == 0);
          in_inv[j][i] = ($urandom_range(0, 15) == 0);
        end
        fb_en[j]  = 8'($urandom) & 8'($urandom);
        fb_inv[j] = 8'($urandom) & 8'($urandom) & 8'($urandom);
      end
      out_en = 8'($urandom) | 8'($urandom);
      out_inv = 8'($urandom) & 8'($urandom);
      for (int i = 0; i < N; i++) din[i] = ($urandom_range(0, 7) == 0);
      #1;
      `CHECK(trig == model(prev), $sformatf("random it %0d trig=%h exp=%h", it, trig, model(prev)))
      @(posedge clk);
      prev = trig;
    end
    `TB_DONE
  end
endmodule
