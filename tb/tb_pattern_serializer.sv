// tb_pattern_serializer: random patterns loaded with BIT_CYC = 1 and 3; the
// line is sampled in the middle of each bit slot and must show the start bit
// followed by the pattern, most significant bit first, then return to 0.
// A load during a frame must be ignored.
`timescale 1ns/1ps
`include "tb/tb_check.svh"
module tb_pattern_serializer;
  logic clk = 0, rst_n = 0;
  logic load1 = 0, load3 = 0;
  logic [7:0] pat = '0;
  logic s1, s3, b1, b3;
  int checks = 0, failures = 0;

  pattern_serializer #(.N(8), .BIT_CYC(1)) u1 (.clk, .rst_n, .load(load1), .pattern(pat), .sout(s1), .busy(b1));
  pattern_serializer #(.N(8), .BIT_CYC(3)) u3 (.clk, .rst_n, .load(load3), .pattern(pat), .sout(s3), .busy(b3));
  always #10 clk = ~clk;
  `TB_WATCHDOG(clk, 20000)

  task automatic frame(int bc);
    logic [8:0] exp_f;
    logic [7:0] p = 8'($urandom);
    @(negedge clk); pat = p;
    if (bc == 1) load1 = 1; else load3 = 1;
    @(negedge clk); load1 = 0; load3 = 0;
    pat = ~p;                                 // pattern changes after load
    exp_f = {1'b1, p};
    for (int b = 8; b >= 0; b--) begin
      for (int c = 0; c < bc; c++) begin
        if (b == 4 && c == 0) begin           // stray load mid-frame
          if (bc == 1) load1 = 1; else load3 = 1;
        end
        #1;
        `CHECK(((bc == 1) ? s1 : s3) == exp_f[b], $sformatf("bc %0d bit %0d", bc, b))
        @(negedge clk); load1 = 0; load3 = 0;
      end
    end
    #1;
    `CHECK(((bc == 1) ? (s1 | b1) : (s3 | b3)) == 1'b0, "line idle after frame")
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 100; k++) begin frame(1); frame(3); end
    `TB_DONE
  end
endmodule
