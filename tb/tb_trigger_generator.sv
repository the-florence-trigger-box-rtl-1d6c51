// tb_trigger_generator: events with random resolving time, VAL delay and
// width, trigger mask and late partial triggers. Checked per event: MT rises
// on the edge after the first enabled trigger and lasts exactly res_time+1
// clocks; the pattern equals the OR of the enabled triggers seen during the
// resolving time, latched when MT falls; VAL starts val_delay+1 clocks later
// and lasts val_width+1 clocks; masked triggers never raise MT.
`timescale 1ns/1ps
`include "tb/tb_check.svh"
module tb_trigger_generator;
  localparam int T = 8;
  logic clk = 0, rst_n = 0;
  logic [T-1:0] din = '0, mask = '0, pattern;
  logic [5:0] res_time = '0, val_delay = '0;
  logic [15:0] val_width = '0;
  logic mt, val, pattern_stb;
  int checks = 0, failures = 0;

  trigger_generator #(.N_TRIG(T), .TW(6), .VW(16)) dut (.*);
  always #10 clk = ~clk;
  `TB_WATCHDOG(clk, 400000)

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    // a masked trigger must not fire
    @(negedge clk); mask = 8'h0F; din = 8'hF0;
    repeat (5) begin @(posedge clk); #1; `CHECK(!mt, "masked trigger fired MT") end
    @(negedge clk); din = '0;
    for (int ev = 0; ev < 300; ev++) begin
      int r, vd, vw, mt_len, val_len, gap;
      logic [T-1:0] exp_pat;
      res_time  = 6'($urandom_range(0, 63));
      val_delay = 6'($urandom_range(0, 63));
      val_width = (ev % 150 == 7) ? 16'hFFFF : 16'($urandom_range(0, 200));
      mask      = 8'($urandom) | 8'h01;
      r = int'(res_time) + 1; vd = int'(val_delay) + 1; vw = int'(val_width) + 1;
      @(negedge clk); din = 8'h01;             // first partial trigger
      exp_pat = 8'h01;
      #1 `CHECK(!mt, "MT before the edge that samples the trigger")
      @(negedge clk); din = '0;
      // MT must be high now (raised by the edge just passed)
      `CHECK(mt, "MT did not rise one clock after the trigger")
      mt_len = 0;
      while (mt) begin
        automatic logic [T-1:0] late = 8'($urandom) & 8'($urandom);
        mt_len++;
        din = late;                      // late triggers during resolving time
        exp_pat |= late & mask;
        @(posedge clk); #1;
        if (!mt) `CHECK(pattern_stb && pattern == exp_pat, $sformatf("pattern %h exp %h", pattern, exp_pat))
        @(negedge clk);
        if (mt_len > 100) break;
      end
      din = '0;
      `CHECK(mt_len == r, $sformatf("MT length %0d exp %0d", mt_len, r))
      gap = 1;        // negedges since MT fell (first negedge after fall)
      while (!val && gap < 200) begin @(negedge clk); gap++; end
      `CHECK(gap == vd + 1, $sformatf("VAL delay %0d exp %0d", gap, vd + 1))
      val_len = 0;
      while (val && val_len < 70000) begin @(negedge clk); val_len++; end
      `CHECK(val_len == vw, $sformatf("VAL length %0d exp %0d", val_len, vw))
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    `TB_DONE
  end
endmodule
