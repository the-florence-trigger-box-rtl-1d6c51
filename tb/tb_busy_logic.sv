// tb_busy_logic: random partial triggers, external veto, Main Trigger
// windows and veto-clear strobes. Checked: triggers are blocked while the
// (two-clock synchronised) external veto or the automatic veto is active,
// they always pass while MT is high, and the automatic veto is set when MT
// falls and released by the clear strobe.
`timescale 1ns/1ps
`include "tb/tb_check.svh"
module tb_busy_logic;
  localparam int T = 8;
  logic clk = 0, rst_n = 0;
  logic [T-1:0] din = '0, dout;
  logic ext_veto = 0, ext_veto_en = 0, auto_veto_en = 0, veto_clr = 0, mt = 0, busy;
  int checks = 0, failures = 0;
  logic [2:0] ext_hist = '0;   // ext_veto sampled at the last edges
  logic mt_prev = 0, auto_m = 0;
  int blocked = 0, inhibited = 0;

  busy_logic #(.N_TRIG(T)) dut (.*);
  always #10 clk = ~clk;
  `TB_WATCHDOG(clk, 12000)

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 10000; t++) begin
      logic bexp;
      @(negedge clk);
      if (t % 2500 == 0) begin ext_veto_en = t[11]; auto_veto_en = (t != 0); end
      din = 8'($urandom);
      if ($urandom_range(0, 40) == 0) ext_veto = ~ext_veto;
      if (mt) begin if ($urandom_range(0, 5) == 0) mt = 0; end
      else if ($urandom_range(0, 30) == 0) mt = 1;
      veto_clr = ($urandom_range(0, 25) == 0);
      #1;
      bexp = (ext_veto_en & ext_hist[1]) | auto_m;
      `CHECK(busy == bexp, $sformatf("busy t=%0d", t))
      `CHECK(dout == ((bexp && !mt) ? 8'h00 : din), $sformatf("dout t=%0d", t))
      if (bexp && !mt) blocked++;
      if (bexp && mt) inhibited++;
      @(posedge clk);
      if (auto_veto_en && mt_prev && !mt) auto_m = 1;
      else if (veto_clr) auto_m = 0;
      mt_prev = mt;
      ext_hist = {ext_hist[1:0], ext_veto};
    end
    `CHECK(blocked > 100 && inhibited > 20, "veto and inhibit not both exercised")
    `TB_DONE
  end
endmodule
