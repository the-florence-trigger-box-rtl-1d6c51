// tb_main_trigger_board: full-size Main Trigger Board (128 inputs).
// Partial triggers: 0 = in0 | in1, 1 = in2, 2 = trig0 & in3 (feedback
// coincidence; in3 delayed by 6 clocks), 3 = in4 (downscaled by 3).
// Checked: MT latency (5 clocks after the first edge following an input
// pulse shorter than a clock) and length, bit pattern including late
// triggers, VAL timing, the serial pattern frame, the automatic veto and its
// clear, the external veto and its inhibition during the resolving time,
// downscaling, the three scaler banks and a logic-analyser capture on MT.
`timescale 1ns/1ps
`include "tb/tb_check.svh"
module tb_main_trigger_board;
  import ftb_pkg::*;
  logic clk = 0, rst_n = 1;
  logic [127:0] din = '0;
  logic ext_veto = 0;
  mtb_cfg_t cfg;
  logic mt, val, pattern_sout, busy, la_done;
  logic [7:0] ptrig, pattern;
  logic [7:0][31:0] cnt_raw, cnt_post_busy, cnt_post_red;
  logic [11:0] la_rd_addr = '0;
  logic [31:0] la_rd_data;
  int checks = 0, failures = 0;
  int n_mt = 0;

  main_trigger_board dut (.*);
  always #10 clk = ~clk;
  `TB_WATCHDOG(clk, 20000)

  logic mt_q = 0;
  always @(posedge clk) begin mt_q <= mt; if (mt && !mt_q) n_mt++; end

  // a 3 ns pulse on input i, 2 ns after a negative clock edge
  task automatic pulse(int i);
    #2 din[i] = 1'b1; #3 din[i] = 1'b0;
  endtask

  // wait for an event: returns clock edges from the input pulse to MT,
  // MT length, the latched pattern, VAL delay/length and the serial frame
  task automatic observe(output int lat, output int mlen, output logic [7:0] pat,
                         output int vdly, output int vlen, output logic [8:0] frame);
    lat = 0; mlen = 0; vdly = 0; vlen = 0; frame = '0;
    while (!mt && lat < 100) begin @(posedge clk); #1; lat++; end
    while (mt) begin @(posedge clk); #1; mlen++; end
    pat = pattern;
    for (int b = 8; b >= 0; b--) begin @(posedge clk); #1; frame[b] = pattern_sout; vdly++; if (val) break; end
    while (!val && vdly < 200) begin @(posedge clk); #1; vdly++; end
    while (val) begin @(posedge clk); #1; vlen++; end
  endtask

  initial begin
    int lat, mlen, vdly, vlen, n0;
    logic [7:0] pat;
    logic [8:0] frame;
    cfg = '0;
    cfg.gd_width = 6'd9;
    cfg.gd_delay[3] = 6'd5;
    cfg.lm_in_en[0][1:0] = 2'b11;
    cfg.lm_in_en[1][2] = 1'b1;
    cfg.lm_fb_en[2][0] = 1'b1; cfg.lm_fb_inv[2][0] = 1'b1;
    cfg.lm_in_en[2][3] = 1'b1; cfg.lm_in_inv[2][3] = 1'b1; cfg.lm_out_inv[2] = 1'b1;
    cfg.lm_in_en[3][4] = 1'b1;
    cfg.lm_out_en = 8'h0F;
    for (int j = 0; j < 8; j++) cfg.ds_factor[j] = 16'd1;
    cfg.ds_factor[3] = 16'd3;
    cfg.tg_mask = 8'h0F;
    cfg.res_time = 6'd15; cfg.val_delay = 6'd11; cfg.val_width = 16'd19;
    cfg.auto_veto_en = 1'b1;
    cfg.la.mux_sel = 4'd5; cfg.la.mt_en = 1'b1; cfg.la.pre_len = 11'd3; cfg.la.tot_len = 12'd39;
    // reset: first pulse clears the hold flags, second the input latches
    #1 rst_n = 0; #1 rst_n = 1; #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    cfg.la.arm = 1'b1;

    // A: single short pulse
    @(negedge clk); pulse(0);
    observe(lat, mlen, pat, vdly, vlen, frame);
    `CHECK(lat == 5, $sformatf("MT latency %0d", lat))
    `CHECK(mlen == 16, $sformatf("MT length %0d", mlen))
    `CHECK(pat == 8'h01, $sformatf("pattern %h", pat))
    `CHECK(frame == 9'h101, $sformatf("serial frame %h", frame))
    `CHECK(vdly == 12 && vlen == 20, $sformatf("VAL delay %0d length %0d", vdly, vlen))
    `CHECK(busy, "automatic veto after MT")
    `CHECK(la_done, "logic analyser triggered by MT")
    for (int k = 0; k < 40; k++) begin
      la_rd_addr = 12'(k); @(negedge clk); @(negedge clk);
      `CHECK(la_rd_data[2] == (k >= 5 && k < 21), $sformatf("LA word %0d MT=%0b", k, la_rd_data[2]))
    end

    // B: trigger during the veto is counted raw but not post-busy
    @(negedge clk); pulse(2);
    repeat (30) @(negedge clk);
    `CHECK(n_mt == 1, "vetoed trigger produced MT")
    `CHECK(cnt_raw[1] == 1 && cnt_post_busy[1] == 0, "veto counters")
    cfg.veto_clr = 1; @(negedge clk); cfg.veto_clr = 0; #1;
    `CHECK(!busy, "veto cleared")

    // C: coincidence through feedback plus a late trigger, with the
    // external veto raised as soon as MT appears (inhibited until MT ends)
    cfg.ext_veto_en = 1'b1;
    fork
      begin @(negedge clk); pulse(0); pulse(3); end
      begin @(posedge mt); ext_veto = 1; repeat (8) @(negedge clk); pulse(2); end
    join
    observe(lat, mlen, pat, vdly, vlen, frame);
    `CHECK(pat == 8'h07, $sformatf("coincidence + late pattern %h", pat))
    `CHECK(frame == 9'h107, $sformatf("serial frame %h", frame))
    `CHECK(cnt_post_busy[1] == 1 && cnt_post_busy[2] == 1, "late trigger passed during resolving time")
    // external veto now blocks
    @(negedge clk); cfg.veto_clr = 1; @(negedge clk); cfg.veto_clr = 0;
    n0 = n_mt;
    @(negedge clk); pulse(1);
    repeat (30) @(negedge clk);
    `CHECK(busy && n_mt == n0, "external veto blocks")
    ext_veto = 0; repeat (3) @(negedge clk);
    `CHECK(!busy, "external veto released")

    // D: downscaling, automatic veto off
    cfg.auto_veto_en = 1'b0;
    n0 = n_mt;
    for (int p = 0; p < 6; p++) begin
      @(negedge clk); pulse(4);
      repeat (80) @(negedge clk);
    end
    `CHECK(n_mt - n0 == 2, $sformatf("downscale 1/3 of 6 gives %0d MT", n_mt - n0))
    `CHECK(cnt_raw[3] == 6 && cnt_post_busy[3] == 6 && cnt_post_red[3] == 2, "downscale counters")
    `CHECK(cnt_raw[0] == 3 && cnt_post_busy[0] == 2 && cnt_post_red[0] == 2, "trigger 0 counters (one pulse under external veto)")
    `CHECK(cnt_raw[1] == 2 && cnt_post_busy[1] == 1, "trigger 1 counters")
    `CHECK(cnt_raw[2] == 1 && cnt_post_red[2] == 1, "coincidence counters")
    cfg.cnt_clr = 1; @(negedge clk); cfg.cnt_clr = 0; #1;
    `CHECK(cnt_raw == '0 && cnt_post_busy == '0 && cnt_post_red == '0, "counter clear")
    `TB_DONE
  end
endmodule
