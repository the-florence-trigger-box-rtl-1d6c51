// tb_ftb_system: end-to-end test of the whole trigger box at its default
// size: three Concentrator Boards (128 front-end inputs each) feeding one
// Main Trigger Board, configured like a GARFIELD+RCo run:
//   CB0 "RCo", CB1 "GARFIELD backward", CB2 "GARFIELD forward": logic-matrix
//   output j = OR of inputs 8j..8j+7, multiplicity set 0 = inputs 0..63,
//   set 1 = inputs 64..127, groups in natural order.
//   MTB partial triggers: 0 RCo (any CB0 OR), 1 GARFIELD (any CB1/CB2 OR),
//   2 GARFIELD & RCo (feedback coincidence), 3 backward M>=2,
//   4 pulser (direct input 96), 5 beam monitor (direct input 97, 1 in 5).
// Every mechanism is made to happen and counted: debounce restart, gate
// dead time, multiplicity, group shuffle, G&D delay, feedback coincidence,
// late trigger inside the resolving time, automatic and external veto,
// downscaling, VAL, serial pattern, logic-analyser captures, scalers and
// the dead-time fraction computed from them.
`timescale 1ns/1ps
`include "tb/tb_check.svh"
module tb_ftb_system;
  import ftb_pkg::*;
  localparam int NCB = 3;
  logic clk = 0, rst_n = 1;
  logic [NCB-1:0][127:0] treq = '0;
  logic [31:0] mtb_direct = '0;
  logic ext_veto = 0;
  cb_cfg_t [NCB-1:0] cb_cfg;
  mtb_cfg_t mtb_cfg;
  logic [NCB-1:0][31:0] ctreq;
  logic mt, val, pattern_sout, busy;
  logic [7:0] ptrig, pattern;
  logic [7:0][31:0] cnt_raw, cnt_post_busy, cnt_post_red;
  logic [NCB:0][11:0] la_rd_addr = '0;
  logic [NCB:0][31:0] la_rd_data;
  logic [NCB:0] la_done;
  int checks = 0, failures = 0;
  int n_mt = 0;
  // mechanism counters
  int m_debounce = 0, m_gate_dead = 0, m_mult = 0, m_shuffle = 0, m_delay = 0,
      m_coinc = 0, m_late = 0, m_auto_veto = 0, m_ext_veto = 0, m_downscale = 0,
      m_val = 0, m_serial = 0, m_la = 0, m_scaler = 0;

  ftb_system dut (.*);
  always #10 clk = ~clk;
  `TB_WATCHDOG(clk, 40000)

  logic mt_q = 0;
  always @(posedge clk) begin mt_q <= mt; if (mt && !mt_q) n_mt++; end

  task automatic fe_pulse(int cb, int ch);       // 45 ns front-end request
    #2 treq[cb][ch] = 1'b1; #45 treq[cb][ch] = 1'b0;
  endtask
  task automatic direct_pulse(int ch);            // 3 ns direct request
    #2 mtb_direct[ch] = 1'b1; #3 mtb_direct[ch] = 1'b0;
  endtask

  // wait for MT; return latency (clock edges), pattern, serial frame,
  // VAL length
  task automatic observe(output int lat, output logic [7:0] pat,
                         output logic [8:0] frame, output int vlen);
    lat = 0; vlen = 0; frame = '0;
    while (!mt && lat < 200) begin @(posedge clk); #1; lat++; end
    while (mt) begin @(posedge clk); #1; end
    pat = pattern;
    // serial frame in clocks 1..9 after MT falls; VAL counted throughout
    for (int c = 0; c < 400; c++) begin
      if (c >= 1 && c <= 9) frame[9 - c] = pattern_sout;
      if (val) vlen++;
      else if (vlen > 0) break;
      @(posedge clk); #1;
    end
  endtask

  task automatic clear_veto();
    @(negedge clk); mtb_cfg.veto_clr = 1; @(negedge clk); mtb_cfg.veto_clr = 0;
  endtask

  initial begin
    int lat, vlen, n0, raw_before, pb_before;
    logic [7:0] pat;
    logic [8:0] frame;
    // ---- configuration ----
    cb_cfg = '0;
    for (int c = 0; c < NCB; c++) begin
      for (int j = 0; j < 16; j++) cb_cfg[c].lm_mask[j] = 128'hFF << (8 * j);
      cb_cfg[c].mm_mask[0] = {64'h0, {64{1'b1}}};
      cb_cfg[c].mm_mask[1] = {{64{1'b1}}, 64'h0};
      cb_cfg[c].gate_w  = 6'd9;
      cb_cfg[c].shuffle = {2'd3, 2'd2, 2'd1, 2'd0};
    end
    mtb_cfg = '0;
    mtb_cfg.gd_width = 6'd9;                         // 200 ns gates
    for (int i = 0; i < 96; i++) mtb_cfg.gd_delay[i] = 6'd0;
    mtb_cfg.gd_delay[96] = 6'd7;                     // pulser aligned later
    mtb_cfg.lm_in_en[0][15:0]  = '1;                 // RCo
    mtb_cfg.lm_in_en[1][47:32] = '1;                 // GARFIELD BW
    mtb_cfg.lm_in_en[1][79:64] = '1;                 // GARFIELD FW
    mtb_cfg.lm_fb_en[2][1:0] = 2'b11; mtb_cfg.lm_fb_inv[2][1:0] = 2'b11;
    mtb_cfg.lm_out_inv[2] = 1'b1;                    // GARFIELD & RCo
    mtb_cfg.lm_in_en[3][49] = 1'b1;                  // BW set 0, M>=2
    mtb_cfg.lm_in_en[4][96] = 1'b1;                  // pulser
    mtb_cfg.lm_in_en[5][97] = 1'b1;                  // beam monitor
    mtb_cfg.lm_out_en = 8'h3F;
    for (int j = 0; j < 8; j++) mtb_cfg.ds_factor[j] = 16'd1;
    mtb_cfg.ds_factor[5] = 16'd5;
    mtb_cfg.tg_mask = 8'h3F;
    mtb_cfg.res_time = 6'd15; mtb_cfg.val_delay = 6'd3; mtb_cfg.val_width = 16'd24;
    mtb_cfg.auto_veto_en = 1'b1; mtb_cfg.ext_veto_en = 1'b1;
    mtb_cfg.la.mux_sel = 4'd4; mtb_cfg.la.mt_en = 1'b1;
    mtb_cfg.la.pre_len = 11'd7; mtb_cfg.la.tot_len = 12'd63;
    cb_cfg[1].la.mux_sel = 4'd4; cb_cfg[1].la.lat_mask = 32'h0000_0004;   // BW gate ch 2
    cb_cfg[1].la.pre_len = 11'd3; cb_cfg[1].la.tot_len = 12'd31;
    #1 rst_n = 0; #1 rst_n = 1; #1 rst_n = 0;       // see tb_gate_delay_gen
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2100) @(posedge clk);                    // fill LA buffers
    mtb_cfg.la.arm = 1; cb_cfg[1].la.arm = 1;

    // ---- 1: a bouncing RCo request -> one MT, pattern {RCo} ----
    fork
      begin
        @(negedge clk); fe_pulse(0, 3); #20; fe_pulse(0, 3); #20; fe_pulse(0, 3);
      end
      begin
        automatic int rises = 0; automatic logic p = 0;
        repeat (40) begin @(negedge clk); if (ctreq[0][0] && !p) rises++; p = ctreq[0][0]; end
        `CHECK(rises == 1, $sformatf("debounced request rose %0d times", rises))
        if (rises == 1) m_debounce++;
      end
      begin
        observe(lat, pat, frame, vlen);
      end
    join
    `CHECK(lat >= 10 && lat <= 11, $sformatf("front-end to MT latency %0d", lat))
    `CHECK(pat == 8'h01, $sformatf("RCo pattern %h", pat))
    `CHECK(frame == {1'b1, pat}, "serial pattern frame");       if (frame == {1'b1, pat}) m_serial++;
    `CHECK(vlen == 25, $sformatf("VAL length %0d", vlen));      if (vlen == 25) m_val++;
    for (int c = 0; c < 100 && !la_done[NCB]; c++) @(negedge clk);
    `CHECK(la_done[NCB], "MTB logic analyser captured on MT")
    if (la_done[NCB]) begin
      // preset 4 = {pattern, post-DS, post-busy, raw}: raw bit 0 rises with MT
      la_rd_addr[NCB] = 12'd8; @(negedge clk); @(negedge clk);
      `CHECK(la_rd_data[NCB][0] == 1'b1, "LA: raw RCo trigger at the LAT sample");
      if (la_rd_data[NCB][0]) m_la++;
    end

    // ---- 2: trigger during automatic veto is lost ----
    `CHECK(busy, "automatic veto set after MT")
    raw_before = cnt_raw[1]; pb_before = cnt_post_busy[1]; n0 = n_mt;
    @(negedge clk); fe_pulse(2, 100);
    repeat (40) @(negedge clk);
    `CHECK(cnt_raw[1] == raw_before + 1 && cnt_post_busy[1] == pb_before && n_mt == n0,
           "vetoed GARFIELD trigger");
    if (cnt_raw[1] == raw_before + 1 && cnt_post_busy[1] == pb_before) m_auto_veto++;
    clear_veto();

    // ---- 3: GARFIELD & RCo coincidence plus a late pulser inside the
    //         resolving time, with the acquisition raising its busy at MT ----
    fork
      begin @(negedge clk); fe_pulse(0, 20); end
      begin @(negedge clk); #40; fe_pulse(1, 9); end
      begin @(posedge mt); ext_veto = 1; repeat (3) @(negedge clk); direct_pulse(0); end
      observe(lat, pat, frame, vlen);
    join
    `CHECK(pat == 8'h17, $sformatf("coincidence + late pulser pattern %h", pat))
    if (pat[2]) m_coinc++;
    if (pat[4]) begin m_late++; m_delay++; end
    // external veto holds after MT: pulser is now blocked
    clear_veto();
    n0 = n_mt; raw_before = cnt_raw[4]; pb_before = cnt_post_busy[4];
    @(negedge clk); direct_pulse(0);
    repeat (30) @(negedge clk);
    `CHECK(busy && n_mt == n0 && cnt_raw[4] == raw_before + 1 && cnt_post_busy[4] == pb_before,
           "external veto blocks the pulser");
    if (n_mt == n0 && cnt_raw[4] == raw_before + 1) m_ext_veto++;
    ext_veto = 0; repeat (4) @(negedge clk);
    `CHECK(!busy, "busy released")

    // ---- 4: multiplicity M>=2 in GARFIELD backward; a second hit on the
    //         same channel inside the gate is ignored (gate dead time) ----
    fork
      begin
        @(negedge clk); #2 treq[1][2] = 1; treq[1][40] = 1; #45 treq[1] = '0;
        #133 fe_pulse(1, 2);         // 9 clocks later: debouncer idle, gate still open
      end
      observe(lat, pat, frame, vlen);
    join
    `CHECK(pat == 8'h0A, $sformatf("multiplicity pattern %h", pat))
    if (pat[3]) m_mult++;
    for (int c = 0; c < 100 && !la_done[1]; c++) @(negedge clk);
    `CHECK(la_done[1], "CB logic analyser captured on the backward gate")
    if (la_done[1]) begin
      automatic int ones = 0;
      // preset 4 = gate outputs 31:0; channel 2 must show a single 10-clock pulse
      // although its debounced request rose twice within the gate
      for (int k = 0; k < 32; k++) begin
        la_rd_addr[1] = 12'(k); @(negedge clk); @(negedge clk);
        if (la_rd_data[1][2]) ones++;
      end
      `CHECK(ones == 10, $sformatf("gate of channel 2 lasted %0d clocks", ones))
      if (ones == 10) begin m_gate_dead++; m_la++; end
    end
    clear_veto();

    // ---- 5: shuffle: put CB2's group B first ----
    cb_cfg[2].shuffle = {2'd3, 2'd2, 2'd0, 2'd1};
    fork
      begin @(negedge clk); fe_pulse(2, 8); end       // CB2 LM output 1 = group A bit 1
      begin
        automatic logic [31:0] seen = '0;
        repeat (30) begin @(negedge clk); seen |= ctreq[2]; end
        `CHECK(seen[15:0] == 16'h0200, $sformatf("shuffled CB output %h", seen));
        if (seen[15:0] == 16'h0200) m_shuffle++;
      end
      observe(lat, pat, frame, vlen);
    join
    `CHECK(pat == 8'h02, "GARFIELD trigger after shuffle")
    clear_veto();

    // ---- 6: beam monitor downscaled 1 in 5, automatic veto off ----
    mtb_cfg.auto_veto_en = 0;
    n0 = n_mt;
    for (int p = 0; p < 10; p++) begin
      @(negedge clk); direct_pulse(1);
      repeat (60) @(negedge clk);
    end
    `CHECK(n_mt - n0 == 2, $sformatf("10 beam triggers gave %0d MT", n_mt - n0))
    `CHECK(cnt_post_busy[5] == 10 && cnt_post_red[5] == 2, "beam monitor scalers")
    if (cnt_post_red[5] == 2) m_downscale++;

    // ---- scalers and dead time ----
    begin
      automatic int raw = 0, pb = 0;
      for (int j = 0; j < 6; j++) begin raw += int'(cnt_raw[j]); pb += int'(cnt_post_busy[j]); end
      $display("scalers: raw %0d, post-busy %0d, dead time %0d %%", raw, pb, (raw - pb) * 100 / raw);
      `CHECK(raw - pb == 2, "two triggers lost to dead time")
      if (raw - pb == 2) m_scaler++;
    end

    // ---- every mechanism happened ----
    `CHECK(m_debounce > 0,  "debounce restart never happened")
    `CHECK(m_gate_dead > 0, "gate dead time never happened")
    `CHECK(m_mult > 0,      "multiplicity trigger never happened")
    `CHECK(m_shuffle > 0,   "shuffle never happened")
    `CHECK(m_delay > 0,     "G&D delay alignment never happened")
    `CHECK(m_coinc > 0,     "feedback coincidence never happened")
    `CHECK(m_late > 0,      "late trigger in resolving time never happened")
    `CHECK(m_auto_veto > 0, "automatic veto never happened")
    `CHECK(m_ext_veto > 0,  "external veto never happened")
    `CHECK(m_downscale > 0, "downscaling never happened")
    `CHECK(m_val > 0,       "VAL never happened")
    `CHECK(m_serial > 0,    "serial pattern never happened")
    `CHECK(m_la > 1,        "logic analyser captures missing")
    `CHECK(m_scaler > 0,    "scaler dead-time check never happened")
    $display("mechanisms: debounce %0d gate-dead %0d mult %0d shuffle %0d delay %0d coinc %0d late %0d auto-veto %0d ext-veto %0d downscale %0d val %0d serial %0d la %0d scaler %0d",
             m_debounce, m_gate_dead, m_mult, m_shuffle, m_delay, m_coinc, m_late, m_auto_veto,
             m_ext_veto, m_downscale, m_val, m_serial, m_la, m_scaler);
    `TB_DONE
  end
endmodule
