// tb_ftb_system_4cb: the largest single-layer system, four Concentrator
// Boards filling all 128 Main Trigger Board inputs (512 front-end requests).
//
// Each CB sums all of its 128 inputs into output bit 0 (logic-matrix OR 0),
// so CB c drives MTB input 32*c; MTB partial trigger c is that input alone.
// Requests are sent on inputs 0, 127 and ten random inputs of every CB, one
// at a time; each must produce exactly one Main Trigger whose pattern has
// only bit c set, and one count in raw scaler c. Finally requests on CB 0 and
// CB 3 in the same clock must give the pattern 0x09. The check counts and
// patterns are worked out from this wiring, not from the design.
`timescale 1ns/1ps
`include "tb/tb_check.svh"
module tb_ftb_system_4cb;
  import ftb_pkg::*;
  localparam int NCB = 4;
  logic clk = 0, rst_n = 1;
  logic [NCB-1:0][127:0] treq = '0;
  logic [0:0] mtb_direct = '0;     // no MTB input is left over
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
  int sent [NCB] = '{default: 0};

  ftb_system #(.N_CB(NCB)) dut (.*);
  always #10 clk = ~clk;
  `TB_WATCHDOG(clk, 20000)

  logic mt_q = 0;
  always @(posedge clk) begin mt_q <= mt; if (mt && !mt_q) n_mt++; end

  // One request (40 ns) on each listed (CB, input) pair at the same time,
  // then wait for the Main Trigger and its pattern.
  task automatic event_on(int c0, int i0, int c1, int i1, logic [7:0] exp_pat);
    int n0 = n_mt, w = 0;
    @(negedge clk);
    treq[c0][i0] = 1'b1; treq[c1][i1] = 1'b1;
    #40 treq[c0][i0] = 1'b0; treq[c1][i1] = 1'b0;
    while (!mt && w < 100) begin @(posedge clk); #1; w++; end
    `CHECK(mt, $sformatf("no MT for CB %0d input %0d", c0, i0))
    while (mt) begin @(posedge clk); #1; end
    `CHECK(pattern == exp_pat,
           $sformatf("CB %0d input %0d: pattern %02h, expected %02h", c0, i0, pattern, exp_pat))
    repeat (40) @(posedge clk);
    #1 `CHECK(n_mt == n0 + 1, $sformatf("CB %0d input %0d: %0d MTs", c0, i0, n_mt - n0))
  endtask

  initial begin
    cb_cfg = '0;
    mtb_cfg = '0;
    for (int c = 0; c < NCB; c++) begin
      cb_cfg[c].lm_mask[0] = '1;                   // OR of all 128 inputs
      cb_cfg[c].gate_w     = 6'd4;
      cb_cfg[c].shuffle    = {2'd3, 2'd2, 2'd1, 2'd0};
      mtb_cfg.lm_in_en[c][32 * c] = 1'b1;          // CB c, output bit 0
    end
    mtb_cfg.gd_width = 6'd4;
    mtb_cfg.lm_out_en = 8'h0F;
    for (int j = 0; j < 8; j++) mtb_cfg.ds_factor[j] = 16'd1;
    mtb_cfg.tg_mask = 8'h0F;
    mtb_cfg.res_time = 6'd5; mtb_cfg.val_delay = 6'd0; mtb_cfg.val_width = 16'd3;
    // the G&D input latches are cleared by a falling reset edge
    #1 rst_n = 0; #1 rst_n = 1; #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);

    for (int c = 0; c < NCB; c++) begin
      for (int k = 0; k < 12; k++) begin
        automatic int i = (k == 0) ? 0 : (k == 1) ? 127 : $urandom_range(1, 126);
        event_on(c, i, c, i, 8'(1 << c));
        sent[c]++;
      end
    end
    event_on(0, 5, 3, 99, 8'h09);
    sent[0]++; sent[3]++;

    for (int c = 0; c < NCB; c++)
      `CHECK(cnt_raw[c] == 32'(sent[c]),
             $sformatf("raw scaler %0d = %0d, expected %0d", c, cnt_raw[c], sent[c]))
    `CHECK(n_mt == 4 * 12 + 1, $sformatf("%0d MTs in all", n_mt))
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
