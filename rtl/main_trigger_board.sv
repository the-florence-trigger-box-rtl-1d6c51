// main_trigger_board: firmware of the Main Trigger Board (MTB), the last
// layer of the trigger box.
//
// Signal flow: 128 inputs -> Gate & Delay Generator (latch, per-input delay,
// common width) -> Logic Matrix (8 partial triggers, inverting operands,
// feedback) -> Busy Logic (dead-time veto, inhibited by the Main Trigger)
// -> Downscaler (1 of n per trigger) -> Trigger & Pattern Generator (Main
// Trigger MT, validation VAL, 8-bit bit pattern). The bit pattern is also
// sent out serially. Three eightfold 32-bit scalers count the partial
// triggers after the Logic Matrix (raw), after the Busy Logic (post-busy)
// and after the Downscaler (post-reduction). A logic analyser records one of
// six preset groups of 32 signals, covering every intermediate signal:
//   0..3: G&D outputs 31:0, 63:32, 95:64, 127:96
//   4: {pattern, post-downscale, post-busy, raw partial triggers}
//   5: {26'0, pattern serial, busy, VAL, MT, ext veto, LA capturing}
//   (selections 6 and 7 record zeros; only the low 3 select bits are used).
// The chain and all counters are the board's; analyser presets, the serial
// frame and the register map (here a configuration struct, counters and
// pattern as output ports) are this design's.
//
// Timing: with k the first clock edge after an input edge, the G&D gate
// rises at edge k+3+delay, the Logic Matrix, Busy Logic and Downscaler are
// combinational, and MT rises at edge k+4+delay.
module main_trigger_board
  import ftb_pkg::*;
#(
  parameter int unsigned N          = N_INPUTS,
  parameter int unsigned SER_BIT_CYC = 1,
  parameter int unsigned LA_BUF_D   = LA_BUF,
  parameter int unsigned LA_CAP_D   = LA_MEM
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic [N-1:0]                      din,
  input  logic                              ext_veto,     // LEMO VETO input
  input  mtb_cfg_t                          cfg,
  output logic                              mt,
  output logic                              val,
  output logic [MTB_N_TRIG-1:0]             ptrig,        // partial triggers after downscaling
  output logic [MTB_N_TRIG-1:0]             pattern,
  output logic                              pattern_sout,
  output logic                              busy,
  output logic [MTB_N_TRIG-1:0][CNT_W-1:0]  cnt_raw,
  output logic [MTB_N_TRIG-1:0][CNT_W-1:0]  cnt_post_busy,
  output logic [MTB_N_TRIG-1:0][CNT_W-1:0]  cnt_post_red,
  input  logic [$clog2(LA_CAP_D)-1:0]       la_rd_addr,
  output logic [LA_W-1:0]                   la_rd_data,
  output logic                              la_done
);
  logic [N-1:0]              gd;
  logic [MTB_N_TRIG-1:0]     lm, pb, pr;
  logic                      pattern_stb, ser_busy, la_capturing;
  logic [N-1:0][TW-1:0]      gd_delay;
  logic [MTB_N_TRIG-1:0][N-1:0] in_en, in_inv;

  for (genvar i = 0; i < N; i++) begin : g_dly assign gd_delay[i] = cfg.gd_delay[i]; end
  for (genvar j = 0; j < MTB_N_TRIG; j++) begin : g_lmm
    assign in_en[j]  = cfg.lm_in_en[j][N-1:0];
    assign in_inv[j] = cfg.lm_in_inv[j][N-1:0];
  end

  gate_delay_gen #(.N(N), .TW(TW)) u_gd (
    .clk, .rst_n, .din, .width(cfg.gd_width), .delay(gd_delay), .dout(gd));

  mtb_logic_matrix #(.N(N), .N_TRIG(MTB_N_TRIG)) u_lm (
    .clk, .rst_n, .din(gd), .in_en, .in_inv,
    .fb_en(cfg.lm_fb_en), .fb_inv(cfg.lm_fb_inv),
    .out_en(cfg.lm_out_en), .out_inv(cfg.lm_out_inv), .trig(lm));

  busy_logic #(.N_TRIG(MTB_N_TRIG)) u_busy (
    .clk, .rst_n, .din(lm), .ext_veto, .ext_veto_en(cfg.ext_veto_en),
    .auto_veto_en(cfg.auto_veto_en), .veto_clr(cfg.veto_clr), .mt,
    .dout(pb), .busy);

  downscaler #(.N_TRIG(MTB_N_TRIG), .W(DS_W)) u_ds (
    .clk, .rst_n, .din(pb), .factor(cfg.ds_factor), .dout(pr));

  trigger_generator #(.N_TRIG(MTB_N_TRIG), .TW(TW), .VW(VAL_W)) u_tg (
    .clk, .rst_n, .din(pr), .mask(cfg.tg_mask), .res_time(cfg.res_time),
    .val_delay(cfg.val_delay), .val_width(cfg.val_width),
    .mt, .val, .pattern, .pattern_stb);

  pattern_serializer #(.N(MTB_N_TRIG), .BIT_CYC(SER_BIT_CYC)) u_ser (
    .clk, .rst_n, .load(pattern_stb), .pattern, .sout(pattern_sout), .busy(ser_busy));

  trigger_counters #(.N(MTB_N_TRIG), .W(CNT_W)) u_cnt_raw (
    .clk, .rst_n, .din(lm), .clr(cfg.cnt_clr), .count(cnt_raw));
  trigger_counters #(.N(MTB_N_TRIG), .W(CNT_W)) u_cnt_pb (
    .clk, .rst_n, .din(pb), .clr(cfg.cnt_clr), .count(cnt_post_busy));
  trigger_counters #(.N(MTB_N_TRIG), .W(CNT_W)) u_cnt_pr (
    .clk, .rst_n, .din(pr), .clr(cfg.cnt_clr), .count(cnt_post_red));

  assign ptrig = pr;

  logic [5:0][LA_W-1:0]  la_grp;
  logic [4*LA_W-1:0]     gd_x;
  assign gd_x = (4*LA_W)'(gd);
  for (genvar g = 0; g < 4; g++) begin : g_la
    assign la_grp[g] = gd_x[LA_W*g +: LA_W];
  end
  assign la_grp[4] = {pattern, pr, pb, lm};
  assign la_grp[5] = {26'b0, ser_busy & pattern_sout, busy, val, mt, ext_veto, la_capturing};

  logic_analyzer #(.N_GRP(6), .W(LA_W), .BUF_D(LA_BUF_D), .CAP_D(LA_CAP_D)) u_la (
    .clk, .rst_n, .groups(la_grp), .mux_sel(cfg.la.mux_sel[2:0]), .arm(cfg.la.arm),
    .sw_trig(cfg.la.sw_trig), .mt, .mt_en(cfg.la.mt_en), .lat_mask(cfg.la.lat_mask),
    .pre_len(cfg.la.pre_len[$clog2(LA_BUF_D)-1:0]), .tot_len(cfg.la.tot_len[$clog2(LA_CAP_D)-1:0]),
    .rd_addr(la_rd_addr), .rd_data(la_rd_data), .capturing(la_capturing), .done(la_done));
endmodule
