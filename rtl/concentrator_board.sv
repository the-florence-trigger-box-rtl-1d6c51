// concentrator_board: firmware of a Concentrator Board (CB), the first
// layer of the trigger box.
//
// Up to 128 trigger requests from the front-end are cleaned and synchronised
// by the debouncer and then follow two parallel lines. The Logic Matrix
// forms 16 masked OR sums (concentrated requests). The Gate stretches every
// request to a common coincidence window and the Multiplicity Matrix forms
// two sets of M>=1..8 signals from it. Merge & Shuffle puts the 16 + 16
// results on the 32-bit output in any group order. A logic analyser can
// record one of ten preset groups of 32 internal signals, so that every
// intermediate signal can be inspected:
//   0..3: debouncer outputs 31:0, 63:32, 95:64, 127:96
//   4..7: gate outputs 31:0, 63:32, 95:64, 127:96
//   8: {multiplicity outputs, logic-matrix outputs}   9: board output
//   (selections 10..15 record zeros).
// The processing chain is the board's; the analyser presets and the CB
// register map (here a configuration struct) are this design's.
//
// Timing: a request reaches dout 5 clocks (logic-matrix path) or 6 clocks
// (multiplicity path) after the clock edge that samples it.
module concentrator_board
  import ftb_pkg::*;
#(
  parameter int unsigned N         = N_INPUTS,
  parameter int unsigned DEB_CYC   = 8,       // 160 ns at 50 MHz
  parameter int unsigned LA_BUF_D  = LA_BUF,
  parameter int unsigned LA_CAP_D  = LA_MEM
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [N-1:0]                 treq,
  input  cb_cfg_t                      cfg,
  output logic [CB_N_OUT-1:0]          ctreq,
  input  logic [$clog2(LA_CAP_D)-1:0]  la_rd_addr,
  output logic [LA_W-1:0]              la_rd_data,
  output logic                         la_done
);
  logic [N-1:0]        deb, gate;
  logic [CB_N_OR-1:0]  lm;
  logic [CB_N_MSET*CB_MULT_MAX-1:0] mm;
  logic [CB_N_OR-1:0][N-1:0]   lm_mask;
  logic [CB_N_MSET-1:0][N-1:0] mm_mask;

  for (genvar j = 0; j < CB_N_OR; j++)   begin : g_lmm assign lm_mask[j] = cfg.lm_mask[j][N-1:0]; end
  for (genvar s = 0; s < CB_N_MSET; s++) begin : g_mmm assign mm_mask[s] = cfg.mm_mask[s][N-1:0]; end

  debouncer #(.N(N), .PULSE_CYC(DEB_CYC)) u_deb (
    .clk, .rst_n, .din(treq), .dout(deb));

  cb_logic_matrix #(.N(N), .N_OUT(CB_N_OR)) u_lm (
    .clk, .rst_n, .din(deb), .mask(lm_mask), .dout(lm));

  cb_gate #(.N(N), .TW(TW)) u_gate (
    .clk, .rst_n, .din(deb), .width(cfg.gate_w), .dout(gate));

  multiplicity_matrix #(.N(N), .N_SET(CB_N_MSET), .M_MAX(CB_MULT_MAX)) u_mm (
    .clk, .rst_n, .din(gate), .mask(mm_mask), .dout(mm));

  merge_shuffle u_ms (
    .clk, .rst_n, .lm(lm), .mm(mm), .sel(cfg.shuffle), .dout(ctreq));

  logic [9:0][LA_W-1:0]  la_grp;
  logic [4*LA_W-1:0]     deb_x, gate_x;
  assign deb_x  = (4*LA_W)'(deb);
  assign gate_x = (4*LA_W)'(gate);
  for (genvar g = 0; g < 4; g++) begin : g_la
    assign la_grp[g]     = deb_x[LA_W*g +: LA_W];
    assign la_grp[4 + g] = gate_x[LA_W*g +: LA_W];
  end
  assign la_grp[8] = {mm, lm};
  assign la_grp[9] = ctreq;

  // The CB has no Main Trigger, so its analyser's MT input is tied low and
  // the mt_en field has no effect; the capture-in-progress flag is not needed
  // outside (done reports the end of a capture).
  logic_analyzer #(.N_GRP(10), .W(LA_W), .BUF_D(LA_BUF_D), .CAP_D(LA_CAP_D)) u_la (
    .clk, .rst_n, .groups(la_grp), .mux_sel(cfg.la.mux_sel), .arm(cfg.la.arm),
    .sw_trig(cfg.la.sw_trig), .mt(1'b0), .mt_en(cfg.la.mt_en), .lat_mask(cfg.la.lat_mask),
    .pre_len(cfg.la.pre_len[$clog2(LA_BUF_D)-1:0]), .tot_len(cfg.la.tot_len[$clog2(LA_CAP_D)-1:0]),
    .rd_addr(la_rd_addr), .rd_data(la_rd_data), .capturing(), .done(la_done));
endmodule
