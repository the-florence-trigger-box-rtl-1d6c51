// ftb_system: a complete two-layer trigger box.
//
// N_CB Concentrator Boards each reduce 128 front-end trigger requests to 32
// concentrated requests; a single Main Trigger Board receives their outputs
// on its first 32*N_CB inputs and other trigger sources (for example a pulse
// generator) on the remaining 128-32*N_CB inputs, and produces the Main
// Trigger and the validation of the experiment. An MTB takes at most four
// CBs (512 requests); the default of three CBs plus 32 direct inputs is the
// arrangement used at the GARFIELD+RCo apparatus (about 300 requests). The
// CB outputs are wired straight to the MTB inputs: cabling delay and the
// LVDS links are not modelled. The board register interfaces are brought
// out as configuration ports. With four CBs no MTB input is left over; the
// mtb_direct port then keeps one bit, which is not used.
//
// Timing: a CB output change reaches the MTB inputs directly, so a
// front-end request raises MT about 11+delay clocks after it is sampled.
module ftb_system
  import ftb_pkg::*;
#(
  parameter int unsigned N_CB     = 3,
  parameter int unsigned LA_BUF_D = LA_BUF,
  parameter int unsigned LA_CAP_D = LA_MEM,
  // width of the direct MTB input port (at least 1)
  localparam int unsigned N_DIR   = (N_INPUTS > 32 * N_CB) ? N_INPUTS - 32 * N_CB : 1
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic [N_CB-1:0][N_INPUTS-1:0]     treq,         // front-end requests per CB
  input  logic [N_DIR-1:0]                  mtb_direct,   // other MTB inputs
  input  logic                              ext_veto,
  input  cb_cfg_t  [N_CB-1:0]               cb_cfg,
  input  mtb_cfg_t                          mtb_cfg,
  output logic [N_CB-1:0][CB_N_OUT-1:0]     ctreq,
  output logic                              mt,
  output logic                              val,
  output logic [MTB_N_TRIG-1:0]             ptrig,
  output logic [MTB_N_TRIG-1:0]             pattern,
  output logic                              pattern_sout,
  output logic                              busy,
  output logic [MTB_N_TRIG-1:0][CNT_W-1:0]  cnt_raw,
  output logic [MTB_N_TRIG-1:0][CNT_W-1:0]  cnt_post_busy,
  output logic [MTB_N_TRIG-1:0][CNT_W-1:0]  cnt_post_red,
  input  logic [N_CB:0][$clog2(LA_CAP_D)-1:0] la_rd_addr,  // index N_CB is the MTB
  output logic [N_CB:0][LA_W-1:0]           la_rd_data,
  output logic [N_CB:0]                     la_done
);
  for (genvar c = 0; c < N_CB; c++) begin : g_cb
    concentrator_board #(.LA_BUF_D(LA_BUF_D), .LA_CAP_D(LA_CAP_D)) u_cb (
      .clk, .rst_n, .treq(treq[c]), .cfg(cb_cfg[c]), .ctreq(ctreq[c]),
      .la_rd_addr(la_rd_addr[c]), .la_rd_data(la_rd_data[c]), .la_done(la_done[c]));
  end

  logic [N_INPUTS-1:0] mtb_din;
  if (N_INPUTS > 32 * N_CB) begin : g_direct
    assign mtb_din = {mtb_direct, ctreq};
  end else begin : g_no_direct
    assign mtb_din = ctreq;
  end

  main_trigger_board #(.LA_BUF_D(LA_BUF_D), .LA_CAP_D(LA_CAP_D)) u_mtb (
    .clk, .rst_n, .din(mtb_din), .ext_veto, .cfg(mtb_cfg),
    .mt, .val, .ptrig, .pattern, .pattern_sout, .busy,
    .cnt_raw, .cnt_post_busy, .cnt_post_red,
    .la_rd_addr(la_rd_addr[N_CB]), .la_rd_data(la_rd_data[N_CB]), .la_done(la_done[N_CB]));
endmodule
