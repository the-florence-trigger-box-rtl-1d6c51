// ftb_pkg: constants and configuration-register types shared by the
// Concentrator Board (CB) and Main Trigger Board (MTB) logic of the trigger box.
//
// Sizes follow the board description: 128 logic inputs per board, 16 OR
// sums and 2 x 8 multiplicity outputs on the CB, 8 partial triggers on the
// MTB, 32-bit scalers and a 32-bit wide logic analyser. All programmable
// times of 1..64 clock periods are held in 6-bit fields coding "N-1", so
// that the field value 0 means one clock and 63 means 64 clocks; the same
// "N-1" coding is used for the 16-bit validation width (1..65536 clocks) and
// for the logic-analyser lengths. This coding is a choice of this design.
package ftb_pkg;

  localparam int unsigned N_INPUTS    = 128;  // inputs of a CB or an MTB
  localparam int unsigned CB_N_OR     = 16;   // CB logic-matrix outputs
  localparam int unsigned CB_N_MSET   = 2;    // CB multiplicity sets
  localparam int unsigned CB_MULT_MAX = 8;    // outputs per multiplicity set
  localparam int unsigned CB_N_OUT    = 32;   // CB output width
  localparam int unsigned MTB_N_TRIG  = 8;    // MTB partial triggers
  localparam int unsigned TW          = 6;    // width of 1..64-clock time fields
  localparam int unsigned DS_W        = 16;   // downscale factor width
  localparam int unsigned VAL_W       = 16;   // validation width field
  localparam int unsigned CNT_W       = 32;   // scaler width
  localparam int unsigned LA_W        = 32;   // logic analyser word
  localparam int unsigned LA_BUF      = 2048; // circular (pre-trigger) buffer depth
  localparam int unsigned LA_MEM      = 4096; // capture memory depth
  localparam int unsigned LA_SEL_W    = 4;    // analyser preset select (up to 16 presets)

  // Logic-analyser controls, common to both boards.
  typedef struct packed {
    logic [LA_SEL_W-1:0]     mux_sel;   // preset group of 32 signals
    logic                    arm;       // acquisition enabled
    logic                    sw_trig;   // software LAT (one-clock pulse)
    logic                    mt_en;     // MTB only: Main Trigger starts capture
    logic [LA_W-1:0]         lat_mask;  // OR of these displayed signals is a LAT
    logic [$clog2(LA_BUF)-1:0] pre_len; // pre-LAT samples - 1   (1..2048)
    logic [$clog2(LA_MEM)-1:0] tot_len; // total samples   - 1   (1..4096)
  } la_cfg_t;

  // Concentrator Board user parameters (CB parameter table).
  typedef struct packed {
    logic [CB_N_OR-1:0][N_INPUTS-1:0]   lm_mask;   // LM: input i feeds OR j
    logic [TW-1:0]                      gate_w;    // Gate width - 1
    logic [CB_N_MSET-1:0][N_INPUTS-1:0] mm_mask;   // MM: active inputs per set
    logic [3:0][1:0]                    shuffle;   // MS: source group of output group k
    la_cfg_t                            la;
  } cb_cfg_t;

  // Main Trigger Board user parameters (MTB parameter table).
  typedef struct packed {
    logic [TW-1:0]                          gd_width;   // G&D gate width - 1
    logic [N_INPUTS-1:0][TW-1:0]            gd_delay;   // G&D delay - 1, per input
    logic [MTB_N_TRIG-1:0][N_INPUTS-1:0]    lm_in_en;   // LM trigger masks: on/off
    logic [MTB_N_TRIG-1:0][N_INPUTS-1:0]    lm_in_inv;  // LM trigger masks: +/-
    logic [MTB_N_TRIG-1:0][MTB_N_TRIG-1:0]  lm_fb_en;   // LM feedback masks: on/off
    logic [MTB_N_TRIG-1:0][MTB_N_TRIG-1:0]  lm_fb_inv;  // LM feedback masks: +/-
    logic [MTB_N_TRIG-1:0]                  lm_out_en;  // LM output status: on/off
    logic [MTB_N_TRIG-1:0]                  lm_out_inv; // LM output status: +/-
    logic                                   ext_veto_en;// external VETO input used
    logic                                   auto_veto_en;// veto set after each MT
    logic                                   veto_clr;   // register write: release auto veto
    logic [MTB_N_TRIG-1:0][DS_W-1:0]        ds_factor;  // downscale factors
    logic [MTB_N_TRIG-1:0]                  tg_mask;    // active triggers
    logic [TW-1:0]                          res_time;   // resolving time - 1
    logic [TW-1:0]                          val_delay;  // VAL delay - 1 after resolving time
    logic [VAL_W-1:0]                       val_width;  // VAL width - 1
    logic                                   cnt_clr;    // scaler reset (one-clock pulse)
    la_cfg_t                                la;
  } mtb_cfg_t;

endpackage
