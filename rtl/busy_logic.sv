// busy_logic: dead-time (veto) handling of the Main Trigger Board.
//
// Partial triggers pass only while the acquisition is not busy. The busy
// (veto) condition is the external VETO input, if enabled, or an automatic
// veto that is set when a Main Trigger ends (at the end of the resolving
// time), if enabled, and cleared by a register write from the acquisition.
// While the Main Trigger is active (the resolving time) the veto is
// inhibited, so late partial triggers still reach the bit pattern. These
// rules are the board's; synchronising the external veto with two flops and
// setting the automatic veto on the falling edge of the Main Trigger are
// this design's choices.
//
// Timing: dout follows din combinationally; ext_veto takes effect two
// clocks after it changes, the automatic veto on the clock after MT falls.
module busy_logic #(
  parameter int unsigned N_TRIG = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [N_TRIG-1:0] din,
  input  logic              ext_veto,     // asynchronous VETO input
  input  logic              ext_veto_en,
  input  logic              auto_veto_en,
  input  logic              veto_clr,     // one-clock register-write strobe
  input  logic              mt,           // Main Trigger (inhibit)
  output logic [N_TRIG-1:0] dout,
  output logic              busy
);
  logic v1, v2, mt_q, auto_veto;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; mt_q <= 1'b0; auto_veto <= 1'b0;
    end else begin
      v1   <= ext_veto;
      v2   <= v1;
      mt_q <= mt;
      if (auto_veto_en && mt_q && !mt) auto_veto <= 1'b1;
      else if (veto_clr)               auto_veto <= 1'b0;
    end
  end

  assign busy = (ext_veto_en & v2) | auto_veto;
  assign dout = (busy && !mt) ? '0 : din;
endmodule
