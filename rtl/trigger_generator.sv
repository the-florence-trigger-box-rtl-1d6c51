// trigger_generator: Trigger & Pattern Generator of the Main Trigger Board.
//
// The Main Trigger (MT) is the logic sum of the partial triggers enabled by
// an 8-bit mask. The first enabled partial trigger that becomes true (a
// rising edge, so that a trigger still high from an earlier event does not
// fire again) raises MT, which then
// stays high for the whole resolving time (res_time+1 clocks, 1..64). Every
// enabled partial trigger seen during the resolving time is OR-ed into the
// bit pattern, which is latched at the end of the resolving time
// (pattern_stb marks the update). The validation signal VAL follows: it
// rises val_delay+1 clocks after the end of the resolving time and lasts
// val_width+1 clocks (1..65536). A new MT is accepted only when VAL has
// ended. MT, resolving time, pattern latching and VAL are the board's; the
// registered MT (one clock after the partial trigger), the edge start, the VAL delay field
// and the refusal of new triggers until VAL ends are this design's choices.
//
// Assertions at the end state the output rules: MT and VAL never overlap,
// and pattern_stb (with the new pattern) comes as MT ends.
//
// Timing: MT rises on the clock edge after an enabled trigger appears and
// stays high res_time+1 clocks; pattern and pattern_stb change on the edge
// where MT falls; VAL rises val_delay+1 clocks after that edge.
module trigger_generator #(
  parameter int unsigned N_TRIG = 8,
  parameter int unsigned TW     = 6,
  parameter int unsigned VW     = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [N_TRIG-1:0] din,         // partial triggers after downscaling
  input  logic [N_TRIG-1:0] mask,        // active triggers
  input  logic [TW-1:0]     res_time,    // resolving time - 1
  input  logic [TW-1:0]     val_delay,   // VAL delay - 1
  input  logic [VW-1:0]     val_width,   // VAL width - 1
  output logic              mt,
  output logic              val,
  output logic [N_TRIG-1:0] pattern,
  output logic              pattern_stb
);
  typedef enum logic [1:0] {S_IDLE, S_RES, S_VDLY, S_VAL} tg_state_t;

  tg_state_t         st;
  logic [VW-1:0]     cnt;
  logic [N_TRIG-1:0] act, act_q, acc;

  assign act = din & mask;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) act_q <= '0;
    else        act_q <= act;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; cnt <= '0; acc <= '0; pattern <= '0; pattern_stb <= 1'b0;
    end else begin
      pattern_stb <= 1'b0;
      unique case (st)
        S_IDLE:
          if (|(act & ~act_q)) begin
            st <= S_RES; cnt <= VW'(res_time); acc <= act;
          end
        S_RES: begin
          acc <= acc | act;
          if (cnt == '0) begin
            st <= S_VDLY; cnt <= VW'(val_delay);
            pattern <= acc | act; pattern_stb <= 1'b1;
          end else cnt <= cnt - 1'b1;
        end
        S_VDLY:
          if (cnt == '0) begin st <= S_VAL; cnt <= val_width; end
          else           cnt <= cnt - 1'b1;
        S_VAL:
          if (cnt == '0) st <= S_IDLE;
          else           cnt <= cnt - 1'b1;
        default: st <= S_IDLE;
      endcase
    end
  end

  assign mt  = (st == S_RES);
  assign val = (st == S_VAL);

  // MT and VAL never overlap, and the pattern strobe comes on the clock
  // where MT ends.
  a_mt_val: assert property (@(posedge clk) !(mt && val));
  a_stb:    assert property (@(posedge clk) pattern_stb |-> $fell(mt));
endmodule
