// gate_delay_gen: Gate & Delay Generator, the input stage of the Main
// Trigger Board.
//
// Every input drives the clock pin of its own latching flip-flop, so a
// trigger request is caught even if it is shorter than the board clock
// period. The latch is brought into the clock domain by two synchroniser
// flops; its rising edge starts a per-channel delay of delay[i]+1 clocks,
// after which the channel output is a gate of width+1 clocks (both 1..64;
// the width is common to all inputs, the delay is set per input so that
// detectors with different response times can be aligned). From the moment
// a request is accepted until the gate ends the channel's latch is held
// cleared, so further requests are ignored: the dead time per channel is
// nonparalyzable and equals delay plus width, as in the board's performance
// figures, plus three clocks (synchroniser, and re-opening the latch). The latching flip-flop, common width and per-channel delay
// are the board's; the synchroniser and the hold-clear mechanism are this
// design's.
//
// Timing: call k the first clock edge after an accepted input edge. The
// gate is high after clock edges k+3+delay[i] through k+3+delay[i]+width
// (two synchroniser flops, the edge/state register, then delay[i]+1 delay
// clocks), i.e. for width+1 clocks. The channel accepts a new input edge
// again after clock edge k+4+delay[i]+width.
module gate_delay_gen #(
  parameter int unsigned N  = 128,
  parameter int unsigned TW = 6
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         din,     // asynchronous trigger inputs
  input  logic [TW-1:0]        width,   // gate width - 1
  input  logic [N-1:0][TW-1:0] delay,   // per-channel delay - 1
  output logic [N-1:0]         dout     // aligned gates
);
  typedef enum logic [1:0] {S_IDLE, S_DELAY, S_GATE} ch_state_t;

  for (genvar i = 0; i < N; i++) begin : g_ch
    logic      lat, s1, s2, s3, hold;
    logic      clr_n;
    ch_state_t st;
    logic [TW-1:0] cnt;

    assign clr_n = rst_n & ~hold;

    // Edge-catching flip-flop clocked by the trigger input itself.
    always_ff @(posedge din[i] or negedge clr_n)
      if (!clr_n) lat <= 1'b0;
      else        lat <= 1'b1;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        s1 <= 1'b0; s2 <= 1'b0; s3 <= 1'b0;
        st <= S_IDLE; cnt <= '0; hold <= 1'b0;
      end else begin
        s1 <= lat; s2 <= s1; s3 <= s2;
        unique case (st)
          S_IDLE:
            if (s2 && !s3) begin
              st <= S_DELAY; cnt <= delay[i]; hold <= 1'b1;
            end
          S_DELAY:
            if (cnt == '0) begin st <= S_GATE; cnt <= width; end
            else           cnt <= cnt - 1'b1;
          S_GATE:
            if (cnt == '0) begin st <= S_IDLE; hold <= 1'b0; end
            else           cnt <= cnt - 1'b1;
          default: st <= S_IDLE;
        endcase
      end
    end

    assign dout[i] = (st == S_GATE);
  end
endmodule
