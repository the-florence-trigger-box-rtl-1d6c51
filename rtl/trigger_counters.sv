// trigger_counters: eightfold 32-bit scaler of the Main Trigger Board.
//
// One counter per partial trigger counts the triggers (rising edges) seen
// on its input. The board uses three such banks: at the Logic Matrix output
// (raw), after the Busy Logic (post-busy) and after the Downscaler
// (post-reduction); the ratio of the first two gives the dead-time
// fraction. clr, a register-write strobe, resets all counters. Counting
// edges rather than clocks, and wrapping at 2^32, are this design's
// choices.
//
// Timing: a counter is updated on the clock edge that ends the first clock
// period of an input pulse.
module trigger_counters #(
  parameter int unsigned N = 8,
  parameter int unsigned W = 32
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [N-1:0]       din,
  input  logic               clr,
  output logic [N-1:0][W-1:0] count
);
  logic [N-1:0] din_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      din_q <= '0; count <= '0;
    end else begin
      din_q <= din;
      for (int i = 0; i < N; i++)
        if (clr)                      count[i] <= '0;
        else if (din[i] && !din_q[i]) count[i] <= count[i] + 1'b1;
    end
  end
endmodule
