// downscaler: per-trigger rate reduction of the Main Trigger Board.
//
// Channel i passes only one trigger out of factor[i] (1..65535): the
// rising edges of the channel are counted modulo factor[i] and the trigger
// whose edge finds the count at 0 is passed whole (the full pulse), the
// others are blocked whole. A factor of 0 is treated as 1. The function and
// the 16-bit range are the board's; passing the first trigger of each group
// of n and the handling of 0 are this design's choices.
//
// Timing: dout follows din combinationally; the count advances on the clock
// edge that ends the first cycle of each input pulse.
module downscaler #(
  parameter int unsigned N_TRIG = 8,
  parameter int unsigned W      = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [N_TRIG-1:0]          din,
  input  logic [N_TRIG-1:0][W-1:0]   factor,
  output logic [N_TRIG-1:0]          dout
);
  logic [N_TRIG-1:0]        din_q, pass_q, rise;
  logic [N_TRIG-1:0][W-1:0] cnt;

  assign rise = din & ~din_q;

  for (genvar i = 0; i < N_TRIG; i++) begin : g_ch
    logic last;
    assign last = (factor[i] <= W'(1)) || (cnt[i] >= factor[i] - 1'b1);

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        din_q[i] <= 1'b0; pass_q[i] <= 1'b0; cnt[i] <= '0;
      end else begin
        din_q[i] <= din[i];
        if (rise[i]) begin
          pass_q[i] <= (cnt[i] == '0);
          cnt[i]    <= last ? '0 : cnt[i] + 1'b1;
        end
      end
    end

    assign dout[i] = din[i] & (rise[i] ? (cnt[i] == '0) : pass_q[i]);
  end
endmodule
