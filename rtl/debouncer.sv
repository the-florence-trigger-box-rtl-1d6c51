// debouncer: input stage of the Concentrator Board.
//
// Each of the N trigger-request inputs is brought into the board clock domain
// by a two-flop synchroniser. A rising edge of the synchronised signal starts
// (or restarts) a one-shot of PULSE_CYC clock periods; the output is high while
// the one-shot runs. Bounces of a noisy comparator that arrive while the pulse
// is active only restart the pulse, so they never produce a second output
// edge: the dead time is paralyzable, as described for the board.
// The 160 ns pulse at a 50 MHz clock (8 periods) is the board's figure; the
// synchroniser depth and the restart-on-edge mechanism are this design's own.
//
// Timing: an input edge reaches dout three clocks later (two synchroniser
// flops plus the edge register); dout then stays high for PULSE_CYC clocks
// after the last input rising edge.
module debouncer #(
  parameter int unsigned N         = 128,
  parameter int unsigned PULSE_CYC = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] din,   // asynchronous trigger requests
  output logic [N-1:0] dout   // cleaned, synchronous requests
);
  localparam int unsigned CW = $clog2(PULSE_CYC + 1);

  logic [N-1:0] s1, s2, s3;
  logic [N-1:0][CW-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1 <= '0; s2 <= '0; s3 <= '0;
    end else begin
      s1 <= din; s2 <= s1; s3 <= s2;
    end
  end

  for (genvar i = 0; i < N; i++) begin : g_ch
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)                cnt[i] <= '0;
      else if (s2[i] && !s3[i])  cnt[i] <= CW'(PULSE_CYC);
      else if (cnt[i] != '0)     cnt[i] <= cnt[i] - 1'b1;
    end
    assign dout[i] = (cnt[i] != '0);
  end
endmodule
