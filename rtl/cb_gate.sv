// cb_gate: Gate block of the Concentrator Board.
//
// Turns every input trigger into a pulse of fixed length, so that requests
// which arrive within that length overlap and are counted together by the
// multiplicity matrix: the length is the coincidence window. A rising edge
// of an idle channel starts a counter that holds the output high for
// width+1 clock periods (1..64, one common setting for all channels). While
// a channel's pulse runs, new edges are ignored, so the dead time is
// nonparalyzable, as the board's performance figures state. Starting on the
// rising edge rather than on the level is this design's choice.
//
// Timing: dout rises one clock after the din edge is seen and lasts
// exactly width+1 clocks.
module cb_gate #(
  parameter int unsigned N  = 128,
  parameter int unsigned TW = 6
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [N-1:0]  din,
  input  logic [TW-1:0] width,   // pulse length - 1
  output logic [N-1:0]  dout
);
  logic [N-1:0]         din_q;
  logic [N-1:0][TW-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) din_q <= '0;
    else        din_q <= din;

  for (genvar i = 0; i < N; i++) begin : g_ch
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        dout[i] <= 1'b0;
        cnt[i]  <= '0;
      end else if (!dout[i]) begin
        if (din[i] && !din_q[i]) begin
          dout[i] <= 1'b1;
          cnt[i]  <= width;
        end
      end else if (cnt[i] == '0) begin
        dout[i] <= 1'b0;
      end else begin
        cnt[i]  <= cnt[i] - 1'b1;
      end
    end
  end
endmodule
