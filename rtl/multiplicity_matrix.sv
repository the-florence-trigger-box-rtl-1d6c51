// multiplicity_matrix: Multiplicity Matrix of the Concentrator Board.
//
// Holds N_SET independent multiplicity sets. For set s the mask mask[s]
// selects the active inputs; the number of active inputs that are true is
// counted and compared with 1..M_MAX, giving the outputs M>=1 ... M>=M_MAX
// (bit n-1 of a set is M>=n). Sets and thresholds are those of the board
// (two sets of eight); the inputs come from the gate block, whose pulse
// length is the coincidence window. The population count is a plain adder
// tree, registered once (this design's choice).
//
// Timing: dout is valid one clock after din. dout[s*M_MAX + n-1] is M>=n of
// set s.
module multiplicity_matrix #(
  parameter int unsigned N     = 128,
  parameter int unsigned N_SET = 2,
  parameter int unsigned M_MAX = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [N-1:0]             din,
  input  logic [N_SET-1:0][N-1:0]  mask,
  output logic [N_SET*M_MAX-1:0]   dout
);
  localparam int unsigned CW = $clog2(N + 1);

  logic [N_SET*M_MAX-1:0] m;

  always_comb begin
    logic [CW-1:0] cnt;
    logic [N-1:0]  act;
    for (int s = 0; s < N_SET; s++) begin
      act = din & mask[s];
      cnt = '0;
      for (int i = 0; i < N; i++) cnt = cnt + CW'(act[i]);
      for (int n = 1; n <= M_MAX; n++) m[s*M_MAX + n-1] = (cnt >= CW'(n));
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) dout <= '0;
    else        dout <= m;
endmodule
