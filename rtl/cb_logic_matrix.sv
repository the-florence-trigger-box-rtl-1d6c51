// cb_logic_matrix: Logic Matrix of the Concentrator Board.
//
// Produces N_OUT logic sums ("or") of the N inputs. For output j, the N-bit
// mask mask[j] selects which inputs take part, so each concentrated trigger
// request is the OR of any subset of the inputs. The function and the sizes
// (16 outputs, 128 inputs, one mask bit per input and output) are those of
// the board; registering the outputs once is this design's choice, so that
// the CB output path is fully synchronous.
//
// Timing: dout is valid one clock after din and mask.
module cb_logic_matrix #(
  parameter int unsigned N     = 128,
  parameter int unsigned N_OUT = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [N-1:0]               din,
  input  logic [N_OUT-1:0][N-1:0]    mask,
  output logic [N_OUT-1:0]           dout
);
  logic [N_OUT-1:0] sum;

  always_comb
    for (int j = 0; j < N_OUT; j++) sum[j] = |(din & mask[j]);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) dout <= '0;
    else        dout <= sum;
endmodule
