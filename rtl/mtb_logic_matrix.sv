// mtb_logic_matrix: programmable Logic Matrix of the Main Trigger Board.
//
// Builds N_TRIG partial triggers. Each is a logic sum over N inputs plus the
// N_TRIG partial triggers themselves (feedback), 136 operands at the board's
// sizes. Every operand has an enable bit and an invert bit, and so has every
// output: with inverted operands and an inverted output a sum becomes a
// product (De Morgan), which is how coincidences such as "GARFIELD & RCo"
// are made. A disabled output is held at 0.
//
// The sum itself is combinational, as on the board. The feedback operands are
// taken from a register holding the previous clock's outputs; this is this
// design's choice, made so that the netlist has no combinational loop. Since
// the gates from the Gate & Delay Generator last at least one clock, a
// feedback coincidence is seen one clock later than on a direct path.
//
// Timing: trig follows din combinationally; feedback adds one clock.
module mtb_logic_matrix #(
  parameter int unsigned N      = 128,
  parameter int unsigned N_TRIG = 8
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [N-1:0]                  din,
  input  logic [N_TRIG-1:0][N-1:0]      in_en,
  input  logic [N_TRIG-1:0][N-1:0]      in_inv,
  input  logic [N_TRIG-1:0][N_TRIG-1:0] fb_en,
  input  logic [N_TRIG-1:0][N_TRIG-1:0] fb_inv,
  input  logic [N_TRIG-1:0]             out_en,
  input  logic [N_TRIG-1:0]             out_inv,
  output logic [N_TRIG-1:0]             trig
);
  logic [N_TRIG-1:0] fb_q;

  always_comb
    for (int j = 0; j < N_TRIG; j++)
      trig[j] = out_en[j] & (out_inv[j] ^ (|((din ^ in_inv[j]) & in_en[j])
                                         | |((fb_q ^ fb_inv[j]) & fb_en[j])));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) fb_q <= '0;
    else        fb_q <= trig;
endmodule
