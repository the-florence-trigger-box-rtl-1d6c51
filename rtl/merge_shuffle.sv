// merge_shuffle: Merge & Shuffle block of the Concentrator Board.
//
// Builds the 32-bit board output from the two processing lines. The 16
// logic-matrix outputs form groups A (bits 7:0) and B (15:8), the 16
// multiplicity outputs form groups C (7:0) and D (15:8). Output group k
// (bits 8k+7:8k of dout) carries source group sel[k] (0=A, 1=B, 2=C, 3=D),
// so any ordering of the groups can be put on the connector, in particular
// the two groups wanted on the first 16 bits. The grouping is the board's;
// the 2-bit-per-group selector is this design's encoding of the
// "{A,B,C,D} permutations" setting (a selector that repeats a group is also
// accepted and simply duplicates it).
//
// Timing: dout is registered, one clock after its inputs.
module merge_shuffle (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [15:0]      lm,       // groups A, B
  input  logic [15:0]      mm,       // groups C, D
  input  logic [3:0][1:0]  sel,
  output logic [31:0]      dout
);
  logic [3:0][7:0] grp, o;

  assign grp = {mm, lm};   // grp[0]=A grp[1]=B grp[2]=C grp[3]=D

  always_comb
    for (int k = 0; k < 4; k++) o[k] = grp[sel[k]];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) dout <= '0;
    else        dout <= o;
endmodule
