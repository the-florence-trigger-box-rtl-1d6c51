// pattern_serializer: serial bit-pattern output of the Main Trigger Board.
//
// For every event the latched trigger pattern is sent on one output line so
// that it can be digitised by a spare front-end channel and stored with the
// event. The board only states that such a serial output exists; the frame
// is this design's own: a start bit (1), then the N pattern bits, most
// significant first, each held for BIT_CYC clocks, then the line returns to
// 0. A load during a frame is ignored.
//
// Timing: the start bit begins on the clock edge after load; a frame lasts
// (N+1)*BIT_CYC clocks; busy is high during the frame.
module pattern_serializer #(
  parameter int unsigned N       = 8,
  parameter int unsigned BIT_CYC = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,
  input  logic [N-1:0] pattern,
  output logic         sout,
  output logic         busy
);
  localparam int unsigned BW = $clog2(N + 2);
  localparam int unsigned CW = (BIT_CYC > 1) ? $clog2(BIT_CYC) : 1;

  logic [N:0]    sh;
  logic [BW-1:0] nbits;
  logic [CW-1:0] cyc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sh <= '0; nbits <= '0; cyc <= '0;
    end else if (nbits == '0) begin
      if (load) begin
        sh <= {1'b1, pattern}; nbits <= BW'(N + 1); cyc <= '0;
      end
    end else if (cyc == CW'(BIT_CYC - 1)) begin
      cyc   <= '0;
      sh    <= {sh[N-1:0], 1'b0};
      nbits <= nbits - 1'b1;
    end else begin
      cyc <= cyc + 1'b1;
    end
  end

  assign busy = (nbits != '0);
  assign sout = busy & sh[N];
endmodule
