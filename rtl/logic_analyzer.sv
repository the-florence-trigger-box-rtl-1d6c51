// logic_analyzer: built-in logic analyser of both boards.
//
// A multiplexer picks one of N_GRP preset groups of 32 internal signals.
// The selected word is written on every clock into a BUF_D-word circular
// buffer. When the analyser is armed and a trigger (LAT) condition occurs,
// CAP_D-word capture memory is filled with tot_len+1 consecutive samples,
// the first pre_len+1 of which precede the LAT, as in a digital
// oscilloscope. The LAT is a software strobe, the Main Trigger (if mt_en),
// or the OR of the displayed signals selected by lat_mask. The capture
// memory is read through rd_addr/rd_data by the register interface.
//
// How the pre-trigger is obtained is this design's own: the circular buffer
// is read pre_len+1 words behind its write pointer, so its read port
// delivers the sample stream delayed by pre_len+1 clocks, and the capture
// memory simply records that delayed stream from the LAT on. The sizes
// (2048-word buffer, 4096-word memory, pre-LAT 1..2048, total 1..4096) are
// the board's. done is set when the capture is complete; dropping arm
// clears it and re-arms the analyser.
//
// Timing: with the LAT on the sample registered in clock t, capture word k
// holds the sample of clock t-(pre_len+1)+k. rd_data is registered: one
// clock after rd_addr.
module logic_analyzer #(
  parameter int unsigned N_GRP = 4,
  parameter int unsigned W     = 32,
  parameter int unsigned BUF_D = 2048,
  parameter int unsigned CAP_D = 4096
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [N_GRP-1:0][W-1:0]      groups,
  input  logic [$clog2(N_GRP)-1:0]     mux_sel,
  input  logic                         arm,
  input  logic                         sw_trig,
  input  logic                         mt,
  input  logic                         mt_en,
  input  logic [W-1:0]                 lat_mask,
  input  logic [$clog2(BUF_D)-1:0]     pre_len,   // pre-LAT samples - 1
  input  logic [$clog2(CAP_D)-1:0]     tot_len,   // total samples - 1
  input  logic [$clog2(CAP_D)-1:0]     rd_addr,
  output logic [W-1:0]                 rd_data,
  output logic                         capturing,
  output logic                         done
);
  localparam int unsigned BA = $clog2(BUF_D);
  localparam int unsigned CA = $clog2(CAP_D);

  logic [W-1:0]  sample, dly;
  logic [W-1:0]  cbuf [BUF_D];
  logic [W-1:0]  cmem [CAP_D];
  logic [BA-1:0] wp, rp;
  logic [CA-1:0] wa;
  logic          lat;

  // Read pointer: pre_len+1 words behind the write pointer (mod BUF_D).
  assign rp  = wp - pre_len - 1'b1;
  assign lat = sw_trig | (mt_en & mt) | (|(sample & lat_mask));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sample <= '0; wp <= '0;
    end else begin
      sample <= (32'(mux_sel) < N_GRP) ? groups[mux_sel] : '0;
      wp     <= wp + 1'b1;
    end
  end

  // Circular buffer: write the current sample, read the delayed one.
  always_ff @(posedge clk) begin
    cbuf[wp] <= sample;
    dly      <= cbuf[rp];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      capturing <= 1'b0; done <= 1'b0; wa <= '0;
    end else if (!arm) begin
      capturing <= 1'b0; done <= 1'b0; wa <= '0;
    end else if (capturing) begin
      wa <= wa + 1'b1;
      if (wa == tot_len) begin capturing <= 1'b0; done <= 1'b1; end
    end else if (!done && lat) begin
      capturing <= 1'b1; wa <= '0;
    end
  end

  // Capture memory: written from the delayed stream, read by the bus.
  always_ff @(posedge clk) begin
    if (capturing) cmem[wa] <= dly;
    rd_data <= cmem[rd_addr];
  end
endmodule
