// tb_dead_time: counting-rate workload for the dead-time (DT) stages of the
// trigger box. Random (Poisson) trigger-request trains are driven into
//   stream 0: the CB debouncer, 160 ns pulse (paralyzable),
//   stream 1: the CB gate, 200 ns window (nonparalyzable),
//   stream 2: one Gate & Delay Generator channel, 200 ns gate, shortest
//             delay (nonparalyzable),
//   stream 3: four Gate & Delay channels summed by the MTB logic matrix in a
//             pure OR configuration, 200 ns gates (paralyzable at the OR).
// Each request is a 1-clock pulse; gaps are exponential in whole clocks
// (at least 2). Every stream is run first at the rate that the board's
// performance figures quote for 1 % DT (63 kHz for the debouncer, 50 kHz
// otherwise) and then at ten times that rate (about 10 % DT).
//
// Two kinds of checks per stream and phase:
//   * exact: an event-level model of the stage (which request is merged or
//     ignored, from the gaps in clocks) must match the number of output
//     pulses counted on the block;
//   * statistical: the lost fraction must agree with the textbook DT
//     formula, 1-exp(-r*tau) (paralyzable) or r*tau/(1+r*tau)
//     (nonparalyzable), within four standard deviations.
// The dead times tau are this implementation's: 8 clocks for the debouncer,
// 10 for the CB gate, 13 for a Gate & Delay channel (the 200 ns gate plus
// one delay clock plus the synchroniser and hand-back clocks, see
// gate_delay_gen) and 10 at the OR of the gates. The measured rates at 1 % DT
// are printed next to the figures the board description quotes.
`timescale 1ns/1ps
`include "tb/tb_check.svh"
module tb_dead_time;
  localparam int NS = 4;            // streams
  localparam int N_EV_LO = 20000;   // requests per stream, 1 % DT phase
  localparam int N_EV_HI = 5000;    // requests per stream, 10 % DT phase
  localparam real F_CLK = 50.0e6;

  logic clk = 0, rst_n = 0;
  logic [NS+2:0] line = '0;         // lines 3..6: the four OR channels
  logic [NS-1:0] out, out_q;
  logic [3:0]    gd4_out;
  logic [7:0]    lm_trig;
  int checks = 0, failures = 0;

  int n_in   [NS] = '{default: 0};
  int n_lost [NS] = '{default: 0};  // model: merged or ignored requests
  int n_out  [NS] = '{default: 0};                  // output rising edges seen on the block

  debouncer #(.N(1), .PULSE_CYC(8)) u_deb (
    .clk, .rst_n, .din(line[0]), .dout(out[0]));
  cb_gate #(.N(1), .TW(6)) u_gate (
    .clk, .rst_n, .din(line[1]), .width(6'd9), .dout(out[1]));
  gate_delay_gen #(.N(1), .TW(6)) u_gd (
    .clk, .rst_n, .din(line[2]), .width(6'd9), .delay('0), .dout(out[2]));
  gate_delay_gen #(.N(4), .TW(6)) u_gd4 (
    .clk, .rst_n, .din(line[6:3]), .width(6'd9), .delay('0), .dout(gd4_out));
  mtb_logic_matrix #(.N(4), .N_TRIG(8)) u_lm (
    .clk, .rst_n, .din(gd4_out),
    .in_en({8{4'hF}}), .in_inv('0), .fb_en('0), .fb_inv('0),
    .out_en(8'h01), .out_inv(8'h00), .trig(lm_trig));
  assign out[3] = lm_trig[0];

  always #10 clk = ~clk;
  `TB_WATCHDOG(clk, 60000000)

  always_ff @(posedge clk) begin
    out_q <= out;
    for (int s = 0; s < NS; s++)
      if (rst_n && out[s] && !out_q[s]) n_out[s] <= n_out[s] + 1;
  end

  // Exponential gap in whole clocks, mean `mean` clocks, at least 2.
  function automatic int gap(real mean);
    real u = (real'($urandom_range(1, 32'h7FFF_FFFF))) / 2147483647.0;
    int  g = int'($ceil(-$ln(u) * mean));
    return (g < 2) ? 2 : g;
  endfunction

  // One request stream into a single-input stage. tau: the largest gap (in
  // clocks) after the reference request that still loses the new one; the
  // reference is the previous request (paralyzable) or the previous accepted
  // request (nonparalyzable).
  task automatic run_single(int s, real mean, int n, int tau, bit para);
    int since = 1 << 30;
    @(negedge clk);
    for (int e = 0; e < n; e++) begin
      int g = gap(mean);
      line[s] = 1'b1;
      n_in[s]++;
      if (since <= tau) n_lost[s]++;
      if (para || since > tau) since = 0;
      @(negedge clk);
      line[s] = 1'b0;
      repeat (g - 1) @(negedge clk);
      since += g;
    end
  endtask

  // The OR stream: one Poisson train spread at random over four G&D
  // channels. A request is lost if its own channel is still dead (13
  // clocks after its last accepted request) or, once accepted, if its gate
  // begins before the running OR output has gone low again.
  task automatic run_or(real mean, int n);
    int since_ch [4] = '{default: 1 << 30};
    int t = 0;
    int or_end = -(1 << 30);      // first clock at which the OR is low again
    @(negedge clk);
    for (int e = 0; e < n; e++) begin
      int g  = gap(mean);
      int ch = $urandom_range(0, 3);
      line[3 + ch] = 1'b1;
      n_in[3]++;
      if (since_ch[ch] <= 13) n_lost[3]++;
      else begin
        since_ch[ch] = 0;
        if (t + 3 <= or_end) n_lost[3]++;
        or_end = (t + 13 > or_end) ? t + 13 : or_end;
      end
      @(negedge clk);
      line[3 + ch] = 1'b0;
      repeat (g - 1) @(negedge clk);
      t += g;
      foreach (since_ch[c]) since_ch[c] += g;
    end
  endtask

  // Compare one phase of one stream with the model and with the DT formula.
  // p_add: losses the formula leaves out (for the OR stream, requests that
  // fall 11..13 clocks after an accepted one on the same channel).
  task automatic judge(int s, string name, real rate, int tau, bit para,
                       real p_add, int in0, int lost0, int out0);
    int   nin  = n_in[s] - in0;
    int   lost = n_lost[s] - lost0;
    int   nout = n_out[s] - out0;
    real  rt   = rate * real'(tau) / F_CLK;
    real  p    = (para ? 1.0 - $exp(-rt) : rt / (1.0 + rt)) + p_add;
    real  sig  = $sqrt(real'(nin) * p * (1.0 - p));
    real  meas = real'(nin - nout) / real'(nin);
    real  dev  = real'(nin - nout) - real'(nin) * p;
    $display("%-28s %7.1f kHz  tau %3.0f ns  lost %5.2f %% (formula %5.2f %%)",
             name, rate / 1.0e3, real'(tau) * 20.0, 100.0 * meas, 100.0 * p);
    `CHECK(nout == nin - lost,
           $sformatf("%s: %0d outputs, model expects %0d", name, nout, nin - lost))
    `CHECK(((dev < 0.0) ? -dev : dev) <= 4.0 * sig + 2.0,
           $sformatf("%s: %0d lost, formula %0.1f", name, nin - nout, real'(nin) * p))
  endtask

  task automatic phase(real scale, int n);
    int   in0 [NS], lost0 [NS], out0 [NS];
    real  r_deb = 63.0e3 * scale, r_std = 50.0e3 * scale;
    for (int s = 0; s < NS; s++) begin
      in0[s] = n_in[s]; lost0[s] = n_lost[s]; out0[s] = n_out[s];
    end
    fork
      run_single(0, F_CLK / r_deb, n, 8, 1'b1);
      run_single(1, F_CLK / r_std, n, 10, 1'b0);
      run_single(2, F_CLK / r_std, n, 13, 1'b0);
      run_or(F_CLK / r_std, n);
    join
    repeat (40) @(posedge clk);
    judge(0, "CB debouncer 160 ns", r_deb, 8, 1'b1, 0.0, in0[0], lost0[0], out0[0]);
    judge(1, "CB gate 200 ns", r_std, 10, 1'b0, 0.0, in0[1], lost0[1], out0[1]);
    judge(2, "G&D channel 200 ns", r_std, 13, 1'b0, 0.0, in0[2], lost0[2], out0[2]);
    judge(3, "OR of four G&D 200 ns", r_std, 10, 1'b1, 0.25 * 3.0 * r_std / F_CLK, in0[3], lost0[3], out0[3]);
  endtask

  initial begin
    // the G&D input latches are cleared by a falling reset edge
    #1 rst_n = 0; #1 rst_n = 1; #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    $display("1 %% DT rates quoted for the boards: debouncer 63 kHz, gate 50 kHz, G&D 50 kHz, LM OR 50 kHz");
    phase(1.0, N_EV_LO);
    phase(10.0, N_EV_HI);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
