// tb_concentrator_board: full-size Concentrator Board (128 inputs).
// Logic-matrix output j is the OR of inputs 8j..8j+7; multiplicity set 0
// takes inputs 0..63, set 1 inputs 64..127. Checked: single requests reach
// the right concentrated output exactly 5 clocks after being sampled, k
// simultaneous requests give M>=1..k (6 clocks), a bouncing input yields one
// stretched pulse, all 24 group orders of Merge & Shuffle, and a
// logic-analyser capture of the board output.
`timescale 1ns/1ps
`include "tb/tb_check.svh"
module tb_concentrator_board;
  import ftb_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [127:0] treq = '0;
  cb_cfg_t cfg;
  logic [31:0] ctreq;
  logic [11:0] la_rd_addr = '0;
  logic [31:0] la_rd_data;
  logic la_done;
  int checks = 0, failures = 0;

  concentrator_board dut (.*);
  always #10 clk = ~clk;
  `TB_WATCHDOG(clk, 40000)

  // expected output for group order sel, given LM (16) and MM (16) values
  function automatic logic [31:0] shuf(logic [15:0] lm, logic [15:0] mm, logic [3:0][1:0] sel);
    logic [3:0][7:0] g = {mm, lm};
    logic [31:0] r;
    for (int k = 0; k < 4; k++) r[8*k +: 8] = g[sel[k]];
    return r;
  endfunction

  // drive a set of requests for 2 clocks, return the output collected over
  // the next 40 clocks (OR) and the first clock at which any bit rose
  task automatic fire(logic [127:0] v, output logic [31:0] seen, output int first,
                      input logic [31:0] watch = '1);
    seen = '0; first = -1;
    @(negedge clk); treq = v;
    @(negedge clk); @(negedge clk); treq = '0;
    for (int c = 1; c <= 40; c++) begin
      @(negedge clk);
      if ((ctreq & watch) != 0 && first < 0) first = c + 2;  // clock edges after sampling
      seen |= ctreq;
    end
  endtask

  initial begin
    logic [31:0] seen;
    int first;
    cfg = '0;
    for (int j = 0; j < 16; j++) cfg.lm_mask[j] = 128'hFF << (8 * j);
    cfg.mm_mask[0] = {64'h0, {64{1'b1}}};
    cfg.mm_mask[1] = {{64{1'b1}}, 64'h0};
    cfg.gate_w  = 6'd9;
    cfg.shuffle = {2'd3, 2'd2, 2'd1, 2'd0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    // single requests: LM path
    for (int i = 0; i < 128; i += 9) begin
      fire(128'h1 << i, seen, first);
      `CHECK(seen[15:0] == 16'(1 << (i / 8)), $sformatf("LM output for input %0d", i))
      `CHECK(first == 5, $sformatf("LM latency %0d", first))
      `CHECK(seen[16] == (i < 64) && seen[24] == (i >= 64) && seen[23:17] == 0 && seen[31:25] == 0,
             $sformatf("M>=1 only for input %0d", i))
    end
    // multiplicity: k simultaneous requests in set 0 and k+1 in set 1
    for (int k = 1; k <= 9; k++) begin
      automatic logic [127:0] v = '0;
      automatic int k1 = (k % 9) + 1;
      for (int b = 0; b < k; b++)  v[b * 7] = 1'b1;          // inputs 0..56
      for (int b = 0; b < k1; b++) v[64 + b * 6] = 1'b1;     // inputs 64..112
      cfg.shuffle = {2'd1, 2'd0, 2'd3, 2'd2};              // MM groups first
      fire(v, seen, first, 32'h0000_FFFF);
      for (int n = 1; n <= 8; n++) begin
        `CHECK(seen[n-1] == (k >= n),  $sformatf("set0 k=%0d M>=%0d", k, n))
        `CHECK(seen[8+n-1] == (k1 >= n), $sformatf("set1 k=%0d M>=%0d", k1, n))
      end
      `CHECK(first == 6, $sformatf("MM latency %0d", first))
    end
    // all group orders with a fixed LM/MM content (inputs 0 and 72 -> A0, B1, C0(M>=1 set0), D0)
    for (int p = 0; p < 256; p++) begin
      automatic logic [3:0][1:0] sel = 8'(p);
      if (sel[0] == sel[1] || sel[0] == sel[2] || sel[0] == sel[3] ||
          sel[1] == sel[2] || sel[1] == sel[3] || sel[2] == sel[3]) continue;
      cfg.shuffle = sel;
      fire((128'h1 << 0) | (128'h1 << 72), seen, first);
      `CHECK(seen == shuf(16'h0201, 16'h0101, sel), $sformatf("shuffle %h -> %h", sel, seen))
    end
    // bouncing input: three edges 3 clocks apart give one continuous pulse
    cfg.shuffle = {2'd3, 2'd2, 2'd1, 2'd0};
    begin
      automatic int high = 0, rises = 0; automatic logic prev = 0;
      fork
        begin
          @(negedge clk); treq[5] = 1; @(negedge clk); treq[5] = 0;
          @(negedge clk); @(negedge clk); treq[5] = 1; @(negedge clk); treq[5] = 0;
          @(negedge clk); @(negedge clk); treq[5] = 1; @(negedge clk); treq[5] = 0;
        end
        repeat (40) begin
          @(negedge clk);
          if (ctreq[0]) high++;
          if (ctreq[0] && !prev) rises++;
          prev = ctreq[0];
        end
      join
      `CHECK(rises == 1 && high == 8 + 6, $sformatf("debounced pulse rises=%0d len=%0d", rises, high))
    end
    // logic analyser: board output (preset 9), LAT on output bit 2
    cfg.la.mux_sel = 4'd9; cfg.la.lat_mask = 32'h4; cfg.la.pre_len = 11'd3; cfg.la.tot_len = 12'd15;
    @(negedge clk); cfg.la.arm = 1;
    fire(128'h1 << 16, seen, first);
    `CHECK(la_done, "logic analyser captured")
    for (int k = 0; k < 16; k++) begin
      la_rd_addr = 12'(k); @(negedge clk); @(negedge clk);
      `CHECK(la_rd_data[2] == (k >= 4 && k < 12), $sformatf("LA word %0d = %h", k, la_rd_data))
    end
    // re-arm on the highest gate preset (7 = gate outputs 127:96), LAT on
    // gate channel 99: the gate pulse (gate_w+1 clocks) starts at word 4
    @(negedge clk); cfg.la.arm = 0;
    cfg.la.mux_sel = 4'd7; cfg.la.lat_mask = 32'h8;
    @(negedge clk); cfg.la.arm = 1;
    fire(128'h1 << 99, seen, first);
    `CHECK(la_done, "logic analyser captured on gate preset 7")
    for (int k = 0; k < 16; k++) begin
      la_rd_addr = 12'(k); @(negedge clk); @(negedge clk);
      `CHECK(la_rd_data == ((k >= 4 && k < 4 + int'(cfg.gate_w) + 1) ? 32'h8 : 32'h0),
             $sformatf("LA gate word %0d = %h", k, la_rd_data))
    end
    `TB_DONE
  end
endmodule
