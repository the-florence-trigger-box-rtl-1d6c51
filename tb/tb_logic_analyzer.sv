// tb_logic_analyzer: group 1 carries a running sample number (bits 30:0),
// group 0 an inverted copy. Captures are started by the input mask (bit 31
// raised on one chosen sample), by the software strobe and by MT, with
// various pre-trigger and total lengths; the memory is read back and word k
// must hold sample lat-(pre_len+1)+k. Full-size buffers (2048/4096) are
// used for the last capture.
`timescale 1ns/1ps
`include "tb/tb_check.svh"
module tb_logic_analyzer;
  logic clk = 0, rst_n = 0;
  logic [1:0][31:0] groups;
  logic mux_sel = 1, arm = 0, sw_trig = 0, mt = 0, mt_en = 0;
  logic [31:0] lat_mask = '0, rd_data;
  logic [10:0] pre_len = '0;
  logic [11:0] tot_len = '0, rd_addr = '0;
  logic capturing, done;
  int checks = 0, failures = 0;
  int n = 0;              // sample number driven in this cycle
  int mark = -1;          // sample number that gets bit 31

  logic_analyzer #(.N_GRP(2), .W(32), .BUF_D(2048), .CAP_D(4096)) dut (.*);
  always #10 clk = ~clk;
  `TB_WATCHDOG(clk, 80000)

  always @(negedge clk) begin
    n <= n + 1;
    groups[1] <= {(n + 1 == mark), 31'(n + 1)};
    groups[0] <= ~{1'b0, 31'(n + 1)};
  end

  // src: 0 = mask, 1 = software, 2 = MT
  task automatic capture(int src, int pre, int tot);
    int lat_n;
    @(negedge clk);
    arm = 0; pre_len = 11'(pre - 1); tot_len = 12'(tot - 1);
    lat_mask = (src == 0) ? 32'h8000_0000 : 32'h0; mt_en = (src == 2);
    @(negedge clk); arm = 1;
    repeat (2100) @(negedge clk);            // let the circular buffer fill
    if (src == 0) begin
      mark = n + 3; lat_n = mark;
    end else begin
      // the strobe, seen at the next edge, is paired with the sample held
      // during this cycle (driven at the previous negedge)
      lat_n = n;
      if (src == 1) sw_trig = 1; else mt = 1;
      @(negedge clk); sw_trig = 0; mt = 0;
    end
    while (!done) @(negedge clk);
    mark = -1;
    for (int k = 0; k < tot; k += ((tot > 64) ? 13 : 1)) begin
      rd_addr = 12'(k);
      @(negedge clk); @(negedge clk);
      `CHECK(rd_data[30:0] == (mux_sel ? 31'(lat_n - pre + k) : ~31'(lat_n - pre + k)),
             $sformatf("src %0d pre %0d word %0d = %0d exp %0d", src, pre, k, rd_data[30:0], lat_n - pre + k))
    end
    rd_addr = 12'(tot - 1); @(negedge clk); @(negedge clk);
    `CHECK(rd_data[30:0] == (mux_sel ? 31'(lat_n - pre + tot - 1) : ~31'(lat_n - pre + tot - 1)), "last word")
  endtask

  initial begin
    groups = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    capture(0, 1, 8);
    capture(0, 10, 40);
    capture(1, 5, 5);
    capture(2, 100, 300);
    mux_sel = 0;   // inverted copy: check the multiplexer
    capture(1, 3, 6);
    `CHECK(rd_data[31] == 1'b1, "group 0 selected")
    mux_sel = 1;
    capture(0, 2048, 4096);
    `TB_DONE
  end
endmodule
