`timescale 1ns/1ps
// tb_anita_surf_trigger: end-to-end test of the 32-channel trigger board logic
// (400-clock scaler gate to keep it short).
// Phase A checks the antenna coincidences with short comparator pulses:
//   antenna 0: 3 channels at once            -> one L1
//   antenna 1: 2 channels at once            -> no L1
//   antenna 2: 3 channels, 2 clocks apart    -> 1-shots overlap -> one L1
//   antenna 3: 3 channels, 3 clocks apart    -> no overlap      -> no L1
// Phase B runs a 25 MHz-period pulser on channel 7 (every 40 clocks) and
// holds channel 15 high (stuck on) and checks one full gate of scalers:
// 10 for channel 7, 400/16 = 25 (+-1) for channel 15, 0 elsewhere.
module tb_anita_surf_trigger;
  localparam int GATE = 400;
  logic clk = 1'b0, rst_n = 1'b1;
  logic [31:0] cmp = '0;
  logic [3:0]  width = 4'd3;
  logic [31:0] os, stuck;
  logic [3:0]  l1, l1_pulse;
  logic [23:0] scaler [32];
  logic        scaler_valid;
  int checks = 0, failures = 0;
  int l1_cnt [4];
  bit pulser_on = 0;

  anita_surf_trigger #(.GATE_CYCLES(GATE)) dut (
    .clk, .rst_n, .cmp, .width, .os, .stuck, .l1, .l1_pulse, .scaler, .scaler_valid);

  always #2 clk = ~clk;

  always @(posedge clk) for (int a = 0; a < 4; a++) if (l1_pulse[a]) l1_cnt[a]++;

  task automatic pulse(input int ch);
    fork begin
      cmp[ch] = 1'b1; #(1.5); cmp[ch] = 1'b0;
    end join_none
  endtask

  task automatic check(input string what, input int got, input int lo, input int hi);
    checks++;
    if (got < lo || got > hi) begin
      failures++; $display("FAIL %s: %0d not in [%0d,%0d]", what, got, lo, hi);
    end
  endtask

  initial begin
    for (int a = 0; a < 4; a++) l1_cnt[a] = 0;
    // let the clock run before reset so every asynchronous clear sees an edge
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    repeat (8) @(posedge clk);
    for (int a = 0; a < 4; a++) l1_cnt[a] = 0;

    // Phase A
    #1;   pulse(0); pulse(3); pulse(5);
    repeat (10) @(posedge clk); #1;
    pulse(8); pulse(9);
    repeat (10) @(posedge clk); #1;
    pulse(16); #8; pulse(17); pulse(18);
    repeat (10) @(posedge clk); #1;
    pulse(24); #12; pulse(25); pulse(26);
    repeat (10) @(posedge clk);
    check("L1 antenna 0 (3 at once)", l1_cnt[0], 1, 1);
    check("L1 antenna 1 (2 at once)", l1_cnt[1], 0, 0);
    check("L1 antenna 2 (overlapping)", l1_cnt[2], 1, 1);
    check("L1 antenna 3 (disjoint)", l1_cnt[3], 0, 0);

    // Phase B: align to a gate, run one complete gate with pulser + stuck input
    @(posedge clk iff scaler_valid);
    #1 pulser_on = 1; cmp[15] = 1'b1;
    @(posedge clk iff scaler_valid);   // gate that contains the start
    @(posedge clk iff scaler_valid);   // one complete gate
    #1;
    check("scaler ch7 pulser", int'(scaler[7]), 10, 10);
    check("scaler ch15 stuck-on", int'(scaler[15]), 24, 26);
    check("stuck flag ch15", int'(stuck[15]), 1, 1);
    for (int c = 0; c < 32; c++)
      if (c != 7 && c != 15) check($sformatf("scaler ch%0d idle", c), int'(scaler[c]), 0, 0);
    pulser_on = 0; cmp[15] = 1'b0;
    check("no L1 from single channels", l1_cnt[1], 0, 0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    forever begin
      @(posedge clk);
      if (pulser_on) begin
        #1 pulse(7);
        repeat (39) @(posedge clk);
      end
    end
  end

  initial begin
    repeat (5 * GATE + 500) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
