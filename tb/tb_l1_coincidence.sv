`timescale 1ns/1ps
// tb_l1_coincidence: applies all 256 patterns of the eight 1-shot inputs,
// in order and then at random, and checks `l1` (at least 3 of 8 high, one
// clock later) and `l1_pulse` (first cycle of each L1 only) against a
// reference computed from the applied patterns.
module tb_l1_coincidence;
  logic clk = 1'b0, rst_n = 1'b1;
  logic [7:0] os = '0, prev = '0;
  logic l1, l1_pulse, exp_l1 = 1'b0, exp_prev = 1'b0;
  int checks = 0, failures = 0, n_l1 = 0, n_pulse = 0;

  l1_coincidence dut (.clk, .rst_n, .os, .l1, .l1_pulse);

  always #2 clk = ~clk;

  task automatic step(input logic [7:0] v);
    @(negedge clk);
    os = v;
    @(posedge clk);
    exp_prev = exp_l1;
    exp_l1   = ($countones(v) >= 3);
    #0.5;
    checks += 2;
    if (l1 !== exp_l1) begin failures++; $display("FAIL l1 pattern %b", v); end
    if (l1_pulse !== (exp_l1 && !exp_prev)) begin failures++; $display("FAIL l1_pulse pattern %b", v); end
    if (l1) n_l1++;
    if (l1_pulse) n_pulse++;
  endtask

  initial begin
    #1 rst_n = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int v = 0; v < 256; v++) step(8'(v));
    for (int i = 0; i < 500; i++) step(8'($urandom));
    checks++;
    // 219 of the 256 patterns have 3 or more bits set
    if (n_l1 < 219) begin failures++; $display("FAIL l1 count %0d", n_l1); end
    $display("L1 cycles %0d, L1 pulses %0d", n_l1, n_pulse);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
