`timescale 1ns/1ps
// tb_gray_timebase: samples the Gray time 0.5 ns after every clock edge for
// 70,000 half periods (past the 16-bit wrap-around) and checks that exactly
// one bit changes per half period, that the decoded value counts 1, 2, 3, ...
// from the first rising edge after reset (a 2 ns step at 250 MHz), and that it
// wraps from 65535 to 0. The Gray decoding here is the testbench's own.
module tb_gray_timebase;
  logic clk = 1'b0, rst_n = 1'b1;
  logic [15:0] gray, prev;
  int checks = 0, failures = 0, wraps = 0;

  gray_timebase dut (.clk, .rst_n, .gray);

  always #2 clk = ~clk;

  function automatic int decode(input logic [15:0] g);
    int b = 0;
    for (int i = 15; i >= 0; i--) b = (b << 1) | (((b & 1) ^ g[i]) & 1);
    return b;
  endfunction

  initial begin
    int expect_t;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b0;
    repeat (2) @(posedge clk);
    #0.5;
    checks++;
    if (gray !== 16'h0) begin failures++; $display("FAIL reset value %h", gray); end
    @(negedge clk); #1 rst_n = 1'b1;
    @(posedge clk); #0.5;
    expect_t = 1;
    prev = gray;
    checks++;
    if (decode(gray) != 1) begin failures++; $display("FAIL first step %0d", decode(gray)); end
    for (int h = 0; h < 70000; h++) begin
      @(clk); #0.5;
      expect_t = (expect_t + 1) % 65536;
      if (expect_t == 0) wraps++;
      checks += 2;
      if ($countones(gray ^ prev) != 1) begin
        failures++; $display("FAIL %0d bits changed at step %0d", $countones(gray ^ prev), h);
      end
      if (decode(gray) != expect_t) begin
        failures++; if (failures < 10) $display("FAIL time %0d expected %0d", decode(gray), expect_t);
      end
      prev = gray;
    end
    checks++;
    if (wraps != 1) begin failures++; $display("FAIL wraps %0d", wraps); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
