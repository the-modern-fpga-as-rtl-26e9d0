`timescale 1ns/1ps
// tb_disc_scaler: checks the scaler bank against a reference count.
// Three channels with a 100-clock gate and 6-bit counters: channel 0 fires
// every clock (must saturate at 63), channel 1 every 4th clock (25 per gate),
// channel 2 at random. The reference counts the same pulses in the same
// gate and the test also checks that `valid` comes every GATE clocks.
module tb_disc_scaler;
  localparam int N = 3, GATE = 100, CB = 6;
  logic clk = 1'b0, rst_n = 1'b1;
  logic [N-1:0] fire = '0;
  logic [CB-1:0] count [N];
  logic valid;
  int checks = 0, failures = 0, gates = 0;
  int cyc = 0, last_valid = -1;
  int acc [N];
  int exp_q [$];

  disc_scaler #(.N(N), .GATE_CYCLES(GATE), .COUNT_BITS(CB)) dut (.clk, .rst_n, .fire, .count, .valid);

  always #2 clk = ~clk;

  // stimulus on the falling edge
  always @(negedge clk) begin
    fire[0] <= rst_n;
    fire[1] <= rst_n && (cyc % 4 == 0);
    fire[2] <= rst_n && ($urandom_range(0, 2) == 0);
  end

  // reference: gate i spans clocks [i*GATE, (i+1)*GATE) after reset
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < N; c++) if (fire[c]) acc[c]++;
    if (cyc % GATE == GATE - 1) begin
      for (int c = 0; c < N; c++) begin
        exp_q.push_back(acc[c] > 63 ? 63 : acc[c]);
        acc[c] = 0;
      end
    end
    cyc <= cyc + 1;
  end

  always @(negedge clk) if (rst_n && valid) begin
    gates++;
    for (int c = 0; c < N; c++) begin
      int e;
      e = exp_q.pop_front();
      checks++;
      if (int'(count[c]) != e) begin
        failures++;
        $display("FAIL gate %0d ch %0d: count %0d expected %0d", gates, c, count[c], e);
      end
    end
    if (last_valid >= 0) begin
      checks++;
      if (cyc - last_valid != GATE) begin
        failures++; $display("FAIL valid period %0d", cyc - last_valid);
      end
    end
    last_valid = cyc;
  end

  initial begin
    for (int c = 0; c < N; c++) acc[c] = 0;
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    repeat (5 * GATE + 10) @(posedge clk);
    checks++;
    if (gates != 5) begin failures++; $display("FAIL gates %0d", gates); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20 * GATE) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
