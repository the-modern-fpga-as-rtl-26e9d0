`timescale 1ns/1ps
// tb_wilkinson_adc: four-channel Wilkinson ADC with a behavioural ramp.
// The ramp model stands for the external current source, capacitor and reset
// transistor: while `ramp_reset` is high the ramp sits at V0; when it falls
// the ramp rises linearly and each comparator output `vcmp[i]` goes high
// once the ramp passes that channel's input. The counter counts one per 4 ns
// clock from the ramp start, so an input crossed after (k + 0.5) clocks must
// read k.
//   1. crossing times for codes 10, 200, 1000, 3000; conversion time checked
//      (16 reset clocks + largest code + a few clocks, early stop).
//   2. the transfer curve of the simulated ASIC + FPGA chain: ramp slope and
//      offset chosen for code = 2.1926 * Vin[mV] - 292.16, inputs 160-240 mV;
//      each code must be the floor of that line.
//   3. out of range: an input above the ramp's end reads 4095, one below its
//      start reads 0; the conversion then runs the full 4095 counts.
module tb_wilkinson_adc;
  localparam int N = 4;
  localparam real TCLK = 4.0;
  logic clk = 1'b0, rst_n = 1'b1, start = 1'b0;
  logic [N-1:0] vcmp = '0;
  logic ramp_reset, busy, done;
  logic [11:0] code [N];
  int checks = 0, failures = 0;
  real cross_ns [N];        // crossing delay after ramp start; <0 below range
  real t_ramp;

  wilkinson_adc #(.N_CH(N)) dut (.clk, .rst_n, .start, .vcmp, .ramp_reset, .busy, .done, .code);

  always #2 clk = ~clk;

  // behavioural ramp + LVDS comparators
  always @(negedge ramp_reset) begin
    t_ramp = $realtime;
    for (int i = 0; i < N; i++) begin
      automatic int ii = i;
      if (cross_ns[ii] >= 0.0)
        fork begin
          #(cross_ns[ii]);
          if (!ramp_reset) vcmp[ii] = 1'b1;
        end join_none
    end
  end
  always @(posedge ramp_reset) for (int i = 0; i < N; i++) vcmp[i] = (cross_ns[i] < 0.0);

  task automatic check(input string what, input int got, input int lo, input int hi);
    checks++;
    if (got < lo || got > hi) begin
      failures++; $display("FAIL %s: %0d not in [%0d,%0d]", what, got, lo, hi);
    end
  endtask

  task automatic convert(output int cycles);
    for (int i = 0; i < N; i++) vcmp[i] = (cross_ns[i] < 0.0);
    @(negedge clk); start = 1'b1;
    @(negedge clk); start = 1'b0;
    cycles = 1;
    while (!done && cycles < 10000) begin @(negedge clk); cycles++; end
  endtask

  initial begin
    int cyc;
    int k1 [N] = '{10, 200, 1000, 3000};
    real mv [6] = '{160.0, 200.0, 210.0, 220.0, 230.0, 240.0};
    for (int i = 0; i < N; i++) cross_ns[i] = 1.0e9;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    repeat (3) @(posedge clk);

    // 1. known crossing times
    for (int i = 0; i < N; i++) cross_ns[i] = (k1[i] + 0.5) * TCLK;
    convert(cyc);
    for (int i = 0; i < N; i++) check($sformatf("code ch%0d", i), int'(code[i]), k1[i], k1[i]);
    check("conversion clocks (early stop)", cyc, 16 + 3000 + 2, 16 + 3000 + 8);
    $display("conversion of max code 3000 took %0d clocks", cyc);

    // 2. transfer curve: code = 2.1926 * mV - 292.16
    for (int pass = 0; pass < 2; pass++) begin
      for (int i = 0; i < N; i++) begin
        real v;
        v = mv[(pass * N + i) % 6];
        cross_ns[i] = (2.1926 * v - 292.16) * TCLK;
      end
      convert(cyc);
      for (int i = 0; i < N; i++) begin
        real v;
        v = mv[(pass * N + i) % 6];
        check($sformatf("%0.0f mV", v), int'(code[i]), int'($floor(2.1926 * v - 292.16)),
              int'($floor(2.1926 * v - 292.16)));
        if (pass == 0 || i < 2) $display("Vin %0.0f mV -> code %0d", v, code[i]);
      end
    end

    // 3. out of range
    cross_ns[0] = 1.0e9;            // above the ramp's end
    cross_ns[1] = -1.0;             // below the ramp's start
    cross_ns[2] = 100.5 * TCLK;
    cross_ns[3] = 4094.5 * TCLK;    // last code below full scale
    convert(cyc);
    check("over range", int'(code[0]), 4095, 4095);
    check("under range", int'(code[1]), 0, 0);
    check("in range", int'(code[2]), 100, 100);
    check("near full scale", int'(code[3]), 4094, 4094);
    check("full-scale conversion clocks", cyc, 16 + 4095 + 1, 16 + 4095 + 6);
    check("ramp held in reset when idle", int'(ramp_reset), 1, 1);
    check("not busy when idle", int'(busy), 0, 0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
