`timescale 1ns/1ps
// tb_rate_scan: the singles-rate and accidental-L1 measurements of the
// trigger board, reproduced with random comparator crossings.
// Antenna 0: channels 0-6 receive 1 ns threshold crossings at Poisson rates of
// 0.1, 0.5, 1, 2, 4, 8.3 and 16 MHz; channel 7 is held above threshold.
// One full 1 ms scaler gate is checked against the rate expected for a
// non-retriggerable 1-shot, m = r / (1 + r * tau), with tau = 18 ns (half a
// clock to the first clock edge on average, 12 ns output, one clearing clock),
// within 4 standard deviations plus 2 %. The held channel must read the
// stuck-on floor of 250 MHz / 16 = 15625 kHz.
// Antenna 1: all eight channels at 2 MHz of uncorrelated crossings; the
// accidental 3-of-8 L1 rate is printed next to the cumulative binomial
// estimate P(>= 3 of 8 | p = r * w) / w for a 19 ns window and must lie within
// a factor 2 of it.
module tb_rate_scan;
  logic clk = 1'b0, rst_n = 1'b1;
  logic [31:0] cmp = '0, os, stuck;
  logic [3:0]  width = 4'd3, l1, l1_pulse;
  logic [23:0] scaler [32];
  logic        scaler_valid;
  int checks = 0, failures = 0, l1_in_gate = 0, l1_last = 0, gates = 0;
  real rate_mhz [8] = '{0.1, 0.5, 1.0, 2.0, 4.0, 8.3, 16.0, 0.0};

  anita_surf_trigger dut (.clk, .rst_n, .cmp, .width, .os, .stuck, .l1, .l1_pulse,
                          .scaler, .scaler_valid);

  always #2 clk = ~clk;

  // exponential interval in ns for a rate in MHz
  function automatic real interval_ns(input real r_mhz);
    real u;
    u = (real'($urandom_range(1, 1_000_000))) / 1_000_001.0;
    return -$ln(u) * 1000.0 / r_mhz;
  endfunction

  task automatic poisson(input int ch, input real r_mhz);
    fork begin
      forever begin
        #(interval_ns(r_mhz));
        cmp[ch] = 1'b1; #1.0; cmp[ch] = 1'b0;
      end
    end join_none
  endtask

  always @(posedge clk) if (rst_n) begin
    if (l1_pulse[1]) l1_in_gate <= l1_in_gate + 1;
    if (scaler_valid) begin
      l1_last    <= l1_in_gate + int'(l1_pulse[1]);
      l1_in_gate <= 0;
      gates      <= gates + 1;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int c = 0; c < 7; c++) poisson(c, rate_mhz[c]);
    cmp[7] = 1'b1;
    for (int c = 8; c < 16; c++) poisson(c, 2.0);
    @(posedge clk iff scaler_valid);   // first gate holds the start-up
    @(posedge clk iff scaler_valid);   // one complete 1 ms gate
    #0.5;
    for (int c = 0; c < 7; c++) begin
      real r, m, sd, got;
      r   = rate_mhz[c] * 1000.0;                 // kHz = counts per 1 ms gate
      m   = r / (1.0 + rate_mhz[c] * 1.0e6 * 18.0e-9);
      sd  = $sqrt(m);
      got = real'(scaler[c]);
      $display("ch%0d input %5.1f MHz -> %6.0f kHz measured, %6.0f expected", c, rate_mhz[c], got, m);
      checks++;
      if (got < m - 4.0 * sd - 0.02 * m || got > m + 4.0 * sd + 0.02 * m) begin
        failures++; $display("FAIL ch%0d rate", c);
      end
    end
    $display("ch7 held above threshold -> %0d kHz", scaler[7]);
    checks++;
    if (scaler[7] < 15624 || scaler[7] > 15626) begin failures++; $display("FAIL stuck-on floor"); end
    begin
      real r, w, p, pk, est;
      int binom;
      r = 2.0e6; w = 19.0e-9; p = r * w;
      pk = 0.0;
      for (int k = 3; k <= 8; k++) begin
        binom = 1;
        for (int j = 0; j < k; j++) binom = binom * (8 - j) / (j + 1);
        pk += real'(binom) * (p ** k) * ((1.0 - p) ** (8 - k));
      end
      est = pk / w;
      $display("accidental L1 at 2 MHz singles: %0d per ms measured, %0.0f per ms binomial estimate",
               l1_last, est / 1000.0);
      checks++;
      if (real'(l1_last) < est / 1000.0 / 2.0 || real'(l1_last) > est / 1000.0 * 2.0) begin
        failures++; $display("FAIL accidental L1 rate");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
