`timescale 1ns/1ps
// tb_fpga_frontend_top: end-to-end test of the whole front-end with every
// parameter at its default (1 ms scaler gate, 512-word TDC FIFO, 8 ADC
// channels of 12 bits). The three functions run at the same time:
//   trigger -- runt pulse, second edge in the dead time, 3-of-8 coincidence
//              and a 2-of-8 non-coincidence, then one full 1 ms gate with a
//              250 kHz pulser on channel 7 and channel 15 stuck high
//              (expected scalers 250 and 15625 +- 1).
//   TDC     -- 40 rounds of pulses on all 16 PMT inputs with no readout: 512
//              records fill the FIFO, 16 wait in the channels, the rest are
//              dropped; the FIFO is then drained and every record checked.
//   ADC     -- an in-range conversion (early stop) and one with inputs above
//              and below the ramp range (full-scale conversion).
// Every mechanism is counted and a mechanism that never happened is a failure.
module tb_fpga_frontend_top;
  import daq_pkg::*;
  localparam real TCLK = 4.0;
  localparam int ROUNDS = 40, ROUND_BINS = 50;

  logic clk = 1'b0, rst_n = 1'b1;
  logic [31:0] trig_cmp = '0, trig_os, trig_stuck;
  logic [3:0]  trig_width = 4'd3, l1, l1_pulse;
  logic [23:0] scaler [32];
  logic        scaler_valid;
  logic [15:0] pmt_cmp = '0;
  logic        tdc_rd_en = 1'b0, tdc_rd_valid, tdc_empty, tdc_full;
  tdc_hit_t    tdc_rd_data;
  logic [9:0]  tdc_level;
  logic [31:0] tdc_hit_count, tdc_drop_count;
  logic        adc_start = 1'b0, adc_ramp_reset, adc_busy, adc_done;
  logic [7:0]  adc_vcmp = '0;
  logic [11:0] adc_code [8];

  fpga_frontend_top dut (.*);

  always #2 clk = ~clk;

  int checks = 0, failures = 0;
  realtime t0;
  // mechanism counters
  int n_fire = 0, n_runt = 0, n_deadtime = 0, n_stuck = 0, n_l1 = 0, n_nol1 = 0, n_gate = 0;
  int n_tdc_rec = 0, n_fifo_full = 0, n_drop = 0, n_adc = 0, n_early = 0, n_range = 0;
  logic [31:0] os_q = '0;

  task automatic check(input string what, input int got, input int lo, input int hi);
    checks++;
    if (got < lo || got > hi) begin
      failures++;
      if (failures < 30) $display("FAIL %s: %0d not in [%0d,%0d]", what, got, lo, hi);
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    n_fire <= n_fire + $countones(trig_os & ~os_q);
    os_q   <= trig_os;
    if (scaler_valid) n_gate <= n_gate + 1;
    if (tdc_full) n_fifo_full <= n_fifo_full + 1;
  end

  // ---------------- trigger ----------------
  task automatic tpulse(input int ch, input realtime w);
    fork begin trig_cmp[ch] = 1'b1; #(w); trig_cmp[ch] = 1'b0; end join_none
  endtask

  task automatic count_os_cycles(input int ch, input int span, output int hi, output int rises);
    logic prev = 1'b0;
    hi = 0; rises = 0;
    repeat (span) begin
      @(negedge clk);
      if (trig_os[ch]) hi++;
      if (trig_os[ch] && !prev) rises++;
      prev = trig_os[ch];
    end
  endtask

  task automatic trigger_test();
    int hi, rises, l1_before;
    // runt: 0.3 ns pulse still gives a full 3-clock 1-shot
    @(posedge clk); #1.1; tpulse(31, 0.3);
    count_os_cycles(31, 10, hi, rises);
    check("runt 1-shot width", hi, 3, 3);
    if (hi == 3 && rises == 1) n_runt++;
    // second edge 5 ns after the first is inside the dead time
    @(posedge clk); #1.1; tpulse(30, 1.0); #5.0; tpulse(30, 1.0);
    count_os_cycles(30, 10, hi, rises);
    check("dead-time rising edges", rises, 1, 1);
    if (rises == 1) n_deadtime++;
    // 3-of-8 on antenna 0
    repeat (10) @(posedge clk);
    l1_before = n_l1;
    @(posedge clk); #1; tpulse(1, 1.5); tpulse(4, 1.5); tpulse(6, 1.5);
    repeat (8) begin @(posedge clk); if (l1_pulse[0]) n_l1++; end
    check("L1 antenna 0", n_l1 - l1_before, 1, 1);
    // 2-of-8 on antenna 2: no L1
    @(posedge clk); #1; tpulse(17, 1.5); tpulse(20, 1.5);
    hi = 0;
    repeat (8) begin @(posedge clk); if (l1_pulse[2]) hi++; end
    check("no L1 for 2 of 8", hi, 0, 0);
    if (hi == 0) n_nol1++;
    // one full scaler gate with pulser on channel 7 and channel 15 stuck on
    @(posedge clk iff scaler_valid);
    #1 trig_cmp[15] = 1'b1;
    fork begin : pulser
      forever begin #1.0; tpulse(7, 2.0); repeat (1000) @(posedge clk); end
    end join_none
    @(posedge clk iff scaler_valid);
    @(posedge clk iff scaler_valid);
    #0.5;
    check("scaler ch7 250 kHz pulser", int'(scaler[7]), 250, 250);
    check("scaler ch15 stuck on", int'(scaler[15]), 15624, 15626);
    check("stuck flag", int'(trig_stuck[15]), 1, 1);
    if (scaler[15] > 15000 && trig_stuck[15]) n_stuck++;
    for (int c = 0; c < 32; c++)
      if (c != 7 && c != 15) check($sformatf("scaler ch%0d", c), int'(scaler[c]), 0, 0);
    disable pulser;
    trig_cmp[15] = 1'b0;
  endtask

  // ---------------- TDC ----------------
  task automatic ppulse(input int c, input int L, input int W);
    fork begin
      #(t0 + 2.0 * L + 1.0 - $realtime);
      pmt_cmp[c] = 1'b1;
      #(2.0 * W);
      pmt_cmp[c] = 1'b0;
    end join_none
  endtask

  task automatic tdc_test();
    int got [16][$];
    int tot [16][$];
    int idle = 0;
    for (int r = 0; r < ROUNDS; r++)
      for (int c = 0; c < 16; c++) ppulse(c, 100 + ROUND_BINS * r + c, 10 + (r + c) % 11);
    #(2.0 * (100 + ROUND_BINS * ROUNDS + 200));
    check("TDC FIFO full", int'(tdc_full), 1, 1);
    check("TDC FIFO level", int'(tdc_level), 512, 512);
    check("TDC drops", int'(tdc_drop_count), ROUNDS * 16 - 528, ROUNDS * 16 - 528);
    n_drop = int'(tdc_drop_count);
    // drain
    while (idle < 10) begin
      @(negedge clk);
      if (tdc_rd_valid) begin
        got[tdc_rd_data.channel].push_back(int'(tdc_rd_data.t_lead));
        tot[tdc_rd_data.channel].push_back(int'(tdc_rd_data.tot));
      end
      tdc_rd_en = !tdc_empty;
      idle = (tdc_empty && !tdc_rd_valid) ? idle + 1 : 0;
    end
    tdc_rd_en = 1'b0;
    for (int c = 0; c < 16; c++) begin
      check($sformatf("TDC ch%0d records", c), got[c].size(), 33, 33);
      for (int r = 0; r < got[c].size(); r++) begin
        check($sformatf("TDC ch%0d round %0d t_lead", c, r), got[c][r],
              101 + ROUND_BINS * r + c, 101 + ROUND_BINS * r + c);
        check($sformatf("TDC ch%0d round %0d tot", c, r), tot[c][r],
              10 + (r + c) % 11, 10 + (r + c) % 11);
        n_tdc_rec++;
      end
    end
    check("TDC hit_count", int'(tdc_hit_count), 528, 528);
  endtask

  // ---------------- ADC ----------------
  real cross_ns [8];
  always @(negedge adc_ramp_reset)
    for (int i = 0; i < 8; i++) begin
      automatic int ii = i;
      if (cross_ns[ii] >= 0.0)
        fork begin #(cross_ns[ii]); if (!adc_ramp_reset) adc_vcmp[ii] = 1'b1; end join_none
    end
  always @(posedge adc_ramp_reset) for (int i = 0; i < 8; i++) adc_vcmp[i] = (cross_ns[i] < 0.0);

  task automatic adc_convert(output int cycles);
    for (int i = 0; i < 8; i++) adc_vcmp[i] = (cross_ns[i] < 0.0);
    @(negedge clk); adc_start = 1'b1;
    @(negedge clk); adc_start = 1'b0;
    cycles = 1;
    while (!adc_done && cycles < 10000) begin @(negedge clk); cycles++; end
    n_adc++;
  endtask

  task automatic adc_test();
    int cyc;
    int k [8] = '{0, 1, 77, 512, 1023, 2048, 3333, 4000};
    for (int i = 0; i < 8; i++) cross_ns[i] = (k[i] + 0.5) * TCLK;
    adc_convert(cyc);
    for (int i = 0; i < 8; i++) check($sformatf("ADC ch%0d", i), int'(adc_code[i]), k[i], k[i]);
    check("ADC early stop clocks", cyc, 16 + 4000 + 2, 16 + 4000 + 8);
    if (cyc < 16 + 4095) n_early++;
    for (int i = 0; i < 8; i++) cross_ns[i] = (i * 300.0 + 0.5) * TCLK;
    cross_ns[0] = -1.0;
    cross_ns[7] = 1.0e9;
    adc_convert(cyc);
    check("ADC under range", int'(adc_code[0]), 0, 0);
    check("ADC over range", int'(adc_code[7]), 4095, 4095);
    for (int i = 1; i < 7; i++) check($sformatf("ADC ch%0d mid", i), int'(adc_code[i]),
                                      i * 300, i * 300);
    check("ADC full-scale clocks", cyc, 16 + 4095 + 1, 16 + 4095 + 6);
    if (adc_code[0] == 0 && adc_code[7] == 4095) n_range++;
  endtask

  initial begin
    for (int i = 0; i < 8; i++) cross_ns[i] = 1.0e9;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1'b1;
    @(posedge clk); t0 = $realtime;
    repeat (10) @(posedge clk);
    n_fire = 0;
    fork
      trigger_test();
      tdc_test();
      adc_test();
    join
    $display("mechanisms: fire=%0d runt=%0d deadtime=%0d stuck=%0d L1=%0d noL1=%0d gates=%0d",
             n_fire, n_runt, n_deadtime, n_stuck, n_l1, n_nol1, n_gate);
    $display("            tdc_records=%0d fifo_full_clocks=%0d drops=%0d adc_conv=%0d early=%0d range=%0d",
             n_tdc_rec, n_fifo_full, n_drop, n_adc, n_early, n_range);
    check("mech: 1-shot fire", int'(n_fire > 0), 1, 1);
    check("mech: runt", n_runt, 1, 100);
    check("mech: dead time", n_deadtime, 1, 100);
    check("mech: stuck on", n_stuck, 1, 100);
    check("mech: L1 coincidence", n_l1, 1, 100);
    check("mech: no coincidence", n_nol1, 1, 100);
    check("mech: scaler gate", n_gate, 2, 100);
    check("mech: TDC record", int'(n_tdc_rec > 0), 1, 1);
    check("mech: FIFO full stall", int'(n_fifo_full > 0), 1, 1);
    check("mech: TDC drop", int'(n_drop > 0), 1, 1);
    check("mech: ADC conversion", n_adc, 1, 100);
    check("mech: ADC early stop", n_early, 1, 100);
    check("mech: ADC out of range", n_range, 1, 100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
