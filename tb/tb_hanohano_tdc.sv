`timescale 1ns/1ps
// tb_hanohano_tdc: 16-channel TDC/QDC with a 16-deep FIFO.
// Timing reference as in tb_tdc_channel: an edge at t0 + 2*L + 1 ns reads L+1.
// Phase 1: every channel gets one pulse, channel c starting in bin 50 + 3c and
//   all of them ending in the same bin, so 16 records complete at once and the
//   round-robin collector must serialize them; a reader drains the FIFO and
//   every {channel, t_lead, tot} is checked.
// Phase 2: nobody reads. Each channel sends three pulses: the first 16
//   records fill the FIFO (full), the second ones wait in the channels
//   (collection stalled), the third ones are dropped (drop_count = 16). The
//   FIFO is then drained and exactly the first two pulses of every channel
//   must come out.
module tb_hanohano_tdc;
  import daq_pkg::*;
  localparam int N = 16, D = 16;
  logic clk = 1'b0, rst_n = 1'b1, rd_en = 1'b0;
  logic [N-1:0] pmt_cmp = '0;
  tdc_hit_t rd_data;
  logic rd_valid, fifo_empty, fifo_full;
  logic [4:0] fifo_level;
  logic [31:0] hit_count, drop_count;
  realtime t0;
  int checks = 0, failures = 0;
  int got_lead [N][$];
  int got_tot  [N][$];
  int full_cycles = 0;

  hanohano_tdc #(.N_CH(N), .FIFO_DEPTH(D)) dut (.clk, .rst_n, .pmt_cmp, .rd_en, .rd_data,
    .rd_valid, .fifo_empty, .fifo_full, .fifo_level, .hit_count, .drop_count);

  always #2 clk = ~clk;

  always @(posedge clk) begin
    if (rd_valid) begin
      got_lead[rd_data.channel].push_back(int'(rd_data.t_lead));
      got_tot[rd_data.channel].push_back(int'(rd_data.tot));
    end
    if (fifo_full) full_cycles++;
  end

  task automatic pulse(input int c, input int L, input int W);
    fork begin
      #(t0 + 2.0 * L + 1.0 - $realtime);
      pmt_cmp[c] = 1'b1;
      #(2.0 * W);
      pmt_cmp[c] = 1'b0;
    end join_none
  endtask

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  task automatic drain();
    int idle = 0;
    while (idle < 10) begin
      @(negedge clk);
      rd_en = !fifo_empty;
      idle = fifo_empty ? idle + 1 : 0;
    end
    rd_en = 1'b0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1'b1;
    @(posedge clk); t0 = $realtime;
    for (int c = 0; c < N; c++) begin got_lead[c].delete(); got_tot[c].delete(); end
    full_cycles = 0;

    // Phase 1
    for (int c = 0; c < N; c++) pulse(c, 50 + 3 * c, 60 - 3 * c);
    #(2.0 * 120);
    drain();
    for (int c = 0; c < N; c++) begin
      check($sformatf("phase1 ch%0d records", c), got_lead[c].size(), 1);
      if (got_lead[c].size() > 0) begin
        check($sformatf("phase1 ch%0d t_lead", c), got_lead[c][0], 51 + 3 * c);
        check($sformatf("phase1 ch%0d tot", c), got_tot[c][0], 60 - 3 * c);
      end
      got_lead[c].delete(); got_tot[c].delete();
    end
    check("phase1 hit_count", int'(hit_count), N);

    // Phase 2
    for (int k = 0; k < 3; k++)
      for (int c = 0; c < N; c++) pulse(c, 300 + 40 * k + c, 6 + c % 4);
    #(2.0 * 500);
    check("phase2 FIFO full", int'(fifo_full), 1);
    check("phase2 level", int'(fifo_level), D);
    check("phase2 drops", int'(drop_count), N);
    drain();
    for (int c = 0; c < N; c++) begin
      check($sformatf("phase2 ch%0d records", c), got_lead[c].size(), 2);
      for (int k = 0; k < 2 && k < got_lead[c].size(); k++) begin
        check($sformatf("phase2 ch%0d hit%0d t_lead", c, k), got_lead[c][k], 301 + 40 * k + c);
        check($sformatf("phase2 ch%0d hit%0d tot", c, k), got_tot[c][k], 6 + c % 4);
      end
    end
    check("phase2 hit_count", int'(hit_count), 3 * N);
    check("empty at end", int'(fifo_empty), 1);
    $display("FIFO full for %0d clocks", full_cycles);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
