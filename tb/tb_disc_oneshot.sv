`timescale 1ns/1ps
// tb_disc_oneshot: self-checking test of one discriminator channel.
// A 250 MHz clock (4 ns) drives the channel. The test checks that a 0.3 ns
// runt gives a full-width output, that the width follows the `width` input
// in clock steps, that a second edge inside the dead time is ignored, that a
// comparator held high re-fires every STUCK_CYCLES clocks, and that nothing
// fires once the comparator is low again. Output widths are measured by
// sampling `os` on the falling clock edge.
module tb_disc_oneshot;
  import daq_pkg::*;

  logic clk = 1'b0, rst_n = 1'b1, cmp = 1'b0;
  bit   last_stuck = 1'b0;
  logic [3:0] width = 4'd3;
  logic os, fire, stuck;
  int checks = 0, failures = 0;
  int fires = 0, hi_cycles = 0, stuck_fires = 0;
  int last_fire = -1, cycle = 0, min_gap = 1 << 30, max_gap = 0;

  disc_oneshot dut (.clk, .rst_n, .cmp, .width, .os, .fire, .stuck);

  always #2 clk = ~clk;

  always @(posedge clk) cycle <= cycle + 1;
  always @(negedge clk) begin
    if (os) hi_cycles <= hi_cycles + 1;
    if (fire) begin
      fires <= fires + 1;
      if (stuck) stuck_fires <= stuck_fires + 1;
      if (last_fire >= 0 && stuck && last_stuck) begin
        if (cycle - last_fire < min_gap) min_gap <= cycle - last_fire;
        if (cycle - last_fire > max_gap) max_gap <= cycle - last_fire;
      end
      last_fire <= cycle;
      last_stuck <= stuck;
    end
  end

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic clear_counts();
    @(negedge clk);
    fires = 0; hi_cycles = 0; stuck_fires = 0; last_fire = -1; last_stuck = 1'b0;
    min_gap = 1 << 30; max_gap = 0;
  endtask

  task automatic runt(input realtime w);
    #(1.1);
    cmp = 1'b1; #(w); cmp = 1'b0;
  endtask

  initial begin
    // let the clock run before reset so every asynchronous clear sees an edge
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (3) @(posedge clk);

    // 1. runt pulse, default width 3 clocks (12 ns)
    clear_counts();
    runt(0.3);
    repeat (10) @(posedge clk);
    check("runt fires", fires, 1);
    check("runt width 3", hi_cycles, 3);

    // 2. width sweep in clock steps
    for (int w = 1; w <= 6; w++) begin
      width = 4'(w);
      clear_counts();
      runt(2.5);
      repeat (12) @(posedge clk);
      check($sformatf("fires w=%0d", w), fires, 1);
      check($sformatf("width w=%0d", w), hi_cycles, w);
    end
    width = 4'd3;

    // 3. second edge inside the dead time is not counted
    clear_counts();
    runt(1.0);
    #(5.0);
    cmp = 1'b1; #(1.0); cmp = 1'b0;
    repeat (10) @(posedge clk);
    check("dead time fires", fires, 1);
    check("dead time width", hi_cycles, 3);

    // 4. two edges separated by more than the dead time both count
    clear_counts();
    runt(1.0);
    repeat (6) @(posedge clk);
    runt(1.0);
    repeat (10) @(posedge clk);
    check("two separate edges", fires, 2);

    // 5. stuck-on: comparator held high for 400 clocks
    clear_counts();
    @(posedge clk); #(1.0);
    cmp = 1'b1;
    repeat (400) @(posedge clk);
    #(1.0); cmp = 1'b0;
    repeat (40) @(posedge clk);
    // 1 real edge + floor((400 - sync delay) / 16) re-fires
    checks++;
    if (fires < 1 + 23 || fires > 1 + 25) begin
      failures++; $display("FAIL stuck-on fires %0d", fires);
    end
    check("stuck-on min period", min_gap, STUCK_CYCLES);
    check("stuck-on max period", max_gap, STUCK_CYCLES);
    check("stuck-on fires flagged", stuck_fires, fires - 1);
    $display("stuck-on: %0d firings in 400 clocks", fires);

    // 6. quiet afterwards
    clear_counts();
    repeat (100) @(posedge clk);
    check("quiet", fires, 0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
