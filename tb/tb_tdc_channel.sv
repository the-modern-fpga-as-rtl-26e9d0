`timescale 1ns/1ps
// tb_tdc_channel: one TDC/QDC channel fed by the Gray timebase.
// The time reference t0 is the first rising clock edge after reset, where the
// timebase reads 1; a comparator edge at t0 + 2*L + 1 ns (the middle of a 2 ns
// bin) must give t_lead = L + 1, and a pulse of 2*W ns must give tot = W.
// Pulses of 10-50 ns (the PMT range) are checked, some placed in the second
// half of the clock period to exercise the falling-edge half of the timebase,
// one across the 16-bit wrap-around. Then the collector withholds `ack` and a
// second hit must be reported as dropped while the first record is kept.
module tb_tdc_channel;
  logic clk = 1'b0, rst_n = 1'b1, hit = 1'b0, ack = 1'b0;
  logic [15:0] gtime, t_lead, tot;
  logic valid, dropped;
  realtime t0;
  int checks = 0, failures = 0, drops = 0;

  gray_timebase u_tb (.clk, .rst_n, .gray(gtime));
  tdc_channel   dut  (.clk, .rst_n, .hit, .gtime, .valid, .t_lead, .tot, .ack, .dropped);

  always #2 clk = ~clk;
  always @(posedge clk) if (dropped) drops++;

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  // pulse starting in bin L (time value L+1), W bins long
  task automatic send(input int L, input int W);
    #(t0 + 2.0 * L + 1.0 - $realtime);
    hit = 1'b1;
    #(2.0 * W);
    hit = 1'b0;
  endtask

  task automatic expect_record(input int L, input int W);
    int n = 0;
    while (!valid && n < 20) begin @(posedge clk); n++; end
    #0.1;
    check($sformatf("valid for L=%0d", L), int'(valid), 1);
    check($sformatf("t_lead L=%0d", L), int'(t_lead), (L + 1) % 65536);
    check($sformatf("tot L=%0d W=%0d", L, W), int'(tot), W);
    check($sformatf("record latency L=%0d", L), int'(n <= 4), 1);
    @(negedge clk); ack = 1'b1;
    @(negedge clk); ack = 1'b0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1'b1;
    @(posedge clk); t0 = $realtime;
    drops = 0;

    send(20, 5);    expect_record(20, 5);      // 10 ns pulse
    send(61, 25);   expect_record(61, 25);     // 50 ns, odd bin (falling-edge half)
    send(200, 12);  expect_record(200, 12);
    send(333, 17);  expect_record(333, 17);
    for (int i = 0; i < 20; i++) begin
      int L, W;
      L = 400 + 60 * i + int'($urandom_range(0, 30));
      W = int'($urandom_range(5, 25));
      send(L, W); expect_record(L, W);
    end
    // across the wrap-around of the 16-bit time
    send(65530, 10); expect_record(65530, 10);

    // collector busy: second record dropped, first kept
    send(65700, 8);
    repeat (6) @(posedge clk);
    send(65720, 9);
    repeat (8) @(posedge clk);
    check("drop reported", drops, 1);
    expect_record(65700, 8);
    check("no record pending", int'(valid), 0);

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
