`timescale 1ns/1ps
// disc_oneshot: one discriminator channel -- a runt-free, fixed-width 1-shot
// behind an LVDS input used as a comparator, plus a "stuck on" detector.
//
// How it works. The comparator output `cmp` (signal on the + input, DAC
// threshold on the - input of the LVDS receiver) is used as a clock: its
// rising edge sets the capture flip-flop `cap` (D tied high), so a threshold
// crossing of any width, however narrow, is remembered. The next `clk` edge
// copies it into `os`, the 1-shot output, which stays high for exactly
// `width` clock cycles (12 ns = 3 cycles of 250 MHz by default, adjustable in
// 4 ns steps). A terminal flip-flop `done_q` then clears the capture and
// output flip-flops asynchronously, so the output is never a runt and the
// channel is dead for the pulse plus one clock (non-retriggerable).
// If the comparator output simply stays high (threshold far inside the
// noise), no new edge arrives; the stuck-on detector sees the synchronized
// level high for STUCK_CYCLES clocks and re-fires the 1-shot, so the channel
// then counts at clk/STUCK_CYCLES (250/16 = 15.6 MHz) instead of near zero.
//
// Interface / timing:
//   cmp    asynchronous comparator output
//   width  1-shot width in clocks, 1..2**WIDTH_BITS-1 (0 means 2**WIDTH_BITS)
//   os     1-shot output, high `width` cycles starting 1 clk edge after `cmp` rises
//   fire   one-cycle pulse on the first cycle of every `os` pulse (for scalers)
//   stuck  high when the last firing came from the stuck-on detector
//
// The capture/shape/clear flip-flop chain follows the published discriminator
// schematic: four D flip-flops, the first clocked by the receiver with D at
// Vcc, the first three sharing one reset line that also meets the fourth.
// Taking the fourth as the stage that drives that reset is this design's
// reading; the middle of the chain is generalized into a cycle counter so the
// width is run-time adjustable in 4 ns steps, as the text describes. The stuck-on detector is described only by what it
// does (a 16 MHz floor rate); its counter implementation is this design's.
module disc_oneshot #(
  parameter int unsigned WIDTH_BITS   = 4,
  parameter int unsigned STUCK_CYCLES = daq_pkg::STUCK_CYCLES
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  cmp,
  input  logic [WIDTH_BITS-1:0] width,
  output logic                  os,
  output logic                  fire,
  output logic                  stuck
);

  localparam int unsigned SC_BITS = $clog2(STUCK_CYCLES);

  logic                  cap;       // edge capture, clocked by the comparator
  logic                  done_q;    // terminal stage: clears cap and os
  logic                  clr;
  logic [WIDTH_BITS-1:0] cnt;       // cycles the output has been high
  logic                  os_q;
  logic                  cmp_s1, cmp_s2;
  logic [SC_BITS-1:0]    stuck_cnt;
  logic                  retrig;

  assign clr = done_q | ~rst_n;

  // Capture flip-flop: D = 1, clocked by the comparator output.
  always_ff @(posedge cmp or posedge clr) begin
    if (clr) cap <= 1'b0;
    else     cap <= 1'b1;
  end

  // Output flip-flop: set by a captured edge or a stuck-on re-fire.
  always_ff @(posedge clk or posedge clr) begin
    if (clr) os <= 1'b0;
    else     os <= os | cap | retrig;
  end

  // Width counter and terminal flip-flop.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt    <= '0;
      done_q <= 1'b0;
      os_q   <= 1'b0;
    end else begin
      cnt    <= os ? cnt + 1'b1 : '0;
      done_q <= os && (cnt == width - 1'b1);
      os_q   <= os;
    end
  end

  assign fire = os & ~os_q;

  // Stuck-on detector on the synchronized comparator level.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cmp_s1    <= 1'b0;
      cmp_s2    <= 1'b0;
      stuck_cnt <= '0;
      stuck     <= 1'b0;
    end else begin
      cmp_s1 <= cmp;
      cmp_s2 <= cmp_s1;
      if (!cmp_s2 || retrig) stuck_cnt <= '0;
      else                   stuck_cnt <= stuck_cnt + 1'b1;
      if (retrig)                  stuck <= 1'b1;
      else if (cap && !os)         stuck <= 1'b0;
    end
  end

  assign retrig = cmp_s2 && (stuck_cnt == SC_BITS'(STUCK_CYCLES - 1));

endmodule
