`timescale 1ns/1ps
// gray_timebase: free-running Gray-code time counter that advances on both
// edges of the 250 MHz clock, i.e. with a 2 ns least significant step.
//
// Hit times are latched asynchronously by the comparator edges (see
// tdc_channel). A Gray code changes exactly one bit per step, so a latch that
// lands on a transition is wrong by at most one step, never by a large amount;
// that is why the counter is Gray-coded. For a reflected Gray code of a count T,
// bit 0 toggles only on the even-to-odd steps and bits [BITS-1:1] form the Gray
// code of T/2. Here the even-to-odd steps are the rising clock edges and the
// odd-to-even steps the falling ones: bit 0 is a toggle flip-flop on the rising
// edge and the upper bits are a (BITS-1)-bit Gray counter on the falling edge.
// Every output bit comes straight from a flip-flop.
//
// After reset the first rising edge starts the count (T = 1); the falling-edge
// counter waits for it so that the sequence is always 0, 1, 2, ... in Gray code.
// The 16-bit width is the published counter width; spending its least
// significant bit on the half-period (rather than adding a 17th bit) is this
// design's choice, giving a 131 us wrap-around.
module gray_timebase #(
  parameter int unsigned BITS = daq_pkg::TDC_BITS
) (
  input  logic            clk,
  input  logic            rst_n,
  output logic [BITS-1:0] gray
);

  logic            started;
  logic            g0;       // bit 0: rising-edge toggle
  logic [BITS-2:0] g_up;     // bits [BITS-1:1]: falling-edge Gray counter
  logic [BITS-2:0] up_bin;   // binary shadow of g_up
  logic [BITS-2:0] up_next;

  assign up_next = up_bin + 1'b1;

  assign gray = {g_up, g0};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      g0      <= 1'b0;
      started <= 1'b0;
    end else begin
      g0      <= ~g0;
      started <= 1'b1;
    end
  end

  always_ff @(negedge clk or negedge rst_n) begin
    if (!rst_n) begin
      up_bin         <= '0;
      g_up   <= '0;
    end else if (started) begin
      up_bin <= up_next;
      g_up   <= (BITS-1)'(daq_pkg::bin2gray(32'(up_next)));
    end
  end

endmodule
