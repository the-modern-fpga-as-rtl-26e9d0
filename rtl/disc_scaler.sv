`timescale 1ns/1ps
// disc_scaler: rate counters (scalers) for a bank of discriminator channels.
//
// Each channel counts the one-cycle `fire` pulses of its 1-shot during a
// fixed gate of GATE_CYCLES clocks. At the end of every gate all counts are
// copied to `count` together and `valid` pulses for one cycle; counting of
// the next gate starts in the same cycle, so no firing is lost. Counters
// saturate at all-ones. With the default 1 ms gate at 250 MHz a count reads
// directly as a rate in kHz; the stuck-on floor of the discriminator
// (15.6 MHz) gives 15625 per gate.
//
// Measuring singles rates against threshold is how the discriminator is
// characterized and how thresholds are set; the gate length, count width and
// saturation are this design's choices.
module disc_scaler #(
  parameter int unsigned N           = daq_pkg::TRIG_CHANNELS,
  parameter int unsigned GATE_CYCLES = 250_000,
  parameter int unsigned COUNT_BITS  = 24
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [N-1:0]          fire,
  output logic [COUNT_BITS-1:0] count [N],
  output logic                  valid
);

  localparam int unsigned GB = $clog2(GATE_CYCLES);

  logic [GB-1:0]         gate_cnt;
  logic                  gate_end;
  logic [COUNT_BITS-1:0] acc [N];

  assign gate_end = (gate_cnt == GB'(GATE_CYCLES - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gate_cnt <= '0;
      valid    <= 1'b0;
      for (int i = 0; i < N; i++) begin
        acc[i]   <= '0;
        count[i] <= '0;
      end
    end else begin
      gate_cnt <= gate_end ? '0 : gate_cnt + 1'b1;
      valid    <= gate_end;
      for (int i = 0; i < N; i++) begin
        if (gate_end) begin
          count[i] <= (fire[i] && !(&acc[i])) ? acc[i] + 1'b1 : acc[i];
          acc[i]   <= '0;
        end else if (fire[i] && !(&acc[i])) begin
          acc[i]   <= acc[i] + 1'b1;
        end
      end
    end
  end

endmodule
