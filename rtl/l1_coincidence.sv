`timescale 1ns/1ps
// l1_coincidence: antenna-level (Level 1) majority trigger.
//
// One antenna delivers N_IN = 8 discriminated signals (4 frequency bands x 2
// polarizations). Because every discriminator output is a fixed-width 1-shot
// (12 ns), "coincident" simply means overlapping: on every clock the
// number of 1-shot outputs that are high is compared with MAJORITY (3), and
// `l1` is the registered result. `l1_pulse` marks the first cycle of each L1
// so that one coincidence is counted once. Latency: one clock from the inputs.
//
// Sampling the overlap once per 4 ns clock means two 3-cycle pulses must share
// at least one clock to coincide; this gives an effective coincidence window of
// roughly 2 x 12 ns minus the required overlap, in line with the ~19 ns
// window quoted for the measured accidental L1 rate. The 3-of-8 rule is the
// published one; the synchronous overlap test is this design's realization.
module l1_coincidence #(
  parameter int unsigned N_IN     = daq_pkg::TRIG_PER_ANT,
  parameter int unsigned MAJORITY = daq_pkg::L1_MAJORITY
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [N_IN-1:0] os,
  output logic            l1,
  output logic            l1_pulse
);

  localparam int unsigned CB = $clog2(N_IN + 1);

  logic [CB-1:0] n_high;

  always_comb begin
    n_high = '0;
    for (int i = 0; i < N_IN; i++) n_high = n_high + CB'(os[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      l1       <= 1'b0;
      l1_pulse <= 1'b0;
    end else begin
      l1       <= (n_high >= CB'(MAJORITY));
      l1_pulse <= (n_high >= CB'(MAJORITY)) && !l1;
    end
  end

endmodule
