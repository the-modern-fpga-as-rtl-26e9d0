`timescale 1ns/1ps
// anita_surf_trigger: the trigger firmware of one sampling board -- 32
// discriminators, their scalers and four antenna-level 3-of-8 coincidences.
//
// The board receives 4 frequency bands x 2 polarizations of 4 antennas, 32
// trigger signals in all, each on an LVDS receiver whose complementary input
// carries a DAC threshold. Input `cmp[c]` is that receiver's output. Every
// channel has its own 1-shot (disc_oneshot, common run-time width), all
// channels feed one scaler bank (disc_scaler), and channels 8a..8a+7 form
// the L1 coincidence of antenna a (l1_coincidence).
//
// Timing: `os` follows a `cmp` rising edge by one clock edge; `l1` follows
// `os` by one clock. Scaler counts are refreshed every GATE_CYCLES clocks.
// The grouping of channels into antennas (8 consecutive inputs per antenna)
// is this design's choice; the counts 32, 8 and 3 are the published ones.
module anita_surf_trigger #(
  parameter int unsigned N_ANT        = daq_pkg::TRIG_ANTENNAS,
  parameter int unsigned PER_ANT      = daq_pkg::TRIG_PER_ANT,
  parameter int unsigned MAJORITY     = daq_pkg::L1_MAJORITY,
  parameter int unsigned STUCK_CYCLES = daq_pkg::STUCK_CYCLES,
  parameter int unsigned GATE_CYCLES  = 250_000,
  parameter int unsigned COUNT_BITS   = 24
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [N_ANT*PER_ANT-1:0] cmp,
  input  logic [3:0]            width,
  output logic [N_ANT*PER_ANT-1:0] os,
  output logic [N_ANT*PER_ANT-1:0] stuck,
  output logic [N_ANT-1:0]      l1,
  output logic [N_ANT-1:0]      l1_pulse,
  output logic [COUNT_BITS-1:0] scaler [N_ANT*PER_ANT],
  output logic                  scaler_valid
);

  localparam int unsigned N = N_ANT * PER_ANT;

  logic [N-1:0] fire;

  for (genvar c = 0; c < N; c++) begin : g_disc
    disc_oneshot #(.WIDTH_BITS(4), .STUCK_CYCLES(STUCK_CYCLES)) u_disc (
      .clk, .rst_n, .cmp(cmp[c]), .width,
      .os(os[c]), .fire(fire[c]), .stuck(stuck[c])
    );
  end

  disc_scaler #(.N(N), .GATE_CYCLES(GATE_CYCLES), .COUNT_BITS(COUNT_BITS)) u_scaler (
    .clk, .rst_n, .fire, .count(scaler), .valid(scaler_valid)
  );

  for (genvar a = 0; a < N_ANT; a++) begin : g_l1
    l1_coincidence #(.N_IN(PER_ANT), .MAJORITY(MAJORITY)) u_l1 (
      .clk, .rst_n, .os(os[a*PER_ANT +: PER_ANT]),
      .l1(l1[a]), .l1_pulse(l1_pulse[a])
    );
  end

endmodule
