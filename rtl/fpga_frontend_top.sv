`timescale 1ns/1ps
// fpga_frontend_top: one FPGA used as discriminator, TDC/QDC and ADC.
//
// Three front-end functions that normally need dedicated analog chips are
// placed side by side, all clocked by the same 250 MHz clock (produced from a
// 33 MHz reference by the FPGA's clock manager, outside this RTL):
//   * anita_surf_trigger -- 32 radio trigger channels: LVDS-comparator
//     discriminators with 12 ns runt-free 1-shots and stuck-on detection,
//     singles-rate scalers, and four 3-of-8 antenna (L1) coincidences.
//   * hanohano_tdc -- 16 photomultiplier channels: leading-edge time and time
//     over threshold from a 2 ns Gray-code timebase, collected into a FIFO
//     for the optical-link readout.
//   * wilkinson_adc -- digitization of held analog samples by racing an
//     external ramp against each sample with a 12-bit Gray-code counter.
// Inputs named *_cmp / *_vcmp are the outputs of LVDS receivers used as
// comparators; their analog reference inputs (threshold DACs, the ramp) are
// outside the FPGA. The readout link, clock manager and analog parts are not
// part of this RTL: their signals are ports. Each function has its own
// interface and timing, described in its module; they share only clock and
// reset. Putting all three in one top is this design's packaging: the
// published systems use each function on its own board.
module fpga_frontend_top #(
  parameter int unsigned SCALER_GATE = 250_000,   // 1 ms at 250 MHz
  parameter int unsigned FIFO_DEPTH  = daq_pkg::TDC_FIFO_DEPTH,
  parameter int unsigned ADC_CH      = 8
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // radio trigger discriminators
  input  logic [daq_pkg::TRIG_CHANNELS-1:0] trig_cmp,
  input  logic [3:0]                    trig_width,
  output logic [daq_pkg::TRIG_CHANNELS-1:0] trig_os,
  output logic [daq_pkg::TRIG_CHANNELS-1:0] trig_stuck,
  output logic [daq_pkg::TRIG_ANTENNAS-1:0] l1,
  output logic [daq_pkg::TRIG_ANTENNAS-1:0] l1_pulse,
  output logic [23:0]                   scaler [daq_pkg::TRIG_CHANNELS],
  output logic                          scaler_valid,
  // PMT TDC/QDC
  input  logic [daq_pkg::PMT_CHANNELS-1:0] pmt_cmp,
  input  logic                          tdc_rd_en,
  output daq_pkg::tdc_hit_t             tdc_rd_data,
  output logic                          tdc_rd_valid,
  output logic                          tdc_empty,
  output logic                          tdc_full,
  output logic [$clog2(FIFO_DEPTH):0]   tdc_level,
  output logic [31:0]                   tdc_hit_count,
  output logic [31:0]                   tdc_drop_count,
  // Wilkinson ADC
  input  logic                          adc_start,
  input  logic [ADC_CH-1:0]             adc_vcmp,
  output logic                          adc_ramp_reset,
  output logic                          adc_busy,
  output logic                          adc_done,
  output logic [daq_pkg::ADC_BITS-1:0]  adc_code [ADC_CH]
);

  anita_surf_trigger #(
    .GATE_CYCLES(SCALER_GATE), .COUNT_BITS(24)
  ) u_trigger (
    .clk, .rst_n, .cmp(trig_cmp), .width(trig_width),
    .os(trig_os), .stuck(trig_stuck), .l1, .l1_pulse,
    .scaler, .scaler_valid
  );

  hanohano_tdc #(.N_CH(daq_pkg::PMT_CHANNELS), .FIFO_DEPTH(FIFO_DEPTH)) u_tdc (
    .clk, .rst_n, .pmt_cmp,
    .rd_en(tdc_rd_en), .rd_data(tdc_rd_data), .rd_valid(tdc_rd_valid),
    .fifo_empty(tdc_empty), .fifo_full(tdc_full), .fifo_level(tdc_level),
    .hit_count(tdc_hit_count), .drop_count(tdc_drop_count)
  );

  wilkinson_adc #(.N_CH(ADC_CH), .BITS(daq_pkg::ADC_BITS)) u_adc (
    .clk, .rst_n, .start(adc_start), .vcmp(adc_vcmp),
    .ramp_reset(adc_ramp_reset), .busy(adc_busy), .done(adc_done), .code(adc_code)
  );

endmodule
