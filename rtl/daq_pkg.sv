`timescale 1ns/1ps
// daq_pkg: constants, types and helper functions shared by the FPGA front-end.
//
// The front-end turns a general-purpose FPGA into three kinds of instrumentation
// electronics: a 32-channel trigger discriminator (LVDS inputs used as
// comparators), a 16-channel time-to-digital / charge-to-digital converter
// (time over threshold), and the digital half of a Wilkinson ADC. All three run
// from one 250 MHz clock. Channel counts (32 trigger inputs, 3-of-8 antenna
// coincidence, 16 PMTs) and widths (16-bit TDC counter, 12-bit ADC counter)
// follow the published description; the FIFO depth, scaler gate and event
// record layout are choices of this design.
package daq_pkg;

  // ANITA SURF trigger: 4 antennas x (4 bands x 2 polarizations) = 32 inputs.
  localparam int unsigned TRIG_ANTENNAS   = 4;
  localparam int unsigned TRIG_PER_ANT    = 8;
  localparam int unsigned TRIG_CHANNELS   = TRIG_ANTENNAS * TRIG_PER_ANT;
  localparam int unsigned L1_MAJORITY     = 3;    // 3-of-8 coincidence
  localparam int unsigned ONESHOT_CYCLES  = 3;    // 12 ns at 250 MHz
  localparam int unsigned STUCK_CYCLES    = 16;   // 250 MHz / 16 = 15.6 MHz floor rate

  // HanoHano PMT TDC/QDC.
  localparam int unsigned PMT_CHANNELS    = 16;
  localparam int unsigned TDC_BITS        = 16;   // half-period (2 ns) LSB
  localparam int unsigned CH_BITS         = $clog2(PMT_CHANNELS);
  localparam int unsigned TDC_FIFO_DEPTH  = 512;  // one 512 x 36 block RAM

  // SalSA Wilkinson ADC.
  localparam int unsigned ADC_BITS        = 12;

  // One hit record as written to the TDC FIFO: 4 + 16 + 16 = 36 bits.
  typedef struct packed {
    logic [CH_BITS-1:0]  channel;  // PMT input number
    logic [TDC_BITS-1:0] t_lead;   // leading-edge time, binary, 2 ns units
    logic [TDC_BITS-1:0] tot;      // time over threshold (charge), 2 ns units
  } tdc_hit_t;

  localparam int unsigned HIT_BITS = $bits(tdc_hit_t);

  // Reflected binary (Gray) code conversions, parameterized by width through
  // a 32-bit carrier; callers slice the result.
  function automatic logic [31:0] bin2gray(input logic [31:0] b);
    return b ^ (b >> 1);
  endfunction

  function automatic logic [31:0] gray2bin(input logic [31:0] g);
    logic [31:0] b;
    b[31] = g[31];
    for (int i = 30; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

endpackage
