`timescale 1ns/1ps
// wilkinson_adc: the digital half of a multi-channel Wilkinson (ramp-compare)
// ADC whose comparators are FPGA LVDS receivers.
//
// Each held analog sample `Vin` goes to the - input of one LVDS receiver; a
// common, externally built linear ramp (current source, capacitor, reset
// transistor) goes to all + inputs. The ramp and a 12-bit Gray-code counter
// start together; when the ramp passes `Vin` the receiver output `vcmp[i]`
// rises and clocks that channel's register, which takes the counter value.
// The count is proportional to Vin, so the conversion has no missing codes
// and is as linear as the ramp.
//
// Sequence (one `start` pulse, while idle):
//   RESET  ramp_reset stays high RESET_CYCLES clocks; counter and channel
//          registers are cleared (the clear rises at `start`, so the
//          comparator-clocked registers always see a fresh clear edge).
//   RUN    ramp_reset low; the counter advances once per clock (count k holds
//          from clock k to k+1 after the ramp started). It ends when every
//          channel has fired or the counter reaches 2**BITS-1.
//   DONE   results are converted from Gray to binary: `code[i]` of a channel
//          that fired is its latched count; one that never fired reads all
//          ones if its comparator is low (above the ramp's range) and 0 if it
//          is high (below the ramp's start). `done` pulses for one clock and
//          the ramp is reset again.
// A conversion takes RESET_CYCLES + (largest code) + about 5 clocks. Trading
// resolution for speed is done with the counter clock or BITS.
//
// Comparator polarity (ramp on +, Vin on -), the 12-bit Gray counter and the
// register clocked by the comparator output are as published. The channel
// count, reset length, early stop and out-of-range codes are this design's.
module wilkinson_adc #(
  parameter int unsigned N_CH         = 8,
  parameter int unsigned BITS         = daq_pkg::ADC_BITS,
  parameter int unsigned RESET_CYCLES = 16
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [N_CH-1:0] vcmp,
  output logic            ramp_reset,
  output logic            busy,
  output logic            done,
  output logic [BITS-1:0] code [N_CH]
);

  typedef enum logic [1:0] {S_IDLE, S_RESET, S_RUN, S_DONE} state_t;

  localparam int unsigned RB = $clog2(RESET_CYCLES + 1);

  state_t          state;
  logic [RB-1:0]   rcnt;
  logic [BITS-1:0] cbin, cgray;
  logic            arm_clr;                 // clears the channel registers
  logic [N_CH-1:0] fired;                   // set by a comparator edge
  logic [BITS-1:0] latch_g [N_CH];
  logic [N_CH-1:0] fired_s1, fired_s2, vcmp_s1, vcmp_s2;

  // Channel registers, clocked by the comparator outputs.
  for (genvar i = 0; i < N_CH; i++) begin : g_ch
    logic            f;
    logic [BITS-1:0] g;
    always_ff @(posedge vcmp[i] or posedge arm_clr) begin
      if (arm_clr) begin
        f <= 1'b0;
        g <= '0;
      end else if (!f) begin
        f <= 1'b1;
        g <= cgray;
      end
    end
    assign fired[i]   = f;
    assign latch_g[i] = g;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fired_s1 <= '0; fired_s2 <= '0;
      vcmp_s1  <= '0; vcmp_s2  <= '0;
    end else begin
      fired_s1 <= fired;    fired_s2 <= fired_s1;
      vcmp_s1  <= vcmp;     vcmp_s2  <= vcmp_s1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      rcnt       <= '0;
      cbin       <= '0;
      cgray      <= '0;
      arm_clr    <= 1'b0;
      ramp_reset <= 1'b1;
      done       <= 1'b0;
      for (int i = 0; i < N_CH; i++) code[i] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          ramp_reset <= 1'b1;
          arm_clr    <= 1'b0;
          if (start) begin
            state   <= S_RESET;
            rcnt    <= '0;
            arm_clr <= 1'b1;
          end
        end
        S_RESET: begin
          cbin  <= '0;
          cgray <= '0;
          rcnt  <= rcnt + 1'b1;
          if (rcnt == RB'(RESET_CYCLES - 1)) begin
            state      <= S_RUN;
            ramp_reset <= 1'b0;
            arm_clr    <= 1'b0;
          end
        end
        S_RUN: begin
          if (&cbin || (&fired_s2)) begin
            state <= S_DONE;
          end else begin
            cbin  <= cbin + 1'b1;
            cgray <= BITS'(daq_pkg::bin2gray(32'(cbin + 1'b1)));
          end
        end
        S_DONE: begin
          for (int i = 0; i < N_CH; i++) begin
            if (fired_s2[i])     code[i] <= BITS'(daq_pkg::gray2bin(32'(latch_g[i])));
            else if (vcmp_s2[i]) code[i] <= '0;
            else                 code[i] <= '1;
          end
          done       <= 1'b1;
          ramp_reset <= 1'b1;
          state      <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
