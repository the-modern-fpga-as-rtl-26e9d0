`timescale 1ns/1ps
// tdc_channel: time (T) and charge (Q) digitizer for one photomultiplier.
//
// The PMT pulse is discriminated by an LVDS receiver against a DAC reference;
// its output `hit` is high while the pulse is above threshold (10-50 ns for a
// typical PMT pulse). The rising edge of `hit` latches the Gray time `gtime`
// into `lead_g` (arrival time T); the falling edge latches it into `trail_g`
// and toggles `done_tgl`. The time over threshold, trailing minus leading
// time, grows with the pulse charge and serves as Q; it also allows an offline
// time-walk correction of T.
//
// `done_tgl` is synchronized into the `clk` domain by two flip-flops. When its
// change is seen, both latched times have been stable for at least two clocks;
// they are converted to binary and presented as one record (`valid`,
// `t_lead`, `tot`) until the collector answers with `ack`. A record that
// completes while the previous one is still waiting is dropped and reported by
// a one-cycle `dropped` pulse. Requirements on the input: the next leading
// edge must come at least three clocks after a trailing edge.
//
// Latching on both comparator edges with a Gray counter is the published
// scheme; the toggle hand-over, the one-record buffer and the drop rule are this
// design's.
module tdc_channel #(
  parameter int unsigned BITS = daq_pkg::TDC_BITS
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            hit,
  input  logic [BITS-1:0] gtime,
  output logic            valid,
  output logic [BITS-1:0] t_lead,
  output logic [BITS-1:0] tot,
  input  logic            ack,
  output logic            dropped
);

  logic [BITS-1:0] lead_g, trail_g, lead_b, trail_b;
  logic            done_tgl;
  logic [2:0]      tgl_s;
  logic            new_hit;

  always_ff @(posedge hit or negedge rst_n) begin
    if (!rst_n) lead_g <= '0;
    else        lead_g <= gtime;
  end

  always_ff @(negedge hit or negedge rst_n) begin
    if (!rst_n) begin
      trail_g  <= '0;
      done_tgl <= 1'b0;
    end else begin
      trail_g  <= gtime;
      done_tgl <= ~done_tgl;
    end
  end

  assign lead_b  = BITS'(daq_pkg::gray2bin(32'(lead_g)));
  assign trail_b = BITS'(daq_pkg::gray2bin(32'(trail_g)));
  assign new_hit = tgl_s[2] ^ tgl_s[1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tgl_s   <= '0;
      valid   <= 1'b0;
      t_lead  <= '0;
      tot     <= '0;
      dropped <= 1'b0;
    end else begin
      tgl_s   <= {tgl_s[1:0], done_tgl};
      dropped <= 1'b0;
      if (valid && ack) valid <= 1'b0;
      if (new_hit) begin
        if (valid && !ack) begin
          dropped <= 1'b1;
        end else begin
          valid  <= 1'b1;
          t_lead <= lead_b;
          tot    <= trail_b - lead_b;
        end
      end
    end
  end

endmodule
